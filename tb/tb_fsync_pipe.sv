// tb_fsync_pipe: random traffic in both directions; every output must equal
// the matching input exactly STAGES cycles earlier.
module tb_fsync_pipe;
  localparam int unsigned ST = 3;
  localparam int unsigned LW = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic c_sync, c_ack, c_wake, c_err, p_sync, p_ack, p_wake, p_err;
  logic [LW-1:0] c_lvl, p_lvl;
  logic [LW+1:0] up_hist [ST+1];
  logic [1:0]    dn_hist [ST+1];
  int checks = 0, failures = 0;

  fsync_pipe #(.STAGES(ST), .LVL_W(LW)) dut (.clk_i(clk), .rst_ni(rst_n),
    .chd_sync_i(c_sync), .chd_lvl_i(c_lvl), .chd_ack_i(c_ack), .chd_wake_o(c_wake), .chd_error_o(c_err),
    .par_sync_o(p_sync), .par_lvl_o(p_lvl), .par_ack_o(p_ack), .par_wake_i(p_wake), .par_error_i(p_err));

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {c_sync, c_ack, c_lvl, p_wake, p_err} = '0;
    for (int k = 0; k <= ST; k++) begin up_hist[k] = '0; dn_hist[k] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      {c_sync, c_ack} = 2'($urandom);
      c_lvl = LW'($urandom);
      {p_wake, p_err} = 2'($urandom);
      // history: index k = value applied k cycles ago
      for (int k = ST; k > 0; k--) begin up_hist[k] = up_hist[k-1]; dn_hist[k] = dn_hist[k-1]; end
      up_hist[0] = {c_sync, c_ack, c_lvl};
      dn_hist[0] = {p_wake, p_err};
      #1;
      checks += 2;
      if ({p_sync, p_ack, p_lvl} !== up_hist[ST]) begin failures++; $display("up mismatch at %0d", i); end
      if ({c_wake, c_err} !== dn_hist[ST]) begin failures++; $display("down mismatch at %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
