// tb_fsync_error_logic: random enable/clear/source patterns against a
// reference model of the error flag and of the same-cycle valid report.
module tb_fsync_error_logic;
  logic clk = 1'b0, rst_n = 1'b0;
  logic en, clr, use_mst, mismatch, mst_error, valid;
  logic [1:0] slv_error;
  logic model_q, exp_valid;
  int checks = 0, failures = 0;
  int n_loc = 0, n_rem = 0;

  fsync_error_logic dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .clr_i(clr), .use_mst_i(use_mst),
    .mismatch_i(mismatch), .mst_error_i(mst_error), .valid_o(valid), .slv_error_o(slv_error));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin

    {en, clr, use_mst, mismatch, mst_error} = '0;
    model_q = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      en = $urandom_range(0, 2) == 0;
      clr = $urandom_range(0, 7) == 0;
      use_mst = $urandom;
      mismatch = $urandom;
      mst_error = $urandom;
      #1;
      exp_valid = en & (use_mst ? mst_error : mismatch);
      if (exp_valid && !use_mst) n_loc++;
      if (exp_valid && use_mst) n_rem++;
      checks += 2;
      if (valid !== exp_valid) begin failures++; $display("valid mismatch at %0d", i); end
      if (slv_error !== {2{model_q | exp_valid}}) begin failures++; $display("slv_error mismatch at %0d", i); end
      @(posedge clk);
      model_q = clr ? 1'b0 : (model_q | exp_valid);
    end
    checks++;
    if (n_loc == 0 || n_rem == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
