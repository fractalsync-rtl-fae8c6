// tb_fsync_xif_decoder: drives fsync instructions into the decoder and plays
// the leaf FractalSync module. Checks the one-cycle sync pulse one cycle
// after issue, the one-hot level (all-zero when out of range), that the core
// is stalled meanwhile, ack and result exactly one cycle after the wake's
// rising edge, the returned id and error, and that a wake still held from
// the previous barrier does not complete a new one.
module tb_fsync_xif_decoder;
  import fsync_pkg::*;
  localparam int unsigned L = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic iv, ir, rv, rr, sync, ack, wake, err;
  xif_issue_t  ii;
  xif_result_t ro;
  logic [L-1:0] lvl;
  int checks = 0, failures = 0;
  int cyc = 0;
  int n_sync = 0, n_ack = 0;

  fsync_xif_decoder #(.LEVELS(L)) dut (.clk_i(clk), .rst_ni(rst_n),
    .issue_valid_i(iv), .issue_ready_o(ir), .issue_i(ii),
    .result_valid_o(rv), .result_ready_i(rr), .result_o(ro),
    .sync_o(sync), .lvl_o(lvl), .ack_o(ack), .wake_i(wake), .error_i(err));

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (sync) n_sync++;
    if (ack) n_ack++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(negedge clk); cyc++; endtask
  task automatic chk(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL cycle %0d %s: got %0h expected %0h", cyc, what, got, exp); end
  endtask

  // One fsync: level number lv, leaf answers dly cycles after the sync
  // pulse with error e; wake_hold keeps wake high after the ack.
  task automatic one_fsync(input int lv, input int dly, input logic e, input logic [3:0] id,
                           input bit wake_hold, input bit stale_before);
    int s0, a0;
    logic [L-1:0] exp_lvl;
    exp_lvl = (lv >= 1 && lv <= int'(L)) ? (L'(1) << (lv - 1)) : '0;
    s0 = n_sync; a0 = n_ack;
    tick(); iv = 1'b1; ii = '{instr: {17'd0, F3_FSYNC, 5'd0, OPC_FSYNC}, rs1: 32'(lv), id: id};
    #1 chk("ready in idle", 32'(ir), 1);
    tick(); iv = 1'b0; #1;
    chk("sync pulse", 32'(sync), 1);
    chk("lvl", 32'(lvl), 32'(exp_lvl));
    chk("stalled", 32'(ir), 0);
    for (int i = 0; i < dly; i++) begin
      tick(); #1;
      chk("sync single", 32'(sync), 0);
      chk("no early result", 32'(rv), 0);
      if (stale_before && i == 0) wake = 1'b0;
    end
    tick(); wake = 1'b1; err = e; #1;
    chk("no result at wake", 32'(rv), 0);
    tick(); rr = 1'b0; #1;
    chk("ack after wake", 32'(ack), 1);
    chk("result after wake", 32'(rv), 1);
    chk("result id", 32'(ro.id), 32'(id));
    chk("result err", 32'(ro.err), 32'(e));
    if (!wake_hold) wake = 1'b0;
    tick(); #1;
    chk("ack single", 32'(ack), 0);
    chk("result held", 32'(rv), 1);
    rr = 1'b1;
    tick(); #1;
    chk("back to idle", 32'(ir), 1);
    chk("one sync", 32'(n_sync - s0), 1);
    chk("one ack", 32'(n_ack - a0), 1);
    err = 1'b0;
  endtask

  initial begin
    iv = 0; rr = 1; wake = 0; err = 0; ii = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int lv = 0; lv <= int'(L) + 1; lv++) one_fsync(lv, 1 + lv, 1'b0, 4'(lv), 1'b0, 1'b0);
    one_fsync(2, 3, 1'b1, 4'd9, 1'b1, 1'b0);   // error, wake left high
    one_fsync(1, 4, 1'b0, 4'd3, 1'b0, 1'b1);   // stale wake dropped during wait
    for (int k = 0; k < 40; k++)
      one_fsync($urandom_range(1, L), $urandom_range(1, 9), 1'($urandom), 4'($urandom), 1'b0, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
