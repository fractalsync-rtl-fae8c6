// tb_sync_overhead_16x16: the synchronization-overhead workload of the
// paper's performance table on the largest mesh, 16x16 tiles (8 tree
// levels, 255 FractalSync modules), native tree: a whole-mesh fsync must
// cost 18 cycles. A sibling testbench checks the pipelined tree (34). The fsync decoders and the
// tree are used without the Xif dispatchers (see sync_overhead_env).
module tb_sync_overhead_16x16;
  localparam bit PIPE = 1'b0;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  logic d;
  int c, f, s;

  always #5 clk = ~clk;

  sync_overhead_env #(.LEVELS(8), .PIPELINE(PIPE), .EXP(PIPE ? 34 : 18), .USE_MESH(0)) e16 (clk, rst_n, d, c, f, s);

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (d);
    checks = c;
    failures = f;
    $display("16x16 overhead (cycles), pipelined tree %0d: %0d", PIPE, s);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
