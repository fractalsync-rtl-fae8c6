// tb_sync_overhead: the synchronization-overhead workload of the paper's
// performance table. A whole-system fsync at the root, on the two-tile
// neighbour case and on 2x2, 4x4 and 8x8 meshes (the 16x16 mesh has two
// testbenches of its own), for the native tree and the
// pipelined tree. Expected overheads (cycles), from the table:
//   native     4, 6, 10, 14
//   pipelined  4, 6, 10, 18
module tb_sync_overhead;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;

  localparam int NCFG = 8;
  logic [NCFG-1:0] d;
  int c [NCFG];
  int f [NCFG];
  int s [NCFG];

  always #5 clk = ~clk;

  sync_overhead_env #(.LEVELS(1), .PIPELINE(0), .EXP(4))  n1 (clk, rst_n, d[0], c[0], f[0], s[0]);
  sync_overhead_env #(.LEVELS(2), .PIPELINE(0), .EXP(6))  n2 (clk, rst_n, d[1], c[1], f[1], s[1]);
  sync_overhead_env #(.LEVELS(4), .PIPELINE(0), .EXP(10)) n4 (clk, rst_n, d[2], c[2], f[2], s[2]);
  sync_overhead_env #(.LEVELS(6), .PIPELINE(0), .EXP(14)) n8 (clk, rst_n, d[3], c[3], f[3], s[3]);
  sync_overhead_env #(.LEVELS(1), .PIPELINE(1), .EXP(4))  p1 (clk, rst_n, d[4], c[4], f[4], s[4]);
  sync_overhead_env #(.LEVELS(2), .PIPELINE(1), .EXP(6))  p2 (clk, rst_n, d[5], c[5], f[5], s[5]);
  sync_overhead_env #(.LEVELS(4), .PIPELINE(1), .EXP(10)) p4 (clk, rst_n, d[6], c[6], f[6], s[6]);
  sync_overhead_env #(.LEVELS(6), .PIPELINE(1), .EXP(18)) p8 (clk, rst_n, d[7], c[7], f[7], s[7]);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (d == '1);
    for (int i = 0; i < NCFG; i++) begin checks += c[i]; failures += f[i]; end
    $display("overhead (cycles)  neighbour 2x2 4x4 8x8");
    $display("  FSync            %0d %0d %0d %0d", s[0], s[1], s[2], s[3]);
    $display("  FSync+Pipeline   %0d %0d %0d %0d", s[4], s[5], s[6], s[7]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
