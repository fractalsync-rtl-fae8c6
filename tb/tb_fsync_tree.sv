// tb_fsync_tree: runs the FractalSync tree in two configurations, the 4x4
// mesh tree (4 levels, native) and an 8x8 mesh tree (6 levels) with the
// FractalSync+Pipeline link stages, through random synchronization-domain
// partitions, the paper's figure partition and level-mismatch errors
// detected at a leaf node and at a level-2 node.
// Wake times are checked to the cycle (see fsync_tree_env).
module tb_fsync_tree;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  logic d0, d1;
  int c0, f0, c1, f1;
  int nl0, np0, ns0, ne0, nl1, np1, ns1, ne1;

  always #5 clk = ~clk;

  fsync_tree_env #(.LEVELS(4), .PIPELINE(1'b0), .ROUNDS(30)) e0 (.clk_i(clk), .rst_ni(rst_n),
    .done_o(d0), .checks_o(c0), .failures_o(f0), .n_local_o(nl0), .n_prop_o(np0), .n_stagger_o(ns0), .n_error_o(ne0));
  fsync_tree_env #(.LEVELS(6), .PIPELINE(1'b1), .ROUNDS(15)) e1 (.clk_i(clk), .rst_ni(rst_n),
    .done_o(d1), .checks_o(c1), .failures_o(f1), .n_local_o(nl1), .n_prop_o(np1), .n_stagger_o(ns1), .n_error_o(ne1));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks + c0 + c1, failures + f0 + f1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (d0 && d1);
    checks = c0 + c1;
    failures = f0 + f1;
    $display("local %0d/%0d prop %0d/%0d stagger %0d/%0d error %0d/%0d", nl0, nl1, np0, np1, ns0, ns1, ne0, ne1);
    checks += 4;
    if (nl0 == 0 || nl1 == 0) failures++;
    if (np0 == 0 || np1 == 0) failures++;
    if (ns0 == 0 || ns1 == 0) failures++;
    if (ne0 == 0 || ne1 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
