// tb_fsync_signal_mon: random sync/ack patterns and clears against a
// reference model of the sticky "all ports seen" report.
module tb_fsync_signal_mon;
  localparam int unsigned N = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] sig;
  logic clr, all;
  logic [N-1:0] model;
  int checks = 0, failures = 0;
  int n_all = 0, n_split = 0;

  fsync_signal_mon #(.N(N)) dut (.clk_i(clk), .rst_ni(rst_n), .sig_i(sig), .clr_i(clr), .all_o(all));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin

    sig = '0; clr = 1'b0; model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      sig = ($urandom_range(0, 3) == 0) ? N'($urandom) : '0;
      clr = ($urandom_range(0, 5) == 0);
      #1;
      checks++;
      if (all !== &(model | sig)) begin
        failures++;
        $display("mismatch cycle %0d: all=%b model=%b sig=%b", i, all, model, sig);
      end
      if (all && (model != '0) && (sig != '0)) n_split++;
      if (all) n_all++;
      @(posedge clk);
      model = clr ? '0 : (model | sig);
    end
    checks++;
    if (n_all == 0 || n_split == 0) begin
      failures++;
      $display("coverage: all=%0d split=%0d", n_all, n_split);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
