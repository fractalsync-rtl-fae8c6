// tb_fractal_sync: directed cycle-by-cycle scenarios on one FractalSync
// module (N = 3, inner node) and on a root module (N = 1):
//   local barrier, staggered requests, propagation to the master and the
//   wake coming back, level mismatch, error from the master, a stale master
//   wake that must not release a new request, and the root's range check.
// Inputs change just after the falling edge; outputs are sampled 1 time
// unit later, so every check names the exact cycle of an event.
module tb_fractal_sync;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  int cyc = 0;

  // inner node
  logic [1:0] s_sync, s_ack, s_wake, s_err;
  logic [1:0][2:0] s_lvl;
  logic m_sync, m_ack, m_wake, m_err;
  logic [1:0] m_lvl;
  // root node
  logic [1:0] r_sync, r_ack, r_wake, r_err;
  logic [1:0][0:0] r_lvl;
  logic r_msync, r_mack;
  logic [0:0] r_mlvl;

  int n_msync = 0, n_mack = 0;

  fractal_sync #(.N(3), .IS_ROOT(1'b0)) dut (.clk_i(clk), .rst_ni(rst_n),
    .slv_sync_i(s_sync), .slv_lvl_i(s_lvl), .slv_ack_i(s_ack), .slv_wake_o(s_wake), .slv_error_o(s_err),
    .mst_sync_o(m_sync), .mst_lvl_o(m_lvl), .mst_ack_o(m_ack), .mst_wake_i(m_wake), .mst_error_i(m_err));

  fractal_sync #(.N(1), .IS_ROOT(1'b1)) root (.clk_i(clk), .rst_ni(rst_n),
    .slv_sync_i(r_sync), .slv_lvl_i(r_lvl), .slv_ack_i(r_ack), .slv_wake_o(r_wake), .slv_error_o(r_err),
    .mst_sync_o(r_msync), .mst_lvl_o(r_mlvl), .mst_ack_o(r_mack), .mst_wake_i(1'b0), .mst_error_i(1'b0));

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (m_sync) n_msync++;
    if (m_ack) n_mack++;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick();
    @(negedge clk);
    cyc++;
  endtask

  task automatic settle();
    #1;
  endtask

  task automatic expect_eq(input string what, input logic [7:0] got, input logic [7:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL cycle %0d %s: got %h expected %h", cyc, what, got, exp);
    end
  endtask

  task automatic idle_cycles(input int n);
    for (int i = 0; i < n; i++) tick();
  endtask

  initial begin
    int base_sync, base_ack;
    s_sync = '0; s_ack = '0; s_lvl = '0; m_wake = 0; m_err = 0;
    r_sync = '0; r_ack = '0; r_lvl = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    idle_cycles(2);

    // ---- A: local barrier, both requests in one cycle ----
    base_sync = n_msync;
    tick(); s_sync = 2'b11; s_lvl[0] = 3'b001; s_lvl[1] = 3'b001; settle();
    expect_eq("A wake before", 8'(s_wake), 8'b00);
    tick(); s_sync = 2'b00; s_lvl = '0; settle();
    expect_eq("A wake t+1", 8'(s_wake), 8'b11);
    expect_eq("A err t+1", 8'(s_err), 8'b00);
    tick(); settle(); expect_eq("A wake t+2", 8'(s_wake), 8'b11);
    tick(); s_ack = 2'b01; settle(); expect_eq("A wake at ack0", 8'(s_wake), 8'b11);
    tick(); s_ack = 2'b00; settle(); expect_eq("A wake after ack0", 8'(s_wake), 8'b11);
    tick(); s_ack = 2'b10; settle(); expect_eq("A wake at ack1", 8'(s_wake), 8'b11);
    tick(); s_ack = 2'b00; settle(); expect_eq("A wake released", 8'(s_wake), 8'b00);
    expect_eq("A no propagation", 8'(n_msync - base_sync), 8'd0);
    idle_cycles(2);

    // ---- B: staggered requests, 4 cycles apart ----
    tick(); s_sync = 2'b01; s_lvl[0] = 3'b001; settle();
    tick(); s_sync = 2'b00; s_lvl = '0; settle();
    for (int i = 0; i < 3; i++) begin
      expect_eq("B no early wake", 8'(s_wake), 8'b00);
      tick(); settle();
    end
    s_sync = 2'b10; s_lvl[1] = 3'b001; settle();
    expect_eq("B no wake in last-sync cycle", 8'(s_wake), 8'b00);
    tick(); s_sync = 2'b00; s_lvl = '0; settle();
    expect_eq("B wake one cycle after last sync", 8'(s_wake), 8'b11);
    tick(); s_ack = 2'b11; settle();
    tick(); s_ack = 2'b00; settle(); expect_eq("B released", 8'(s_wake), 8'b00);
    idle_cycles(2);

    // ---- C: propagation to the master ----
    base_sync = n_msync; base_ack = n_mack;
    tick(); s_sync = 2'b11; s_lvl[0] = 3'b010; s_lvl[1] = 3'b010; settle();
    expect_eq("C mst_sync t", 8'(m_sync), 8'd0);
    tick(); s_sync = 2'b00; s_lvl = '0; settle();
    expect_eq("C mst_sync t+1", 8'(m_sync), 8'd1);
    expect_eq("C mst_lvl", 8'(m_lvl), 8'b01);
    expect_eq("C no local wake", 8'(s_wake), 8'b00);
    tick(); settle(); expect_eq("C mst_sync pulse", 8'(m_sync), 8'd0);
    tick(); m_wake = 1'b1; settle(); expect_eq("C wake waits for register", 8'(s_wake), 8'b00);
    tick(); settle(); expect_eq("C wake passed down", 8'(s_wake), 8'b11);
    tick(); settle(); expect_eq("C wake held", 8'(s_wake), 8'b11);
    tick(); s_ack = 2'b11; settle(); expect_eq("C no mst_ack yet", 8'(m_ack), 8'd0);
    tick(); s_ack = 2'b00; settle();
    expect_eq("C mst_ack", 8'(m_ack), 8'd1);
    expect_eq("C wake released", 8'(s_wake), 8'b00);
    tick(); m_wake = 1'b0; settle(); expect_eq("C mst_ack pulse", 8'(m_ack), 8'd0);
    expect_eq("C one mst_sync", 8'(n_msync - base_sync), 8'd1);
    expect_eq("C one mst_ack", 8'(n_mack - base_ack), 8'd1);
    idle_cycles(3);

    // ---- D: level mismatch ----
    base_sync = n_msync;
    tick(); s_sync = 2'b11; s_lvl[0] = 3'b001; s_lvl[1] = 3'b010; settle();
    tick(); s_sync = 2'b00; s_lvl = '0; settle();
    expect_eq("D wake", 8'(s_wake), 8'b11);
    expect_eq("D error", 8'(s_err), 8'b11);
    tick(); s_ack = 2'b11; settle(); expect_eq("D error held", 8'(s_err), 8'b11);
    tick(); s_ack = 2'b00; settle();
    expect_eq("D released", 8'(s_wake), 8'b00);
    expect_eq("D error cleared", 8'(s_err), 8'b00);
    expect_eq("D no propagation", 8'(n_msync - base_sync), 8'd0);
    idle_cycles(2);

    // ---- E: error returned by the master ----
    tick(); s_sync = 2'b11; s_lvl[0] = 3'b100; s_lvl[1] = 3'b100; settle();
    tick(); s_sync = 2'b00; s_lvl = '0; settle();
    expect_eq("E mst_lvl", 8'(m_lvl), 8'b10);
    tick(); m_wake = 1'b1; m_err = 1'b1; settle();
    tick(); settle();
    expect_eq("E wake", 8'(s_wake), 8'b11);
    expect_eq("E error with wake", 8'(s_err), 8'b11);
    tick(); s_ack = 2'b11; settle();
    tick(); s_ack = 2'b00; settle();
    expect_eq("E mst_ack", 8'(m_ack), 8'd1);
    tick(); m_wake = 1'b0; m_err = 1'b0; settle();
    expect_eq("E error cleared", 8'(s_err), 8'b00);
    idle_cycles(3);

    // ---- F: stale master wake must not release a new request ----
    tick(); s_sync = 2'b11; s_lvl[0] = 3'b010; s_lvl[1] = 3'b010; settle();
    tick(); s_sync = 2'b00; s_lvl = '0; settle();
    tick(); m_wake = 1'b1; settle();
    tick(); settle(); expect_eq("F first wake", 8'(s_wake), 8'b11);
    tick(); s_ack = 2'b11; settle();
    tick(); s_ack = 2'b00; settle(); expect_eq("F mst_ack", 8'(m_ack), 8'd1);
    // new request while the master still holds the old wake
    s_sync = 2'b11; s_lvl[0] = 3'b010; s_lvl[1] = 3'b010; settle();
    tick(); s_sync = 2'b00; s_lvl = '0; settle();
    expect_eq("F second propagation", 8'(m_sync), 8'd1);
    for (int i = 0; i < 3; i++) begin
      tick(); settle(); expect_eq("F stale wake ignored", 8'(s_wake), 8'b00);
    end
    m_wake = 1'b0;
    tick(); settle(); expect_eq("F still waiting", 8'(s_wake), 8'b00);
    tick(); m_wake = 1'b1; settle();
    tick(); settle(); expect_eq("F fresh wake", 8'(s_wake), 8'b11);
    tick(); s_ack = 2'b11; settle();
    tick(); s_ack = 2'b00; settle();
    tick(); m_wake = 1'b0; settle();
    idle_cycles(2);

    // ---- G: root range check ----
    tick(); r_sync = 2'b11; r_lvl[0] = 1'b1; r_lvl[1] = 1'b1; settle();
    tick(); r_sync = 2'b00; r_lvl = '0; settle();
    expect_eq("G root wake", 8'(r_wake), 8'b11);
    expect_eq("G root no error", 8'(r_err), 8'b00);
    tick(); r_ack = 2'b11; settle();
    tick(); r_ack = 2'b00; settle();
    tick(); r_sync = 2'b11; settle();
    tick(); r_sync = 2'b00; settle();
    expect_eq("G root out-of-range wake", 8'(r_wake), 8'b11);
    expect_eq("G root out-of-range error", 8'(r_err), 8'b11);
    expect_eq("G root never propagates", 8'(r_msync), 8'd0);
    tick(); r_ack = 2'b11; settle();
    tick(); r_ack = 2'b00; settle();
    expect_eq("G root released", 8'(r_wake), 8'b00);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
