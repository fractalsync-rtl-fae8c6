// sync_overhead_env: measures the synchronization overhead
//   S = max(F) - max(R)
// of a whole-system fsync at the root of the tree, where R is the cycle in
// which a core's fsync is accepted and F the cycle in which the core can
// execute its next instruction (result handshake + 1). LEVELS = 1 is the
// two-tile "neighbour" case, built from two fsync decoders and a one-level
// tree; LEVELS = 2, 4, 6, 8 are the 2x2 .. 16x16 meshes (magia_fsync_mesh,
// or with USE_MESH = 0 the decoders and tree alone, without the
// dispatchers, which add no cycle and make the largest mesh slow to build).
// Cores issue at random offsets; every repetition must measure EXP cycles.
module sync_overhead_env
  import fsync_pkg::*;
#(
  parameter int unsigned LEVELS   = 2,
  parameter bit          PIPELINE = 1'b0,
  parameter int unsigned EXP      = 6,
  parameter int unsigned REPS     = 4,
  parameter bit          USE_MESH = 1'b1
) (
  input  logic clk_i,
  input  logic rst_ni,
  output logic done_o,
  output int   checks_o,
  output int   failures_o,
  output int   s_o
);
  localparam int unsigned NT = 1 << LEVELS;

  logic        [NT-1:0] civ, cir, crv;
  xif_issue_t  [NT-1:0] cii;
  xif_result_t [NT-1:0] cro;

  if (LEVELS == 1 || !USE_MESH) begin : g_pair
    logic [NT-1:0]             sync, ack, wake, err;
    logic [NT-1:0][LEVELS-1:0] lvl;
    for (genvar t = 0; t < NT; t++) begin : g_dec
      fsync_xif_decoder #(.LEVELS(LEVELS)) i_dec (.clk_i, .rst_ni,
        .issue_valid_i(civ[t]), .issue_ready_o(cir[t]), .issue_i(cii[t]),
        .result_valid_o(crv[t]), .result_ready_i(1'b1), .result_o(cro[t]),
        .sync_o(sync[t]), .lvl_o(lvl[t]), .ack_o(ack[t]), .wake_i(wake[t]), .error_i(err[t]));
    end
    fsync_tree #(.LEVELS(LEVELS), .PIPELINE(PIPELINE)) i_tree (.clk_i, .rst_ni,
      .tile_sync_i(sync), .tile_lvl_i(lvl), .tile_ack_i(ack), .tile_wake_o(wake), .tile_error_o(err));
  end else begin : g_mesh
    localparam int unsigned K = 1 << (LEVELS / 2);
    magia_fsync_mesh #(.K(K), .PIPELINE(PIPELINE)) i_mesh (.clk_i, .rst_ni,
      .core_issue_valid_i(civ), .core_issue_ready_o(cir), .core_issue_accept_o(),
      .core_issue_i(cii), .core_result_valid_o(crv), .core_result_ready_i('1), .core_result_o(cro),
      .idma_issue_valid_o(), .idma_issue_ready_i('0), .idma_issue_o(),
      .idma_result_valid_i('0), .idma_result_ready_o(), .idma_result_i('0),
      .redmule_issue_valid_o(), .redmule_issue_ready_i('0), .redmule_issue_o(),
      .redmule_result_valid_i('0), .redmule_result_ready_o(), .redmule_result_i('0));
  end

  int cyc = 0;
  int start_c [NT];
  int r_c [NT];
  int f_c [NT];
  logic [NT-1:0] issued, finished;
  logic [NT-1:0] bad_err;

  always @(negedge clk_i) cyc <= cyc + 1;

  // Core models: raise issue at start_c, hold until accepted, wait result.
  always @(posedge clk_i) begin
    for (int t = 0; t < NT; t++) begin
      if (civ[t] && cir[t]) begin
        r_c[t] <= cyc;
        issued[t] <= 1'b1;
      end
      if (crv[t] && issued[t] && !finished[t]) begin
        f_c[t] <= cyc + 1;
        finished[t] <= 1'b1;
        if (cro[t].err) bad_err[t] <= 1'b1;
      end
    end
  end
  always @(negedge clk_i) begin
    for (int t = 0; t < NT; t++) begin
      civ[t] <= (cyc + 1 >= start_c[t]) && !issued[t] && !(civ[t] && cir[t]);
      cii[t] <= '{instr: {17'h0, F3_FSYNC, 5'd0, OPC_FSYNC}, rs1: 32'(LEVELS), id: 4'(t)};
    end
  end

  initial begin
    done_o = 1'b0; checks_o = 0; failures_o = 0; s_o = 0;
    issued = '1; finished = '1; bad_err = '0;
    for (int t = 0; t < NT; t++) start_c[t] = 1 << 30;
    @(posedge rst_ni);
    repeat (3) @(posedge clk_i);
    for (int rep = 0; rep < int'(REPS); rep++) begin
      int mr, mf;
      @(negedge clk_i);
      for (int t = 0; t < NT; t++) start_c[t] = cyc + 2 + ((rep == 0) ? 0 : $urandom_range(0, 9));
      issued = '0; finished = '0;
      wait (finished == '1);
      mr = 0; mf = 0;
      for (int t = 0; t < NT; t++) begin
        if (r_c[t] > mr) mr = r_c[t];
        if (f_c[t] > mf) mf = f_c[t];
      end
      s_o = mf - mr;
      checks_o += 2;
      if (s_o != int'(EXP)) begin
        failures_o++;
        $display("FAIL levels %0d pipeline %0d rep %0d: S = %0d, expected %0d", LEVELS, PIPELINE, rep, s_o, EXP);
      end
      if (bad_err != '0) begin failures_o++; $display("FAIL levels %0d: error flag", LEVELS); end
      for (int t = 0; t < NT; t++) start_c[t] = 1 << 30;
      repeat (5) @(negedge clk_i);
    end
    done_o = 1'b1;
  end
endmodule
