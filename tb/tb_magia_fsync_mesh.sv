// tb_magia_fsync_mesh: end-to-end test of the mesh synchronization fabric at
// its default size (4x4 tiles, native tree, no parameter overrides).
//
// Each tile runs a small BSP program on a core model: a few offloaded
// instructions (to iDMA and RedMulE responder models, or ordinary
// instructions that no unit accepts), then fsync(level) with the level set
// by the phase's synchronization-domain partition. Phases: the partition of
// the paper's 4x4 figure, a whole-mesh barrier, random partitions, and one
// phase in which two neighbours ask for different levels. For every tile the
// fsync result must arrive exactly 2l+1 cycles after the last issue in its
// domain (overhead 2l+2 to the next instruction), with the error flag only
// in the mismatch phase. Every mechanism is counted; one that never
// happened counts as a failure.
module tb_magia_fsync_mesh;
  import fsync_pkg::*;
  localparam int unsigned K  = 4;
  localparam int unsigned NT = K * K;
  localparam int unsigned LV = 2 * $clog2(K);
  localparam int unsigned PHASES = 14;

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  int cyc = 0;

  logic        [NT-1:0] civ, cir, cia, crv, crr;
  xif_issue_t  [NT-1:0] cii;
  xif_result_t [NT-1:0] cro;
  logic        [NT-1:0] div_, dir_, drv, drr, miv, mir, mrv, mrr;
  xif_issue_t  [NT-1:0] dio, mio;
  xif_result_t [NT-1:0] dres, mres;

  magia_fsync_mesh dut (.clk_i(clk), .rst_ni(rst_n),
    .core_issue_valid_i(civ), .core_issue_ready_o(cir), .core_issue_accept_o(cia), .core_issue_i(cii),
    .core_result_valid_o(crv), .core_result_ready_i(crr), .core_result_o(cro),
    .idma_issue_valid_o(div_), .idma_issue_ready_i(dir_), .idma_issue_o(dio),
    .idma_result_valid_i(drv), .idma_result_ready_o(drr), .idma_result_i(dres),
    .redmule_issue_valid_o(miv), .redmule_issue_ready_i(mir), .redmule_issue_o(mio),
    .redmule_result_valid_i(mrv), .redmule_result_ready_o(mrr), .redmule_result_i(mres));

  always #5 clk = ~clk;
  always @(negedge clk) cyc <= cyc + 1;

  // phase control
  int          phase = -1;
  int unsigned lvl_of [NT];
  logic        bad_phase = 1'b0;
  logic [NT-1:0] done;
  int          r_cyc [NT];
  int          x_cyc [NT];
  logic        x_err [NT];
  // mechanism counters
  int n_idma = 0, n_redmule = 0, n_plain = 0, n_local = 0, n_prop = 0, n_mesh = 0;
  int n_stagger = 0, n_error = 0, n_stall = 0;

  // Independent tree-order index: interleave column and row bits.
  function automatic int unsigned tree_idx(input int unsigned tile);
    int unsigned r, c, t;
    r = tile / K; c = tile % K; t = 0;
    for (int unsigned b = 0; b < LV / 2; b++) begin
      t |= ((c >> b) & 1) << (2 * b);
      t |= ((r >> b) & 1) << (2 * b + 1);
    end
    return t;
  endfunction

  function automatic void split(input int unsigned lo, input int unsigned l);
    if (l == 1 || $urandom_range(0, 2) == 0) begin
      for (int unsigned tile = 0; tile < NT; tile++)
        if ((tree_idx(tile) >> l) == (lo >> l)) lvl_of[tile] = l;
    end else begin
      split(lo, l - 1);
      split(lo + (1 << (l - 1)), l - 1);
    end
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog: phase %0d done %b", phase, done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NT; g++) begin : g_tile
    // iDMA and RedMulE responder models: random ready, answer after 1-6 cycles.
    int d_left = -1, m_left = -1;
    logic [XIF_ID_W-1:0] d_id, m_id;
    always @(negedge clk) begin
      dir_[g] <= ($urandom_range(0, 2) != 0) && d_left < 0;
      mir[g]  <= ($urandom_range(0, 2) != 0) && m_left < 0;
      if (!rst_n) begin drv[g] <= 1'b0; mrv[g] <= 1'b0; end
    end
    always @(posedge clk) if (rst_n) begin
      if (div_[g] && dir_[g]) begin d_left <= $urandom_range(1, 6); d_id <= dio[g].id; end
      else if (d_left > 0) d_left <= d_left - 1;
      if (miv[g] && mir[g]) begin m_left <= $urandom_range(1, 6); m_id <= mio[g].id; end
      else if (m_left > 0) m_left <= m_left - 1;
      if (d_left == 0 && !drv[g]) begin drv[g] <= 1'b1; dres[g] <= '{id: d_id, data: 32'hD0A0_0000 | 32'(g), err: 1'b0}; end
      if (drv[g] && drr[g]) begin drv[g] <= 1'b0; d_left <= -1; end
      if (m_left == 0 && !mrv[g]) begin mrv[g] <= 1'b1; mres[g] <= '{id: m_id, data: 32'hBEE0_0000 | 32'(g), err: 1'b0}; end
      if (mrv[g] && mrr[g]) begin mrv[g] <= 1'b0; m_left <= -1; end
    end

    // Core model.
    task automatic issue(input logic [6:0] opc, input logic [31:0] rs1, input logic [3:0] id,
                         output int hs_cyc, output logic acc);
      @(negedge clk);
      civ[g] = 1'b1;
      cii[g] = '{instr: {17'h0, 3'b000, 5'd1, opc}, rs1: rs1, id: id};
      #1;
      while (!cir[g]) begin
        if (opc != OPC_FSYNC) n_stall++;
        @(negedge clk); #1;
      end
      hs_cyc = cyc;
      acc = cia[g];
      @(posedge clk);
      #1 civ[g] = 1'b0;
    endtask

    task automatic wait_result(output int rc, output xif_result_t r);
      crr[g] = 1'b1;
      @(negedge clk); #1;
      while (!crv[g]) begin @(negedge clk); #1; end
      rc = cyc;
      r = cro[g];
      @(posedge clk);
    endtask

    initial begin
      int hs, rc;
      logic acc;
      xif_result_t r;
      civ[g] = 1'b0; crr[g] = 1'b1; cii[g] = '0;
      dres[g] = '0; mres[g] = '0;
      @(posedge rst_n);
      for (int p = 0; p < PHASES; p++) begin
        wait (phase == p);
        for (int k = 0; k < $urandom_range(0, 2); k++) begin
          int kind;
          logic [3:0] id;
          kind = $urandom_range(0, 2);
          id = 4'($urandom);
          issue(kind == 0 ? OPC_IDMA : kind == 1 ? OPC_REDMULE : 7'b0110011, $urandom, id, hs, acc);
          checks++;
          if (acc !== (kind != 2)) begin failures++; $display("FAIL tile %0d accept", g); end
          if (kind != 2) begin
            wait_result(rc, r);
            checks++;
            if (r.id !== id || r.data !== ((kind == 0 ? 32'hD0A0_0000 : 32'hBEE0_0000) | 32'(g))) begin
              failures++; $display("FAIL tile %0d result routing", g);
            end
            if (kind == 0) n_idma++; else n_redmule++;
          end else n_plain++;
        end
        repeat ($urandom_range(0, 6)) @(negedge clk);
        issue(OPC_FSYNC, (bad_phase && g == 1) ? 32'd2 : 32'(lvl_of[g]), 4'(p), hs, acc);
        r_cyc[g] = hs;
        wait_result(rc, r);
        x_cyc[g] = rc;
        x_err[g] = r.err;
        checks++;
        if (r.id !== 4'(p)) begin failures++; $display("FAIL tile %0d fsync id", g); end
        done[g] = 1'b1;
      end
    end
  end

  initial begin
    done = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    for (int p = 0; p < PHASES; p++) begin
      @(negedge clk);
      bad_phase = (p == PHASES - 1);
      // partitions are given per row-major tile
      if (p == 0) begin
        // figure partition: top two rows together (level 3), lower-left 2x2
        // block (level 2), lower-right pairs (level 1)
        for (int t = 0; t < NT; t++)
          lvl_of[t] = (t / K < 2) ? 3 : ((t % K) < 2 ? 2 : 1);
      end else if (p == 1) begin
        for (int t = 0; t < NT; t++) lvl_of[t] = LV;
      end else if (bad_phase) begin
        for (int t = 0; t < NT; t++) lvl_of[t] = 1;
      end else begin
        split(0, LV);
      end
      done = '0;
      phase = p;
      wait (done == '1);
      // check every tile against its domain
      for (int t = 0; t < NT; t++) begin
        int unsigned l;
        int last, expc;
        bit stag;
        l = lvl_of[t];
        last = 0;
        stag = 1'b0;
        for (int u = 0; u < NT; u++)
          if ((tree_idx(u) >> l) == (tree_idx(t) >> l)) begin
            if (r_cyc[u] > last) last = r_cyc[u];
            if (r_cyc[u] != r_cyc[t]) stag = 1'b1;
          end
        if (bad_phase && t < 2) last = (r_cyc[0] > r_cyc[1]) ? r_cyc[0] : r_cyc[1];
        expc = last + 2 * int'(l) + 1;
        checks += 2;
        if (x_cyc[t] != expc) begin
          failures++;
          $display("FAIL phase %0d tile %0d level %0d: result at %0d, expected %0d", p, t, l, x_cyc[t], expc);
        end
        if (x_err[t] !== (bad_phase && t < 2)) begin
          failures++;
          $display("FAIL phase %0d tile %0d: error %b", p, t, x_err[t]);
        end
        if ((tree_idx(t) & ((1 << l) - 1)) == 0) begin
          if (bad_phase && t == 0) n_error++;
          else if (l == LV) n_mesh++;
          else if (l == 1) n_local++;
          else n_prop++;
          if (stag) n_stagger++;
        end
      end
    end
    $display("mechanisms: idma %0d redmule %0d not-accepted %0d local %0d propagated %0d mesh-wide %0d staggered %0d error %0d target-backpressure %0d",
             n_idma, n_redmule, n_plain, n_local, n_prop, n_mesh, n_stagger, n_error, n_stall);
    checks += 9;
    if (n_idma == 0)    failures++;
    if (n_redmule == 0) failures++;
    if (n_plain == 0)   failures++;
    if (n_local == 0)   failures++;
    if (n_prop == 0)    failures++;
    if (n_mesh == 0)    failures++;
    if (n_stagger == 0) failures++;
    if (n_error == 0)   failures++;
    if (n_stall == 0)   failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
