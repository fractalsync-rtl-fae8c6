// fsync_tree_env: test environment for fsync_tree, used by the tree testbench.
//
// Holds one tree and a behavioural model of its 2**LEVELS tiles. Each round
// splits the tiles into synchronization domains (random subtrees; round 0 of
// a 16-tile tree uses the partition of the paper's 4x4 figure), lets every
// tile request at a random cycle, and checks that each tile is woken exactly
//   last request in its domain + 2*l - 1 + 2*(pipeline stages up to level l)
// cycles later, with the error line low. The last two rounds make two
// requests meet with different levels, once at a level-2 node (the error
// travels down through the level-1 nodes) and once at a leaf; the tiles
// concerned must be woken on time with the error line set.
// Results leave through checks_o / failures_o when done_o rises.
module fsync_tree_env
  import fsync_pkg::*;
#(
  parameter int unsigned LEVELS   = 4,
  parameter bit          PIPELINE = 1'b0,
  parameter int unsigned ROUNDS   = 20
) (
  input  logic clk_i,
  input  logic rst_ni,
  output logic done_o,
  output int   checks_o,
  output int   failures_o,
  output int   n_local_o,
  output int   n_prop_o,
  output int   n_stagger_o,
  output int   n_error_o
);
  localparam int unsigned NT = 1 << LEVELS;

  logic [NT-1:0]             sync, ack, wake, err;
  logic [NT-1:0][LEVELS-1:0] lvl;

  fsync_tree #(.LEVELS(LEVELS), .PIPELINE(PIPELINE)) dut (
    .clk_i, .rst_ni, .tile_sync_i(sync), .tile_lvl_i(lvl), .tile_ack_i(ack),
    .tile_wake_o(wake), .tile_error_o(err));

  int cyc = 0;
  int unsigned dom_lvl   [NT];
  int          req_cyc   [NT];
  int          wake_cyc  [NT];
  logic        wake_err  [NT];
  logic [NT-1:0] prev_wake, ack_next;
  logic        bad_pair;
  int unsigned req_lvl   [NT];
  logic        exp_err   [NT];

  always @(negedge clk_i) cyc <= cyc + 1;

  function automatic int unsigned pipe_extra(input int unsigned l);
    int unsigned s = 0;
    if (PIPELINE) for (int unsigned e = 0; e < l; e++) s += pipe_stages(e);
    return s;
  endfunction

  function automatic void split(input int unsigned lo, input int unsigned l);
    if (l == 1 || $urandom_range(0, 2) == 0) begin
      for (int unsigned t = lo; t < lo + (1 << l); t++) dom_lvl[t] = l;
    end else begin
      split(lo, l - 1);
      split(lo + (1 << (l - 1)), l - 1);
    end
  endfunction

  // Tile models: drive at the falling edge, react to the rising edge of wake.
  always @(negedge clk_i) begin
    for (int t = 0; t < NT; t++) begin
      sync[t] <= (cyc + 1 == req_cyc[t]);
      lvl[t]  <= (cyc + 1 == req_cyc[t]) ?
                 (LEVELS'(1) << (req_lvl[t] - 1)) : '0;
      ack[t]  <= ack_next[t];
    end
  end

  always @(posedge clk_i) begin
    // cyc counts the cycle that is ending at this edge
    prev_wake <= wake;
    for (int t = 0; t < NT; t++) begin
      ack_next[t] <= wake[t] && !prev_wake[t];
      if (wake[t] && !prev_wake[t] && wake_cyc[t] < 0) begin
        wake_cyc[t] <= cyc;
        wake_err[t] <= err[t];
      end
    end
  end

  initial begin
    checks_o = 0; failures_o = 0; done_o = 1'b0;
    n_local_o = 0; n_prop_o = 0; n_stagger_o = 0; n_error_o = 0;
    bad_pair = 1'b0;
    prev_wake = '0; ack_next = '0;
    for (int t = 0; t < NT; t++) begin req_cyc[t] = -1; wake_cyc[t] = -1; dom_lvl[t] = 1; end
    @(posedge rst_ni);
    repeat (3) @(posedge clk_i);
    for (int r = 0; r <= ROUNDS; r++) begin
      int start;
      int w;
      @(negedge clk_i);
      bad_pair = (r >= ROUNDS - 1);
      if (r == 0 && LEVELS == 4) begin
        for (int t = 0; t < 8; t++)   dom_lvl[t] = 3;
        for (int t = 8; t < 12; t++)  dom_lvl[t] = 2;
        for (int t = 12; t < 16; t++) dom_lvl[t] = 1;
      end else if (r == ROUNDS) begin
        for (int t = 0; t < NT; t++) dom_lvl[t] = 1;
      end else if (r == ROUNDS - 1) begin
        // tiles 0-3 form a level-2 domain, but tiles 2-3 ask for level 3:
        // the level-2 node finds the mismatch and its error reaches the
        // tiles through the level-1 nodes; tiles 4-7 are a level-2 domain
        for (int t = 0; t < NT; t++) dom_lvl[t] = (t < 8) ? 2 : 1;
      end else begin
        split(0, LEVELS);
      end
      for (int t = 0; t < NT; t++) begin
        req_lvl[t] = dom_lvl[t];
        exp_err[t] = 1'b0;
      end
      if (r == ROUNDS) begin
        req_lvl[1] = 2;
        exp_err[0] = 1'b1; exp_err[1] = 1'b1;
      end else if (r == ROUNDS - 1) begin
        req_lvl[2] = 3; req_lvl[3] = 3;
        for (int t = 0; t < 4; t++) exp_err[t] = 1'b1;
      end
      start = cyc + 3;
      for (int t = 0; t < NT; t++) begin
        req_cyc[t]  = start + $urandom_range(0, 7);
        wake_cyc[t] = -1;
      end
      // wait for every tile to be woken
      w = 0;
      while (w < 400) begin
        bit all_done;
        all_done = 1'b1;
        @(negedge clk_i);
        for (int t = 0; t < NT; t++) if (wake_cyc[t] < 0) all_done = 1'b0;
        if (all_done) break;
        w++;
      end
      // check
      for (int t = 0; t < NT; t++) begin
        int unsigned l;
        int last;
        int expc;
        int lo;
        bit stagger;
        l = dom_lvl[t];
        last = 0;
        lo = (t >> l) << l;
        stagger = 1'b0;
        for (int u = lo; u < lo + (1 << l); u++) begin
          if (req_cyc[u] > last) last = req_cyc[u];
          if (req_cyc[u] != req_cyc[lo]) stagger = 1'b1;
        end
        expc = last + 2 * int'(l) - 1 + 2 * int'(pipe_extra(l));
        checks_o++;
        if (wake_cyc[t] != expc) begin
          failures_o++;
          $display("FAIL L=%0d P=%0d round %0d tile %0d level %0d: wake at %0d, expected %0d",
                   LEVELS, PIPELINE, r, t, l, wake_cyc[t], expc);
        end
        checks_o++;
        if (wake_err[t] !== exp_err[t]) begin
          failures_o++;
          $display("FAIL L=%0d round %0d tile %0d: error=%b", LEVELS, r, t, wake_err[t]);
        end
        if ((t & ((1 << l) - 1)) == 0) begin
          if (exp_err[t]) n_error_o++;
          else if (l == 1) n_local_o++;
          else n_prop_o++;
          if (stagger) n_stagger_o++;
        end
      end
      // let the wakes drop before the next round
      repeat (6) @(negedge clk_i);
      checks_o++;
      if (wake != '0) begin
        failures_o++;
        $display("FAIL L=%0d round %0d: wake still high", LEVELS, r);
      end
    end
    done_o = 1'b1;
  end
endmodule
