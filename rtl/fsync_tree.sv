// fsync_tree: the FractalSync synchronization network, a binary tree of
// FractalSync modules over NT = 2**LEVELS tiles (NT-1 modules).
//
// Level 1 modules each pair two tiles; level l pairs two level l-1 modules;
// the single level LEVELS module is the root. Tiles are numbered here in
// tree order (see fsync_pkg::tree_to_tile for the mesh placement), so node j
// of level l serves tiles j*2**l .. (j+1)*2**l - 1. A node at level l sees
// LEVELS-l+1 level wires; every level up drops one wire, as the paper
// describes, so a tile's one-hot lvl has LEVELS bits and bit l-1 selects the
// level-l ancestor as the barrier point. All tiles under that ancestor form
// one synchronization domain; disjoint subtrees synchronize independently.
//
// PIPELINE = 0 is the native FractalSync tree. PIPELINE = 1 is the
// FractalSync+Pipeline variant: links into level p >= 5 get
// fsync_pkg::pipe_stages(p-1) register stages (1 for levels 5-6, 3 for 7-8),
// the number that splits each H-tree link into segments no longer than a
// tile pitch. With these stages the tree reproduces both latency columns of
// the paper's performance table (see the mesh testbench).
//
// Timing (native): a barrier at level l costs 2*l cycles from the last sync
// pulse entering a leaf to the wake leaving the leaves (one cycle per level
// each way). The tile ports are plain wires into the leaf nodes.
module fsync_tree
  import fsync_pkg::*;
#(
  parameter int unsigned LEVELS   = 4,     // 4x4 mesh: 2*log2(4)
  parameter bit          PIPELINE = 1'b0,
  localparam int unsigned NT      = 1 << LEVELS
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic [NT-1:0]                 tile_sync_i,
  input  logic [NT-1:0][LEVELS-1:0]     tile_lvl_i,
  input  logic [NT-1:0]                 tile_ack_i,
  output logic [NT-1:0]                 tile_wake_o,
  output logic [NT-1:0]                 tile_error_o
);

  // Link signals per edge e (e = 0: tiles -> level 1; e = l: level l ->
  // level l+1). c_* is the child end, p_* the parent end of the link.
  logic [NT-1:0]             c_sync  [LEVELS+1];
  logic [NT-1:0][LEVELS-1:0] c_lvl   [LEVELS+1];
  logic [NT-1:0]             c_ack   [LEVELS+1];
  logic [NT-1:0]             c_wake  [LEVELS+1];
  logic [NT-1:0]             c_error [LEVELS+1];
  logic [NT-1:0]             p_sync  [LEVELS];
  logic [NT-1:0][LEVELS-1:0] p_lvl   [LEVELS];
  logic [NT-1:0]             p_ack   [LEVELS];
  logic [NT-1:0]             p_wake  [LEVELS];
  logic [NT-1:0]             p_error [LEVELS];

  assign c_sync[0]    = tile_sync_i;
  assign c_lvl[0]     = tile_lvl_i;
  assign c_ack[0]     = tile_ack_i;
  assign tile_wake_o  = c_wake[0];
  assign tile_error_o = c_error[0];

  // Links.
  for (genvar e = 0; e < LEVELS; e++) begin : g_edge
    localparam int unsigned CNT = NT >> e;
    localparam int unsigned ST  = PIPELINE ? pipe_stages(e) : 0;
    for (genvar i = 0; i < NT; i++) begin : g_link
      if (i >= CNT) begin : g_unused
        assign p_sync[e][i]  = 1'b0;
        assign p_lvl[e][i]   = '0;
        assign p_ack[e][i]   = 1'b0;
        assign c_wake[e][i]  = 1'b0;
        assign c_error[e][i] = 1'b0;
      end else if (ST == 0) begin : g_wire
        assign p_sync[e][i]  = c_sync[e][i];
        assign p_lvl[e][i]   = c_lvl[e][i];
        assign p_ack[e][i]   = c_ack[e][i];
        assign c_wake[e][i]  = p_wake[e][i];
        assign c_error[e][i] = p_error[e][i];
      end else begin : g_pipe
        fsync_pipe #(.STAGES(ST), .LVL_W(LEVELS)) i_pipe (
          .clk_i, .rst_ni,
          .chd_sync_i  (c_sync[e][i]),
          .chd_lvl_i   (c_lvl[e][i]),
          .chd_ack_i   (c_ack[e][i]),
          .chd_wake_o  (c_wake[e][i]),
          .chd_error_o (c_error[e][i]),
          .par_sync_o  (p_sync[e][i]),
          .par_lvl_o   (p_lvl[e][i]),
          .par_ack_o   (p_ack[e][i]),
          .par_wake_i  (p_wake[e][i]),
          .par_error_i (p_error[e][i])
        );
      end
    end
  end

  // Nodes.
  for (genvar l = 1; l <= LEVELS; l++) begin : g_level
    localparam int unsigned CNT = NT >> l;
    localparam int unsigned N   = LEVELS - l + 1;
    localparam int unsigned MW  = (N > 1) ? N - 1 : 1;
    for (genvar j = 0; j < NT; j++) begin : g_node
      if (j >= CNT) begin : g_unused
        assign c_sync[l][j]  = 1'b0;
        assign c_lvl[l][j]   = '0;
        assign c_ack[l][j]   = 1'b0;
      end else begin : g_fs
        logic [1:0][N-1:0] slv_lvl;
        logic [1:0]        slv_wake, slv_error;
        logic [MW-1:0]     mst_lvl;
        assign slv_lvl[0] = p_lvl[l-1][2*j][N-1:0];
        assign slv_lvl[1] = p_lvl[l-1][2*j+1][N-1:0];
        fractal_sync #(.N(N), .IS_ROOT(l == LEVELS)) i_fs (
          .clk_i, .rst_ni,
          .slv_sync_i  ({p_sync[l-1][2*j+1], p_sync[l-1][2*j]}),
          .slv_lvl_i   (slv_lvl),
          .slv_ack_i   ({p_ack[l-1][2*j+1], p_ack[l-1][2*j]}),
          .slv_wake_o  (slv_wake),
          .slv_error_o (slv_error),
          .mst_sync_o  (c_sync[l][j]),
          .mst_lvl_o   (mst_lvl),
          .mst_ack_o   (c_ack[l][j]),
          .mst_wake_i  (c_wake[l][j]),
          .mst_error_i (c_error[l][j])
        );
        assign {p_wake[l-1][2*j+1], p_wake[l-1][2*j]}   = slv_wake;
        assign {p_error[l-1][2*j+1], p_error[l-1][2*j]} = slv_error;
        assign c_lvl[l][j] = LEVELS'(mst_lvl);
      end
    end
  end

  // Parent ends of unused links at each edge.
  for (genvar l = 1; l <= LEVELS; l++) begin : g_tie
    for (genvar i = 2 * (NT >> l); i < NT; i++) begin : g_i
      assign p_wake[l-1][i]  = 1'b0;
      assign p_error[l-1][i] = 1'b0;
    end
  end

  // The root has no master.
  for (genvar i = 0; i < NT; i++) begin : g_top
    assign c_wake[LEVELS][i]  = 1'b0;
    assign c_error[LEVELS][i] = 1'b0;
  end

endmodule
