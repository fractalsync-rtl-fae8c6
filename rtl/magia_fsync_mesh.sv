// magia_fsync_mesh: the synchronization fabric of a K x K MAGIA mesh.
//
// Every tile's control core issues fsync(level) as an Xif extension
// instruction. Per tile, an xif_dispatcher sends it (by opcode / funct3) to
// the tile's fsync_xif_decoder, which turns it into a one-hot request on the
// FractalSync H-tree (fsync_tree, K*K-1 modules). Instructions for the iDMA
// control unit and for RedMulE are routed to ports of this module, where
// those units (not part of this RTL) connect; their results come back
// through the same dispatcher.
//
// Tiles are numbered row-major, tile = row*K + col. The tree pairs tiles as
// in the paper's 4x4 figure: horizontal neighbours first, then vertical
// pairs of those, and so on alternately; fsync_pkg::tree_to_tile gives the
// mapping. A barrier at level l joins the 2**l tiles of one subtree: level 1
// is a horizontal pair, level 2 a 2x2 block, level 3 a 4x2 block, ...,
// level 2*log2(K) the whole mesh.
//
// PIPELINE selects the FractalSync+Pipeline variant of the tree (register
// stages on links longer than one tile pitch). Timing of one fsync at level
// l, from the last core's issue to the earliest next instruction: 2l+2 cycles
// (native); see fsync_tree and fsync_xif_decoder. The NoC, L1/L2 memories,
// cores and accelerators of the tile are outside this module.
module magia_fsync_mesh
  import fsync_pkg::*;
#(
  parameter int unsigned K        = 4,
  parameter bit          PIPELINE = 1'b0,
  localparam int unsigned NT      = K * K,
  localparam int unsigned LEVELS  = 2 * $clog2(K)
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // cores' Xif (one per tile, row-major)
  input  logic        [NT-1:0]   core_issue_valid_i,
  output logic        [NT-1:0]   core_issue_ready_o,
  output logic        [NT-1:0]   core_issue_accept_o,
  input  xif_issue_t  [NT-1:0]   core_issue_i,
  output logic        [NT-1:0]   core_result_valid_o,
  input  logic        [NT-1:0]   core_result_ready_i,
  output xif_result_t [NT-1:0]   core_result_o,
  // iDMA control unit Xif targets
  output logic        [NT-1:0]   idma_issue_valid_o,
  input  logic        [NT-1:0]   idma_issue_ready_i,
  output xif_issue_t  [NT-1:0]   idma_issue_o,
  input  logic        [NT-1:0]   idma_result_valid_i,
  output logic        [NT-1:0]   idma_result_ready_o,
  input  xif_result_t [NT-1:0]   idma_result_i,
  // RedMulE Xif targets
  output logic        [NT-1:0]   redmule_issue_valid_o,
  input  logic        [NT-1:0]   redmule_issue_ready_i,
  output xif_issue_t  [NT-1:0]   redmule_issue_o,
  input  logic        [NT-1:0]   redmule_result_valid_i,
  output logic        [NT-1:0]   redmule_result_ready_o,
  input  xif_result_t [NT-1:0]   redmule_result_i
);

  // Tile side of the tree, in tree order.
  logic [NT-1:0]             t_sync, t_ack, t_wake, t_error;
  logic [NT-1:0][LEVELS-1:0] t_lvl;

  for (genvar t = 0; t < NT; t++) begin : g_tile
    localparam int unsigned TI = tree_to_tile(t, LEVELS);

    logic        [XIF_NUM_TGT-1:0] tv, tr, rv, rr;
    xif_issue_t                    ti;
    xif_result_t [XIF_NUM_TGT-1:0] res;
    logic                          fs_valid, fs_ready, fs_rvalid;
    xif_result_t                   fs_res;

    xif_dispatcher i_disp (
      .issue_valid_i      (core_issue_valid_i[TI]),
      .issue_ready_o      (core_issue_ready_o[TI]),
      .issue_accept_o     (core_issue_accept_o[TI]),
      .issue_i            (core_issue_i[TI]),
      .result_valid_o     (core_result_valid_o[TI]),
      .result_ready_i     (core_result_ready_i[TI]),
      .result_o           (core_result_o[TI]),
      .tgt_issue_valid_o  (tv),
      .tgt_issue_ready_i  (tr),
      .tgt_issue_o        (ti),
      .tgt_result_valid_i (rv),
      .tgt_result_ready_o (rr),
      .tgt_result_i       (res)
    );

    assign idma_issue_valid_o[TI]    = tv[TGT_IDMA];
    assign redmule_issue_valid_o[TI] = tv[TGT_REDMULE];
    assign fs_valid                  = tv[TGT_FSYNC];
    assign idma_issue_o[TI]          = ti;
    assign redmule_issue_o[TI]       = ti;
    assign tr[TGT_IDMA]              = idma_issue_ready_i[TI];
    assign tr[TGT_REDMULE]           = redmule_issue_ready_i[TI];
    assign tr[TGT_FSYNC]             = fs_ready;
    assign rv[TGT_IDMA]              = idma_result_valid_i[TI];
    assign rv[TGT_REDMULE]           = redmule_result_valid_i[TI];
    assign rv[TGT_FSYNC]             = fs_rvalid;
    assign res[TGT_IDMA]             = idma_result_i[TI];
    assign res[TGT_REDMULE]          = redmule_result_i[TI];
    assign res[TGT_FSYNC]            = fs_res;
    assign idma_result_ready_o[TI]    = rr[TGT_IDMA];
    assign redmule_result_ready_o[TI] = rr[TGT_REDMULE];

    fsync_xif_decoder #(.LEVELS(LEVELS)) i_dec (
      .clk_i, .rst_ni,
      .issue_valid_i  (fs_valid),
      .issue_ready_o  (fs_ready),
      .issue_i        (ti),
      .result_valid_o (fs_rvalid),
      .result_ready_i (rr[TGT_FSYNC]),
      .result_o       (fs_res),
      .sync_o         (t_sync[t]),
      .lvl_o          (t_lvl[t]),
      .ack_o          (t_ack[t]),
      .wake_i         (t_wake[t]),
      .error_i        (t_error[t])
    );
  end

  fsync_tree #(.LEVELS(LEVELS), .PIPELINE(PIPELINE)) i_tree (
    .clk_i, .rst_ni,
    .tile_sync_i  (t_sync),
    .tile_lvl_i   (t_lvl),
    .tile_ack_i   (t_ack),
    .tile_wake_o  (t_wake),
    .tile_error_o (t_error)
  );

endmodule
