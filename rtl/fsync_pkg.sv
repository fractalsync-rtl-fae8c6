// fsync_pkg: types and constants shared by the FractalSync synchronization
// tree and the tile-side Xif logic of the MAGIA mesh.
//
// The tree is a binary tree over 2**LEVELS tiles. A level is carried one-hot:
// bit 0 of a node's lvl field means "synchronize here", higher bits are
// forwarded to the parent after dropping bit 0. Tile indices: the mesh uses
// row-major numbering (row*K + col); the tree uses an interleaved "tree
// order" in which the lowest bit selects the column neighbour, the next bit
// the row neighbour and so on, which gives the H-tree pairing of the mesh
// figure (first horizontal pairs, then vertical, alternating).
//
// Xif here is a reduced form of the eXtension Interface: an issue channel
// (instruction, rs1 value, id) with valid/ready and a result channel
// (id, data, error) with valid/ready. Opcode and funct3 values of the
// offloaded instructions are this design's own choice; the paper gives none.
package fsync_pkg;

  // Synch FSM states (names printed in the micro-architecture figure).
  typedef enum logic [1:0] {
    FS_IDLE = 2'd0,
    FS_PROP = 2'd1,
    FS_SYNC = 2'd2
  } fsync_state_e;

  // Reduced Xif issue and result payloads.
  localparam int unsigned XIF_ID_W = 4;

  typedef struct packed {
    logic [31:0]         instr;
    logic [31:0]         rs1;
    logic [XIF_ID_W-1:0] id;
  } xif_issue_t;

  typedef struct packed {
    logic [XIF_ID_W-1:0] id;
    logic [31:0]         data;
    logic                err;
  } xif_result_t;

  // Offload targets of the Xif dispatcher.
  localparam int unsigned XIF_NUM_TGT = 3;
  localparam int unsigned TGT_IDMA    = 0;
  localparam int unsigned TGT_REDMULE = 1;
  localparam int unsigned TGT_FSYNC   = 2;

  // Assumed encodings (RISC-V custom opcode space).
  localparam logic [6:0] OPC_IDMA    = 7'b0101011; // custom-1
  localparam logic [6:0] OPC_REDMULE = 7'b0001011; // custom-0
  localparam logic [6:0] OPC_FSYNC   = 7'b1011011; // custom-2
  localparam logic [2:0] F3_IDMA     = 3'b000;
  localparam logic [2:0] F3_REDMULE  = 3'b000;
  localparam logic [2:0] F3_FSYNC    = 3'b000;

  // Number of register stages on the link from a node at tree level
  // child_lvl (0 = tile) to its parent at level child_lvl+1, in the
  // FractalSync+Pipeline variant. In an H-tree over unit-pitch tiles the
  // parent at level p sits 2**(ceil(p/2)-2) tile pitches from each child
  // (0.5 for p = 1,2; 1 for p = 3,4; 2 for p = 5,6; 4 for p = 7,8); one stage
  // per extra pitch keeps every segment within one NoC hop.
  function automatic int unsigned pipe_stages(input int unsigned child_lvl);
    int unsigned p;
    int unsigned e;
    p = child_lvl + 1;
    e = (p + 1) / 2;           // ceil(p/2)
    if (e < 3) return 0;       // distance <= 1 pitch
    return (1 << (e - 2)) - 1;
  endfunction

  // Tree-order index -> row-major tile index for a K x K mesh with
  // K = 2**(LEVELS/2). Bit 2i of the tree index is column bit i,
  // bit 2i+1 is row bit i. With an odd LEVELS the top bit is a column bit.
  function automatic int unsigned tree_to_tile(input int unsigned t,
                                               input int unsigned levels);
    int unsigned row, col, ncol_bits;
    row = 0;
    col = 0;
    ncol_bits = (levels + 1) / 2;
    for (int unsigned b = 0; b < levels; b++) begin
      if (b % 2 == 0) col |= ((t >> b) & 1) << (b / 2);
      else            row |= ((t >> b) & 1) << (b / 2);
    end
    return row * (1 << ncol_bits) + col;
  endfunction

endpackage
