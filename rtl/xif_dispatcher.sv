// xif_dispatcher: routes instructions that the tile's core offloads over
// the (reduced) Xif interface to the unit that executes them.
//
// An instruction is matched against a table of (opcode, funct3) pairs, one
// per target: in the MAGIA tile the iDMA control unit, RedMulE and the
// FractalSync decoder. A hit forwards the issue handshake to that target
// only (issue_ready_o follows the target's ready) and reports accept = 1;
// an instruction that matches nothing is answered at once with accept = 0,
// which tells the core it is not an extension instruction. Results of the
// targets go back to the core through a fixed-priority arbiter (lowest
// target index first); the other targets wait with their result valid.
// Everything is combinational: no cycle is added on either path.
//
// The paper states only that the module dispatches by opcode and funct3.
// The encodings (fsync_pkg OPC_* / F3_*), the accept signal, and the
// arbitration are this design's choices.
module xif_dispatcher
  import fsync_pkg::*;
#(
  parameter int unsigned                  NUM_TGT = XIF_NUM_TGT,
  parameter logic [NUM_TGT-1:0][6:0]      TGT_OPC = {OPC_FSYNC, OPC_REDMULE, OPC_IDMA},
  parameter logic [NUM_TGT-1:0][2:0]      TGT_F3  = {F3_FSYNC, F3_REDMULE, F3_IDMA}
) (
  // core side
  input  logic                      issue_valid_i,
  output logic                      issue_ready_o,
  output logic                      issue_accept_o,
  input  xif_issue_t                issue_i,
  output logic                      result_valid_o,
  input  logic                      result_ready_i,
  output xif_result_t               result_o,
  // target side
  output logic [NUM_TGT-1:0]        tgt_issue_valid_o,
  input  logic [NUM_TGT-1:0]        tgt_issue_ready_i,
  output xif_issue_t                tgt_issue_o,
  input  logic [NUM_TGT-1:0]        tgt_result_valid_i,
  output logic [NUM_TGT-1:0]        tgt_result_ready_o,
  input  xif_result_t [NUM_TGT-1:0] tgt_result_i
);

  logic [NUM_TGT-1:0] hit, sel, rsel;

  always_comb begin
    hit = '0;
    for (int unsigned t = 0; t < NUM_TGT; t++)
      hit[t] = (issue_i.instr[6:0] == TGT_OPC[t]) && (issue_i.instr[14:12] == TGT_F3[t]);
    // first hit only
    sel = hit & ~(hit - 1'b1);
  end

  assign tgt_issue_o       = issue_i;
  assign tgt_issue_valid_o = sel & {NUM_TGT{issue_valid_i}};
  assign issue_accept_o    = |sel;
  assign issue_ready_o     = (|sel) ? |(sel & tgt_issue_ready_i) : 1'b1;

  always_comb begin
    rsel     = tgt_result_valid_i & ~(tgt_result_valid_i - 1'b1);
    result_o = '0;
    for (int unsigned t = 0; t < NUM_TGT; t++)
      if (rsel[t]) result_o = tgt_result_i[t];
  end

  assign result_valid_o     = |tgt_result_valid_i;
  assign tgt_result_ready_o = rsel & {NUM_TGT{result_ready_i}};

  // At most one target sees an issue.
  always_comb a_onehot_issue: assert ($onehot0(tgt_issue_valid_o));

endmodule
