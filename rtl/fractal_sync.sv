// fractal_sync: one FractalSync module, the node of the synchronization tree.
//
// A node has two slave ports (towards two tiles or two child nodes) and one
// master port (towards its parent). A slave requests a barrier with a
// one-cycle sync pulse and a one-hot level field lvl. Bit 0 of the level
// means "synchronize at this node"; otherwise the node forwards a single
// request upwards carrying lvl[N-1:1], so each level of the tree drops one
// wire. When the barrier is reached the node raises wake (and error, if one
// was detected) on both slave ports and holds it until both slaves have
// pulsed ack; then it pulses ack to its own master if it had propagated.
//
// Structure, as in the paper's micro-architecture figure:
//  * per slave port a LVL register, loaded only in cycles where sync is
//    asserted. A bypass lets a request that arrives in the deciding cycle
//    use its level directly;
//  * two signal monitors (fsync_signal_mon), one for sync and one for ack,
//    each cleared by the FSM;
//  * the Synch FSM with states Idle, Prop. and Sync.:
//      Idle -> Sync   both slaves asked, lvl[0] set (or an error found)
//      Idle -> Prop   both slaves asked, lvl[0] clear: pulse MST SYNC
//      Prop -> Prop   waiting for the master's wake
//      Prop -> Sync   master's wake arrived (it is passed to the slaves in
//                     this same cycle)
//      Sync -> Idle   both slaves acked: pulse MST ACK if propagated
//    The transitions match the arrows of the figure; their conditions are
//    this design's reading of the text;
//  * the "==" comparator between the two slaves' levels and the error logic
//    (fsync_error_logic); only slave 0's level decides propagation;
//  * a register on MST WAKE / MST ERROR. The FSM reacts to the rising edge
//    of the registered wake so that a wake still held high by the parent
//    for a sibling's late ack cannot satisfy a new request.
//
// Timing: a node adds one cycle on the way up (request in cycle t, MST SYNC
// in t+1) and one on the way down (MST WAKE in cycle t, SLV WAKE in t+1).
// A node that synchronizes locally raises SLV WAKE one cycle after the last
// sync. The root (IS_ROOT = 1) flags an error for a request that asks to go
// higher. Reset is asynchronous, active low.
module fractal_sync
  import fsync_pkg::*;
#(
  parameter int unsigned N       = 2,  // level wires seen at this node
  parameter bit          IS_ROOT = 1'b0,
  localparam int unsigned MW     = (N > 1) ? N - 1 : 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  // slave ports
  input  logic [1:0]          slv_sync_i,
  input  logic [1:0][N-1:0]   slv_lvl_i,
  input  logic [1:0]          slv_ack_i,
  output logic [1:0]          slv_wake_o,
  output logic [1:0]          slv_error_o,
  // master port
  output logic                mst_sync_o,
  output logic [MW-1:0]       mst_lvl_o,
  output logic                mst_ack_o,
  input  logic                mst_wake_i,
  input  logic                mst_error_i
);

  fsync_state_e state_q, state_d;

  logic [1:0][N-1:0] lvl_q, lvl_eff;
  logic sync_all, ack_all, sync_clr, ack_clr;
  logic mst_wake_q, mst_error_q, mst_wake_prev_q, wake_rise;
  logic mismatch, err_en, err_valid, err_clr;
  logic here;          // request is for this level
  logic go_prop;
  logic prop_q;
  logic mst_sync_q, mst_ack_q;
  logic [MW-1:0] mst_lvl_q;

  // LVL sample registers, loaded only while sync is asserted.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) lvl_q <= '0;
    else begin
      for (int p = 0; p < 2; p++)
        if (slv_sync_i[p]) lvl_q[p] <= slv_lvl_i[p];
    end
  end

  always_comb begin
    for (int p = 0; p < 2; p++)
      lvl_eff[p] = slv_sync_i[p] ? slv_lvl_i[p] : lvl_q[p];
  end

  fsync_signal_mon #(.N(2)) i_sync_mon (
    .clk_i, .rst_ni, .sig_i(slv_sync_i), .clr_i(sync_clr), .all_o(sync_all)
  );

  fsync_signal_mon #(.N(2)) i_ack_mon (
    .clk_i, .rst_ni, .sig_i(slv_ack_i), .clr_i(ack_clr), .all_o(ack_all)
  );

  // MST WAKE / MST ERROR register and wake edge detection.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mst_wake_q      <= 1'b0;
      mst_error_q     <= 1'b0;
      mst_wake_prev_q <= 1'b0;
    end else begin
      mst_wake_q      <= mst_wake_i;
      mst_error_q     <= mst_error_i;
      mst_wake_prev_q <= mst_wake_q;
    end
  end
  assign wake_rise = mst_wake_q & ~mst_wake_prev_q;

  // Level comparator ("=="), plus the root's out-of-tree check.
  assign mismatch = (lvl_eff[0] != lvl_eff[1]) | (IS_ROOT & ~lvl_eff[0][0]);
  assign here     = lvl_eff[0][0];

  assign err_en  = ((state_q == FS_IDLE) & sync_all) | ((state_q == FS_PROP) & wake_rise);
  assign err_clr = ack_clr;

  fsync_error_logic #(.N_SLV(2)) i_err (
    .clk_i, .rst_ni,
    .en_i        (err_en),
    .clr_i       (err_clr),
    .use_mst_i   (state_q == FS_PROP),
    .mismatch_i  (mismatch),
    .mst_error_i (mst_error_q),
    .valid_o     (err_valid),
    .slv_error_o (slv_error_o)
  );

  // Synch FSM.
  assign go_prop  = (state_q == FS_IDLE) & sync_all & ~err_valid & ~here;
  assign sync_clr = (state_q == FS_IDLE) & sync_all;
  assign ack_clr  = (state_q == FS_SYNC) & ack_all;

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      FS_IDLE: if (sync_all) state_d = (err_valid | here) ? FS_SYNC : FS_PROP;
      FS_PROP: if (wake_rise) state_d = FS_SYNC;
      FS_SYNC: if (ack_all)   state_d = FS_IDLE;
      default: state_d = FS_IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= FS_IDLE;
      prop_q     <= 1'b0;
      mst_sync_q <= 1'b0;
      mst_ack_q  <= 1'b0;
      mst_lvl_q  <= '0;
    end else begin
      state_q    <= state_d;
      mst_sync_q <= go_prop;
      mst_ack_q  <= ack_clr & prop_q;
      if (go_prop) begin
        prop_q    <= 1'b1;
        mst_lvl_q <= (N > 1) ? MW'(lvl_eff[0] >> 1) : '0;
      end else if (ack_clr) begin
        prop_q    <= 1'b0;
      end
    end
  end

  assign slv_wake_o = {2{(state_q == FS_SYNC) | ((state_q == FS_PROP) & wake_rise)}};
  assign mst_sync_o = mst_sync_q;
  assign mst_lvl_o  = mst_lvl_q;
  assign mst_ack_o  = mst_ack_q;

  // Protocol rules of the tree links.
  a_no_sync_and_ack: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(mst_sync_o && mst_ack_o));
  a_wake_not_idle: assert property (@(posedge clk_i) disable iff (!rst_ni)
    slv_wake_o[0] |-> (state_q != FS_IDLE));
  if (IS_ROOT) begin : g_root_chk
    a_root_no_prop: assert property (@(posedge clk_i) disable iff (!rst_ni)
      !mst_sync_o);
  end

endmodule
