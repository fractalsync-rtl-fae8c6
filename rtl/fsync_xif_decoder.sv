// fsync_xif_decoder: the tile-side synchronization unit that turns an
// fsync(level) instruction into a request on the FractalSync tree.
//
// The core offloads fsync through the Xif dispatcher. The argument (rs1)
// carries the tree level at which the tile wants to meet its peers: 1 is the
// tile's own leaf module (its neighbour), LEVELS is the root (the whole
// mesh). The unit converts it to the one-hot lvl field of the tree, emits a
// one-cycle sync pulse, waits for the rising edge of wake, pulses ack and
// answers the core on the result channel; err reports the tree's error line
// (e.g. neighbours asked for different levels, or an out-of-range level,
// which is sent as an all-zero lvl and rejected at the root).
//
// The core is stalled while the barrier is open: issue_ready_o is high only
// in the idle state, so one fsync is outstanding at a time.
//
// Timing: issue handshake in cycle R, sync pulse in R+1; wake seen in cycle
// W, result_valid_o and ack in W+1. With a barrier at level l of the native
// tree, W = R+2l, so the instruction after fsync (earliest at result
// handshake + 1) runs 2l+2 cycles after the last tile issued fsync. These two
// registered stages are this design's choice; with them the measured
// overhead equals the paper's FractalSync latencies (4 cycles for two
// neighbours, 6 / 10 / 14 / 18 for 2x2 / 4x4 / 8x8 / 16x16 meshes). The
// paper describes only the unit's role between Xif and the tree.
module fsync_xif_decoder
  import fsync_pkg::*;
#(
  parameter int unsigned LEVELS = 4
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // Xif side (from the dispatcher)
  input  logic              issue_valid_i,
  output logic              issue_ready_o,
  input  xif_issue_t        issue_i,
  output logic              result_valid_o,
  input  logic              result_ready_i,
  output xif_result_t       result_o,
  // FractalSync side (to the tile's leaf module slave port)
  output logic              sync_o,
  output logic [LEVELS-1:0] lvl_o,
  output logic              ack_o,
  input  logic              wake_i,
  input  logic              error_i
);

  typedef enum logic [1:0] {D_IDLE, D_WAIT, D_RESP} dec_state_e;

  dec_state_e          state_q;
  logic                sync_q, ack_q, err_q, wake_prev_q, wake_rise;
  logic [LEVELS-1:0]   lvl_q;
  logic [XIF_ID_W-1:0] id_q;
  logic [LEVELS-1:0]   lvl_dec;

  // Level number -> one-hot; out of range gives all zeros.
  always_comb begin
    lvl_dec = '0;
    for (int unsigned i = 0; i < LEVELS; i++)
      if (issue_i.rs1 == 32'(i + 1)) lvl_dec[i] = 1'b1;
  end

  assign wake_rise = wake_i & ~wake_prev_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= D_IDLE;
      sync_q      <= 1'b0;
      ack_q       <= 1'b0;
      err_q       <= 1'b0;
      wake_prev_q <= 1'b0;
      lvl_q       <= '0;
      id_q        <= '0;
    end else begin
      wake_prev_q <= wake_i;
      sync_q      <= 1'b0;
      ack_q       <= 1'b0;
      unique case (state_q)
        D_IDLE: if (issue_valid_i) begin
          sync_q  <= 1'b1;
          lvl_q   <= lvl_dec;
          id_q    <= issue_i.id;
          state_q <= D_WAIT;
        end
        D_WAIT: if (wake_rise) begin
          ack_q   <= 1'b1;
          err_q   <= error_i;
          state_q <= D_RESP;
        end
        D_RESP: if (result_ready_i) state_q <= D_IDLE;
        default: state_q <= D_IDLE;
      endcase
    end
  end

  assign issue_ready_o  = (state_q == D_IDLE);
  assign result_valid_o = (state_q == D_RESP);
  assign result_o       = '{id: id_q, data: 32'(err_q), err: err_q};
  assign sync_o         = sync_q;
  assign lvl_o          = lvl_q;
  assign ack_o          = ack_q;

  a_one_sync_per_issue: assert property (@(posedge clk_i) disable iff (!rst_ni)
    sync_o |-> state_q == D_WAIT);

endmodule
