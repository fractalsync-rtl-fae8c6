// fsync_pipe: register stages on one FractalSync tree link, used by the
// FractalSync+Pipeline variant to cut links longer than one NoC hop.
//
// Every wire of the link is delayed by STAGES clock cycles: upwards sync,
// lvl and ack (child to parent), downwards wake and error (parent to child).
// Because all signals of one direction move together, the handshake of the
// tree is unchanged; each stage adds one cycle each way. The paper gives the
// purpose and the measured latencies of the pipelined tree; plain flip-flop
// stages without enable are this design's choice. Reset clears all stages.
// STAGES must be at least 1; a link without stages is a plain wire and does
// not use this module.
module fsync_pipe #(
  parameter int unsigned STAGES = 1,
  parameter int unsigned LVL_W  = 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // child side
  input  logic             chd_sync_i,
  input  logic [LVL_W-1:0] chd_lvl_i,
  input  logic             chd_ack_i,
  output logic             chd_wake_o,
  output logic             chd_error_o,
  // parent side
  output logic             par_sync_o,
  output logic [LVL_W-1:0] par_lvl_o,
  output logic             par_ack_o,
  input  logic             par_wake_i,
  input  logic             par_error_i
);

  localparam int unsigned UW = LVL_W + 2;
  localparam int unsigned S  = (STAGES > 0) ? STAGES : 1;

  logic [S-1:0][UW-1:0] up_q;
  logic [S-1:0][1:0]    dn_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      up_q <= '0;
      dn_q <= '0;
    end else begin
      up_q[0] <= {chd_sync_i, chd_ack_i, chd_lvl_i};
      dn_q[0] <= {par_wake_i, par_error_i};
      for (int i = 1; i < int'(S); i++) begin
        up_q[i] <= up_q[i-1];
        dn_q[i] <= dn_q[i-1];
      end
    end
  end

  assign {par_sync_o, par_ack_o, par_lvl_o} = up_q[S-1];
  assign {chd_wake_o, chd_error_o}          = dn_q[S-1];

endmodule
