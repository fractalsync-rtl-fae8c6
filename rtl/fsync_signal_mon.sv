// fsync_signal_mon: the "Signal Mon." block of a FractalSync module.
//
// Watches one single-bit signal per slave port (sync or ack) and reports when
// every port has asserted it at least once since the last clear, whether the
// assertions came in the same cycle or in different cycles (as the paper
// describes). A sticky bit per port remembers early arrivals; the report
// also includes the current inputs, so a request that completes the set is
// seen in the cycle it arrives (zero added latency). clr_i, driven by the
// Synch FSM when it consumes the event, empties the sticky bits and has
// priority over inputs in the same cycle.
//
// Interface: sig_i[N] inputs, clr_i, all_o (combinational). Reset is active-low and asynchronous; the reset
// style and the same-cycle report are this design's choice.
module fsync_signal_mon #(
  parameter int unsigned N = 2
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [N-1:0] sig_i,
  input  logic         clr_i,
  output logic         all_o
);

  logic [N-1:0] seen_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)    seen_q <= '0;
    else if (clr_i) seen_q <= '0;
    else            seen_q <= seen_q | sig_i;
  end

  assign all_o  = &(seen_q | sig_i);

endmodule
