// fsync_error_logic: the "Error Logic" block of a FractalSync module.
//
// Two error sources exist. A local one: the level fields sampled from the two
// slave ports disagree (the "==" comparator of the micro-architecture figure
// feeds mismatch_i), or the root is asked to forward a request further up.
// A remote one: the master answered a propagated request with its error line
// set (mst_error_i, taken from the MST WAKE/ERROR register). The Synch FSM
// pulses en_i when it evaluates a request: in Idle when both slaves have
// asked (use_mst_i = 0, local source) and in Prop when the master's wake
// arrives (use_mst_i = 1, remote source). valid_o tells the FSM in that same
// cycle that an error was found. The error is held until clr_i (FSM leaving
// Sync) and driven to both slaves on slv_error_o, alongside their wake.
//
// The block names, the en/clr/valid connections and the fact that the error
// goes to both slaves follow the paper's figure; which condition selects the
// source, and holding the flag until clear, are this design's choices.
module fsync_error_logic #(
  parameter int unsigned N_SLV = 2
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             en_i,
  input  logic             clr_i,
  input  logic             use_mst_i,
  input  logic             mismatch_i,
  input  logic             mst_error_i,
  output logic             valid_o,
  output logic [N_SLV-1:0] slv_error_o
);

  logic err_q;
  logic cand;

  assign cand    = use_mst_i ? mst_error_i : mismatch_i;
  assign valid_o = en_i & cand;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      err_q <= 1'b0;
    else if (clr_i)   err_q <= 1'b0;
    else if (valid_o) err_q <= 1'b1;
  end

  assign slv_error_o = {N_SLV{err_q | valid_o}};

endmodule
