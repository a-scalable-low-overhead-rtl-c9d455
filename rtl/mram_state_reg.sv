// State register of the M-RAM overlay.
//
// Holds the current FSM state, which addresses the state-map RAM. On each
// rising clock edge with en high it loads the next state produced by the
// transition-code RAM; with en low it keeps its value, so the FSM can be held
// while its RAMs are rewritten. A synchronous, active-high reset loads
// RESET_STATE. The register itself is part of the published block diagram; the enable, the
// reset and its value are this design's choices, as the source does not
// mention them.
module mram_state_reg #(
  parameter int unsigned SW          = 3,  // state width, ceil(log2(S_total))
  parameter int unsigned RESET_STATE = 0
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          en,
  input  logic [SW-1:0] next_state,
  output logic [SW-1:0] state
);

  always_ff @(posedge clk) begin
    if (rst)     state <= SW'(RESET_STATE);
    else if (en) state <= next_state;
  end

endmodule
