// Input multiplexers of one state-transition element (STE).
//
// EI independent I_TOTAL-to-1 multiplexers. Multiplexer k drives effective
// input bit eff[k] with the FSM input whose index the input-selection RAM
// gives in sel[k]. An index at or above I_TOTAL (possible when I_TOTAL is not
// a power of two) yields 0; that rule is this design's. Purely combinational.
module mram_input_muxes #(
  parameter int unsigned I_TOTAL = 6,  // FSM inputs
  parameter int unsigned EI      = 1,  // effective inputs of this STE
  parameter int unsigned IW      = 3   // index width
) (
  input  logic [I_TOTAL-1:0]      in,
  input  logic [EI-1:0][IW-1:0]   sel,
  output logic [EI-1:0]           eff
);

  always_comb begin
    for (int k = 0; k < EI; k++) begin
      eff[k] = (int'(sel[k]) < I_TOTAL) ? in[sel[k]] : 1'b0;
    end
  end

endmodule
