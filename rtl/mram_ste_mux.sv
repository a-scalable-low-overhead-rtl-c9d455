// STE multiplexer of the M-RAM overlay.
//
// Forwards to the transition-code RAM the transition index produced by the
// STE that the state-map RAM names for the current state. An STE index at or
// above NUM_STE (possible when NUM_STE is not a power of two) yields index 0;
// that rule is this design's. Purely combinational.
module mram_ste_mux #(
  parameter int unsigned NUM_STE = 2,
  parameter int unsigned IDW     = 1,  // STE index width
  parameter int unsigned TW      = 3   // transition-index width
) (
  input  logic [NUM_STE-1:0][TW-1:0] ste_trans,
  input  logic [IDW-1:0]             ste_id,
  output logic [TW-1:0]              trans
);

  always_comb begin
    trans = '0;
    for (int i = 0; i < NUM_STE; i++) begin
      if (int'(ste_id) == i) trans = ste_trans[i];
    end
  end

endmodule
