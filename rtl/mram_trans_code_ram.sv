// Transition-code RAM of the M-RAM overlay.
//
// One entry per FSM-wide transition index, 2^TW entries of SW+OW bits (published
// sizing: 2^ceil(log2 T_max) x (ceil(log2 S_total) + O_total) bits). A
// transition is a unique (next state, output values) pair. The word is
// {next_state, outputs}, outputs in the low bits; the packing is this
// design's. Reading is combinational, so the outputs of the FSM follow the
// current state and inputs in the same cycle (Mealy outputs); writing is
// synchronous.
module mram_trans_code_ram #(
  parameter int unsigned TW = 3,  // transition-index width
  parameter int unsigned SW = 3,  // state width
  parameter int unsigned OW = 1   // FSM outputs
) (
  input  logic             clk,
  input  logic             we,
  input  logic [TW-1:0]    waddr,
  input  logic [SW+OW-1:0] wdata,
  input  logic [TW-1:0]    trans,
  output logic [SW-1:0]    next_state,
  output logic [OW-1:0]    outputs
);

  logic [SW+OW-1:0] mem [2**TW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign {next_state, outputs} = mem[trans];

endmodule
