// State-map RAM of the M-RAM overlay.
//
// One entry per FSM state, 2^SW entries in all, each holding the STE that
// implements that state's transition function and the pseudo state it
// occupies there (published sizing: 2^ceil(log2 S_total) x (ceil(log2 S_STE,max) +
// ceil(log2 num_STE)) bits). Reading is combinational, as in the published
// distributed-RAM implementation, so the lookup happens in the same cycle as
// the rest of the transition logic. Writing is synchronous through a single
// write port. The stored word is {ste_id, pseudo}, pseudo in the low bits;
// this packing is this design's choice.
module mram_state_map_ram #(
  parameter int unsigned SW  = 3,  // state width
  parameter int unsigned PW  = 2,  // pseudo-state width, ceil(log2 S_STE,max)
  parameter int unsigned IDW = 1   // STE index width, ceil(log2 num_STE)
) (
  input  logic              clk,
  // configuration write port
  input  logic              we,
  input  logic [SW-1:0]     waddr,
  input  logic [IDW+PW-1:0] wdata,
  // lookup
  input  logic [SW-1:0]     state,
  output logic [IDW-1:0]    ste_id,
  output logic [PW-1:0]     pseudo
);

  logic [IDW+PW-1:0] mem [2**SW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign {ste_id, pseudo} = mem[state];

endmodule
