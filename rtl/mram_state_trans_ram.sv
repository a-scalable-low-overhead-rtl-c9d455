// State-transition RAM of one state-transition element (STE).
//
// Addressed by {pseudo state, effective-input values}, 2^(PSW+EI) entries of
// TW bits (published sizing: 2^(ceil(log2 S_i)+EI_i) x ceil(log2 T_max) bits).
// Each entry is a transition index that is global to the whole FSM, not local
// to the state, so it can address the shared transition-code RAM directly.
// Effective input EIk is address bit k, EI0 the least significant; the
// ordering is this design's choice. Reading is combinational; writing is
// synchronous.
module mram_state_trans_ram #(
  parameter int unsigned PSW = 2,  // pseudo-state width of this STE
  parameter int unsigned EI  = 1,  // effective inputs of this STE
  parameter int unsigned TW  = 3   // transition-index width, ceil(log2 T_max)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [PSW+EI-1:0] waddr,
  input  logic [TW-1:0]     wdata,
  input  logic [PSW-1:0]    pseudo,
  input  logic [EI-1:0]     eff,
  output logic [TW-1:0]     trans
);

  logic [TW-1:0] mem [2**(PSW+EI)];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign trans = mem[{pseudo, eff}];

endmodule
