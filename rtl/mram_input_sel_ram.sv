// Input-selection RAM of one state-transition element (STE).
//
// One entry per pseudo state of the STE, 2^PSW entries, each holding EI input
// indices of IW bits: the FSM inputs that are the effective inputs of the
// state mapped to that pseudo state (published sizing: 2^ceil(log2 S_i) x EI_i x
// ceil(log2 I_total) bits). Index k of the word, bits [k*IW +: IW], selects
// effective input EIk. Reading is combinational; writing is synchronous.
module mram_input_sel_ram #(
  parameter int unsigned PSW = 2,  // pseudo-state width of this STE
  parameter int unsigned EI  = 1,  // effective inputs handled by this STE
  parameter int unsigned IW  = 3   // input-index width, ceil(log2 I_total)
) (
  input  logic                clk,
  input  logic                we,
  input  logic [PSW-1:0]      waddr,
  input  logic [EI*IW-1:0]    wdata,
  input  logic [PSW-1:0]      pseudo,
  output logic [EI-1:0][IW-1:0] sel
);

  logic [EI*IW-1:0] mem [2**PSW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign sel = mem[pseudo];

endmodule
