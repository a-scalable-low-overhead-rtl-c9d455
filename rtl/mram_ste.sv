// State-transition element (STE) of the M-RAM overlay.
//
// An STE implements the transition functions of the FSM states that the
// state-map RAM assigns to it, each at one of its STATES pseudo states, for
// states with up to EI effective inputs. It follows the STE Logic box of the
// published block diagram: the pseudo state reads the input-selection RAM, whose EI
// input indices steer the input multiplexers; the pseudo state and the EI
// selected input bits then address the state-transition RAM, which returns a
// transition index global to the FSM. A state with fewer effective inputs
// than EI can still be placed here by writing its table replicated over the
// unused input combinations, as the architecture allows.
//
// Timing: pseudo state and inputs to transition index is combinational (two
// RAM reads and a multiplexer level); both RAMs are written on the rising
// clock edge. Pseudo-state width is ceil(log2 STATES) with a floor of one bit,
// so an STE of a single pseudo state uses one address bit more than the
// published sizing formulas count.
module mram_ste
  import mram_pkg::*;
#(
  parameter int unsigned I_TOTAL = 6,  // FSM inputs
  parameter int unsigned EI      = 1,  // effective inputs handled (EI_i >= 1)
  parameter int unsigned STATES  = 4,  // pseudo states (S_i,total)
  parameter int unsigned TW      = 3,  // transition-index width
  localparam int unsigned PSW    = bits_for(STATES),
  localparam int unsigned IW     = bits_for(I_TOTAL)
) (
  input  logic               clk,
  input  logic [I_TOTAL-1:0] in,
  input  logic [PSW-1:0]     pseudo,
  // input-selection RAM write port
  input  logic               is_we,
  input  logic [PSW-1:0]     is_waddr,
  input  logic [EI*IW-1:0]   is_wdata,
  // state-transition RAM write port
  input  logic               st_we,
  input  logic [PSW+EI-1:0]  st_waddr,
  input  logic [TW-1:0]      st_wdata,
  output logic [TW-1:0]      trans
);

  logic [EI-1:0][IW-1:0] sel;
  logic [EI-1:0]         eff;

  mram_input_sel_ram #(.PSW(PSW), .EI(EI), .IW(IW)) u_is_ram (
    .clk, .we(is_we), .waddr(is_waddr), .wdata(is_wdata), .pseudo, .sel
  );

  mram_input_muxes #(.I_TOTAL(I_TOTAL), .EI(EI), .IW(IW)) u_muxes (
    .in, .sel, .eff
  );

  mram_state_trans_ram #(.PSW(PSW), .EI(EI), .TW(TW)) u_st_ram (
    .clk, .we(st_we), .waddr(st_waddr), .wdata(st_wdata), .pseudo, .eff, .trans
  );

endmodule
