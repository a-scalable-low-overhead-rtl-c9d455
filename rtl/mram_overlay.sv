// Multi-RAM (M-RAM) finite-state-machine overlay: top level.
//
// A reconfigurable controller that runs any FSM within its size limits from
// RAM contents alone. The current state (state register) reads the state-map
// RAM, which names the STE holding the state's transition function and the
// pseudo state inside it. Every STE looks up its own pseudo state in parallel;
// the STE multiplexer keeps the output of the named one, a transition index,
// and the transition-code RAM turns that index into the next state and the
// FSM's output values. The next state is loaded on the following clock edge.
// The structure, the RAM sizing and the parameter set follow the published
// architecture; the configuration write port, the enable, the reset and the word
// packings are this design's own.
//
// Interface:
//   in/out      FSM inputs and Mealy outputs; out follows state and in in the
//               same cycle (all RAM reads are combinational).
//   state       current FSM state.
//   en          the state register advances only while en is high.
//   rst         synchronous reset of the state register to state 0.
//   cfg_*       one synchronous RAM write per cycle with cfg_we high:
//               cfg_ram chooses the RAM, cfg_ste the STE for the two per-STE
//               RAMs, cfg_addr and cfg_wdata are truncated to that RAM's
//               address and word widths. Word layouts:
//                 state map        {ste_id, pseudo}
//                 input selection  EI_i indices, index k in bits [k*IW +: IW]
//                 state transition transition index; address {pseudo, eff}
//                 transition code  {next_state, outputs}
//
// The default parameters are the overlay instance of the published five-state
// example: 5 states, 5 transitions, 6 inputs, STE 0 with
// one effective input and 4 pseudo states, STE 1 with five effective inputs
// and 2 pseudo states. That example has no outputs; one output is kept here
// since a zero-width port is not legal.
module mram_overlay
  import mram_pkg::*;
#(
  parameter int unsigned S_TOTAL  = 5,  // FSM states
  parameter int unsigned T_MAX    = 5,  // unique transitions (next state, outputs)
  parameter int unsigned I_TOTAL  = 6,  // FSM inputs
  parameter int unsigned O_TOTAL  = 1,  // FSM outputs
  parameter int unsigned NUM_STE  = 2,  // state-transition elements
  parameter int unsigned STE_EI     [NUM_STE] = '{1, 5},  // effective inputs per STE
  parameter int unsigned STE_STATES [NUM_STE] = '{4, 2},  // pseudo states per STE
  localparam int unsigned SW  = bits_for(S_TOTAL),
  localparam int unsigned TW  = bits_for(T_MAX),
  localparam int unsigned IW  = bits_for(I_TOTAL),
  localparam int unsigned IDW = bits_for(NUM_STE),
  localparam int unsigned PW  = bits_for(max_states()),
  localparam int unsigned CAW = cfg_addr_width(),
  localparam int unsigned CDW = cfg_data_width()
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               en,
  input  logic [I_TOTAL-1:0] in,
  output logic [O_TOTAL-1:0] out,
  output logic [SW-1:0]      state,
  // configuration write port
  input  logic               cfg_we,
  input  cfg_ram_e           cfg_ram,
  input  logic [IDW-1:0]     cfg_ste,
  input  logic [CAW-1:0]     cfg_addr,
  input  logic [CDW-1:0]     cfg_wdata
);

  // ---- width arithmetic -------------------------------------------------
  function automatic int unsigned max_states();
    int unsigned m = 1;
    for (int i = 0; i < NUM_STE; i++) if (STE_STATES[i] > m) m = STE_STATES[i];
    return m;
  endfunction

  function automatic int unsigned cfg_addr_width();
    int unsigned w = (bits_for(S_TOTAL) > bits_for(T_MAX)) ? bits_for(S_TOTAL) : bits_for(T_MAX);
    for (int i = 0; i < NUM_STE; i++)
      if (bits_for(STE_STATES[i]) + STE_EI[i] > w) w = bits_for(STE_STATES[i]) + STE_EI[i];
    return w;
  endfunction

  function automatic int unsigned cfg_data_width();
    int unsigned w = bits_for(S_TOTAL) + O_TOTAL;
    if (bits_for(max_states()) + bits_for(NUM_STE) > w) w = bits_for(max_states()) + bits_for(NUM_STE);
    for (int i = 0; i < NUM_STE; i++)
      if (STE_EI[i] * bits_for(I_TOTAL) > w) w = STE_EI[i] * bits_for(I_TOTAL);
    if (bits_for(T_MAX) > w) w = bits_for(T_MAX);
    return w;
  endfunction

  // Total RAM bits of this instance, by the published sizing formulas (bits_for() in
  // place of ceil(log2), so an STE of one pseudo state counts one extra bit).
  function automatic int unsigned ram_bits_total();
    int unsigned b = (2**SW) * (PW + IDW) + (2**TW) * (SW + O_TOTAL);
    for (int i = 0; i < NUM_STE; i++) begin
      b += (2**(bits_for(STE_STATES[i]) + STE_EI[i])) * TW;
      b += (2**bits_for(STE_STATES[i])) * STE_EI[i] * IW;
    end
    return b;
  endfunction
  localparam int unsigned RAM_BITS = ram_bits_total();

  // ---- datapath ------------------------------------------------------------
  logic [IDW-1:0]              ste_id;
  logic [PW-1:0]               pseudo;
  logic [NUM_STE-1:0][TW-1:0]  ste_trans;
  logic [TW-1:0]               trans;
  logic [SW-1:0]               next_state;

  mram_state_reg #(.SW(SW)) u_state_reg (
    .clk, .rst, .en, .next_state, .state
  );

  mram_state_map_ram #(.SW(SW), .PW(PW), .IDW(IDW)) u_state_map (
    .clk,
    .we    (cfg_we && cfg_ram == CFG_STATE_MAP),
    .waddr (cfg_addr[SW-1:0]),
    .wdata (cfg_wdata[IDW+PW-1:0]),
    .state, .ste_id, .pseudo
  );

  for (genvar i = 0; i < NUM_STE; i++) begin : g_ste
    localparam int unsigned EI  = STE_EI[i];
    localparam int unsigned PSW = bits_for(STE_STATES[i]);
    logic [PSW-1:0] ste_pseudo;
    logic           sel_this;

    // An STE with fewer pseudo states than the widest sees the low bits.
    if (PSW < PW) begin : g_narrow
      assign ste_pseudo = pseudo[PSW-1:0];
    end else begin : g_full
      assign ste_pseudo = PSW'(pseudo);
    end
    assign sel_this = cfg_we && (int'(cfg_ste) == i);

    mram_ste #(.I_TOTAL(I_TOTAL), .EI(EI), .STATES(STE_STATES[i]), .TW(TW)) u_ste (
      .clk, .in,
      .pseudo   (ste_pseudo),
      .is_we    (sel_this && cfg_ram == CFG_INPUT_SEL),
      .is_waddr (cfg_addr[PSW-1:0]),
      .is_wdata (cfg_wdata[EI*IW-1:0]),
      .st_we    (sel_this && cfg_ram == CFG_STATE_TRANS),
      .st_waddr (cfg_addr[PSW+EI-1:0]),
      .st_wdata (cfg_wdata[TW-1:0]),
      .trans    (ste_trans[i])
    );
  end

  mram_ste_mux #(.NUM_STE(NUM_STE), .IDW(IDW), .TW(TW)) u_ste_mux (
    .ste_trans, .ste_id, .trans
  );

  mram_trans_code_ram #(.TW(TW), .SW(SW), .OW(O_TOTAL)) u_trans_code (
    .clk,
    .we    (cfg_we && cfg_ram == CFG_TRANS_CODE),
    .waddr (cfg_addr[TW-1:0]),
    .wdata (cfg_wdata[SW+O_TOTAL-1:0]),
    .trans, .next_state,
    .outputs (out)
  );

  // ---- configuration rules ----------------------------------------------------
  // A per-STE write must name an STE that exists.
  a_cfg_ste_exists : assert property (@(posedge clk)
    (cfg_we && (cfg_ram == CFG_INPUT_SEL || cfg_ram == CFG_STATE_TRANS)) |-> (int'(cfg_ste) < NUM_STE));

endmodule
