// Shared definitions for the Multi-RAM (M-RAM) finite-state-machine overlay.
//
// The overlay is built from small lookup RAMs whose address and data widths
// are all ceil(log2(N)) of some count N (states, transitions, inputs, STEs).
// bits_for() gives that width, with a floor of one bit so that a count of one
// still yields a legal signal. cfg_ram_e selects which RAM a configuration
// write goes to; the architecture only says that an FSM is loaded "by writing the
// appropriate memory contents to the RAM structures", so the write port and
// this encoding are this design's own.
package mram_pkg;

  // ceil(log2(n)), never below 1.
  function automatic int unsigned bits_for(input int unsigned n);
    return (n <= 1) ? 1 : $clog2(n);
  endfunction

  // Target of one configuration write.
  typedef enum logic [1:0] {
    CFG_STATE_MAP   = 2'd0,  // state-map RAM, address = FSM state
    CFG_INPUT_SEL   = 2'd1,  // input-selection RAM of STE cfg_ste, address = pseudo state
    CFG_STATE_TRANS = 2'd2,  // state-transition RAM of STE cfg_ste, address = {pseudo state, effective inputs}
    CFG_TRANS_CODE  = 2'd3   // transition-code RAM, address = transition index
  } cfg_ram_e;

endpackage
