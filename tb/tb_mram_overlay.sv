// End-to-end testbench of the M-RAM overlay at its default parameters
// (5 states, 5 transitions, 6 inputs, 1 output, STE 0: EI=1 x 4 pseudo
// states, STE 1: EI=5 x 2 pseudo states).
//
// It acts as the FSM mapper: it takes an FSM given as per-state effective
// input lists and truth tables over a list of unique transitions, assigns
// states to STE pseudo states, and writes the four kinds of RAM through the
// configuration port. It then drives random inputs and compares the overlay's
// state and same-cycle outputs, cycle by cycle, with a direct software model
// of the FSM.
//
// FSM 0 is the five-state example (state k -> k+1 on A for k = 0..3, state 4
// -> 0 when B, C, D, E and F are all 1; inputs A..F are in[0..5]), mapped as
// in the mapping table of the example (states 0-3 in STE 0 at pseudo states
// 0-3, state 4 in STE 1 at pseudo state 0). After it, a series of random FSMs
// is mapped with random state placement, including narrow states placed in
// the wide STE by replication. Mechanisms counted and required: use of each
// STE, a replicated mapping, reconfiguration, hold with en low, reset.
module tb_mram_overlay;
  import mram_pkg::*;

  localparam int S = 5, T = 5, I = 6, O = 1, NSTE = 2;
  localparam int SW = 3, TW = 3, IW = 3;
  localparam int N_RANDOM_FSMS = 40;
  localparam int CYCLES_PER_FSM = 400;

  logic            clk = 0;
  logic            rst, en;
  logic [I-1:0]    in;
  logic [O-1:0]    out;
  logic [SW-1:0]   state;
  logic            cfg_we;
  cfg_ram_e        cfg_ram;
  logic [0:0]      cfg_ste;
  logic [7:0]      cfg_addr;   // wider than needed; truncated below
  logic [14:0]     cfg_wdata;

  mram_overlay dut (
    .clk, .rst, .en, .in, .out, .state,
    .cfg_we, .cfg_ram, .cfg_ste,
    .cfg_addr  (cfg_addr[$bits(dut.cfg_addr)-1:0]),
    .cfg_wdata (cfg_wdata[$bits(dut.cfg_wdata)-1:0])
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles++;

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- FSM description ---------------------------------------------------------
  int unsigned ste_ei     [NSTE] = '{1, 5};
  int unsigned ste_states [NSTE] = '{4, 2};

  int          n_eff  [S];          // effective inputs of each state
  int          eff_in [S][5];       // which FSM input is effective input k
  int          table_t[S][32];      // transition index per effective-input combination
  int          tc_next[T];
  int          tc_out [T];
  int          map_ste[S];
  int          map_ps [S];

  // mechanism counters
  int n_ste_used[NSTE];
  int n_replicated_visits = 0, n_reconfig = 0, n_hold = 0, n_reset = 0;
  int replicated[S];

  task automatic cfg_write(cfg_ram_e r, int ste, int addr, int data);
    @(negedge clk);
    cfg_we = 1; cfg_ram = r; cfg_ste = 1'(ste);
    cfg_addr = 8'(addr); cfg_wdata = 15'(data);
    @(negedge clk);
    cfg_we = 0;
  endtask

  // Write the FSM described in the arrays above into the overlay.
  task automatic map_fsm();
    // transition-code RAM: {next_state, outputs}
    for (int t = 0; t < (1 << TW); t++) begin
      if (t < T) cfg_write(CFG_TRANS_CODE, 0, t, (tc_next[t] << O) | tc_out[t]);
      else       cfg_write(CFG_TRANS_CODE, 0, t, $urandom);
    end
    // state-map RAM: {ste_id, pseudo}; unused states get random content
    for (int s = 0; s < (1 << SW); s++) begin
      if (s < S) cfg_write(CFG_STATE_MAP, 0, s, (map_ste[s] << 2) | map_ps[s]);
      else       cfg_write(CFG_STATE_MAP, 0, s, $urandom);
    end
    // fill every STE with garbage first, so unused pseudo states hold junk
    for (int i = 0; i < NSTE; i++) begin
      for (int p = 0; p < (1 << $clog2(ste_states[i])); p++) begin
        cfg_write(CFG_INPUT_SEL, i, p, $urandom);
        for (int c = 0; c < (1 << ste_ei[i]); c++)
          cfg_write(CFG_STATE_TRANS, i, (p << ste_ei[i]) | c, $urandom);
      end
    end
    for (int s = 0; s < S; s++) begin
      int i = map_ste[s], p = map_ps[s], sel = 0;
      replicated[s] = (n_eff[s] < int'(ste_ei[i])) ? 1 : 0;
      for (int k = 0; k < int'(ste_ei[i]); k++) begin
        // unused slots select an arbitrary input: it must not matter
        int idx = (k < n_eff[s]) ? eff_in[s][k] : int'($urandom_range(I - 1));
        sel |= idx << (k * IW);
      end
      cfg_write(CFG_INPUT_SEL, i, p, sel);
      for (int c = 0; c < (1 << ste_ei[i]); c++)
        cfg_write(CFG_STATE_TRANS, i, (p << ste_ei[i]) | c,
                  table_t[s][c & ((1 << n_eff[s]) - 1)]);
    end
  endtask

  function automatic int model_trans(int s, logic [I-1:0] x);
    int c = 0;
    for (int k = 0; k < n_eff[s]; k++) c |= int'(x[eff_in[s][k]]) << k;
    return table_t[s][c];
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d (cycle %0d)", what, got, exp, cycles);
    end
  endtask

  // Reset, then run random inputs, comparing each cycle with the model.
  task automatic run_fsm(int n, int bias_one);
    int ms = 0;
    @(negedge clk); rst = 1; en = 1;
    @(negedge clk); rst = 0; n_reset++;
    check("state after reset", int'(state), 0);
    for (int cyc = 0; cyc < n; cyc++) begin
      int t;
      logic hold;
      for (int b = 0; b < I; b++) in[b] = ($urandom_range(7) < 8 - bias_one) ? 1'b1 : 1'b0;
      hold = ($urandom_range(15) == 0);
      en = !hold;
      #1;
      t = model_trans(ms, in);
      check("state", int'(state), ms);
      check("out (same cycle)", int'(out), tc_out[t]);
      n_ste_used[map_ste[ms]]++;
      if (replicated[ms] != 0) n_replicated_visits++;
      @(negedge clk);
      if (hold) n_hold++;
      else ms = tc_next[t];
    end
    en = 1;
  endtask

  task automatic example_fsm();
    for (int t = 0; t < T; t++) begin tc_next[t] = t; tc_out[t] = (t == 0) ? 1 : 0; end
    for (int s = 0; s < 4; s++) begin
      n_eff[s] = 1; eff_in[s][0] = 0;          // A
      table_t[s][0] = s; table_t[s][1] = s + 1;
      map_ste[s] = 0; map_ps[s] = s;
    end
    n_eff[4] = 5;
    for (int k = 0; k < 5; k++) eff_in[4][k] = k + 1;   // B..F
    for (int c = 0; c < 32; c++) table_t[4][c] = (c == 31) ? 0 : 4;
    map_ste[4] = 1; map_ps[4] = 0;
  endtask

  task automatic random_fsm();
    int order[S];
    int n_wide, used0 = 0, used1 = 0;
    for (int s = 0; s < S; s++) order[s] = s;
    order.shuffle();
    for (int t = 0; t < T; t++) begin
      tc_next[t] = $urandom_range(S - 1); tc_out[t] = $urandom_range(1);
    end
    n_wide = $urandom_range(2);
    for (int j = 0; j < S; j++) begin
      int s = order[j];
      int pick[I];
      for (int b = 0; b < I; b++) pick[b] = b;
      pick.shuffle();
      if (j < n_wide) begin
        n_eff[s] = $urandom_range(5, 2);
        map_ste[s] = 1; map_ps[s] = used1++;
      end else begin
        n_eff[s] = $urandom_range(1);
        if (used0 < 4) begin map_ste[s] = 0; map_ps[s] = used0++; end
        else           begin map_ste[s] = 1; map_ps[s] = used1++; end
      end
      for (int k = 0; k < n_eff[s]; k++) eff_in[s][k] = pick[k];
      for (int c = 0; c < 32; c++) table_t[s][c] = $urandom_range(T - 1);
    end
  endtask

  initial begin
    int start;
    rst = 1; en = 0; in = '0; cfg_we = 0; cfg_ram = CFG_STATE_MAP; cfg_ste = 0;
    cfg_addr = 0; cfg_wdata = 0;
    // the sizing formulas for the example instance give 306 bits without outputs,
    // plus 2^3 x 1 bits for the single output kept here.
    check("RAM bits by the sizing formulas", int'(dut.RAM_BITS), 306 + 8 * O);

    example_fsm();
    map_fsm(); n_reconfig++;
    run_fsm(CYCLES_PER_FSM, 1);

    // Same-cycle outputs and one transition per clock: walk 0 -> 1 -> 2 -> 3 -> 4 -> 0.
    @(negedge clk); rst = 1; en = 1; @(negedge clk); rst = 0;
    in = 6'b111111;
    start = cycles;
    for (int k = 1; k <= 5; k++) begin
      @(negedge clk);
      check("one state per cycle", int'(state), k % 5);
    end
    check("cycles for a lap of the example", cycles - start, 5);
    in = 6'b111110;   // A=0 in state 0: stays
    @(negedge clk); check("self loop", int'(state), 0);

    for (int f = 0; f < N_RANDOM_FSMS; f++) begin
      random_fsm();
      map_fsm(); n_reconfig++;
      run_fsm(CYCLES_PER_FSM, 2);
    end

    for (int i = 0; i < NSTE; i++) begin
      checks++;
      if (n_ste_used[i] == 0) begin failures++; $display("FAIL STE %0d never used", i); end
    end
    checks++; if (n_replicated_visits == 0) begin failures++; $display("FAIL no replicated mapping visited"); end
    checks++; if (n_reconfig < 2) begin failures++; $display("FAIL no reconfiguration"); end
    checks++; if (n_hold == 0) begin failures++; $display("FAIL hold never happened"); end
    checks++; if (n_reset == 0) begin failures++; $display("FAIL reset never happened"); end
    $display("mechanisms: ste0=%0d ste1=%0d replicated=%0d reconfig=%0d hold=%0d reset=%0d",
             n_ste_used[0], n_ste_used[1], n_replicated_visits, n_reconfig, n_hold, n_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
