// End-to-end testbench of a larger M-RAM overlay instance, sized for FSMs of
// about 30 states, 9 inputs and 10 outputs (a mid-sized controller), with
// three STEs of 1, 3 and 9 effective inputs. Three STEs make the STE index
// two bits wide with one unused code, and the STEs differ in pseudo-state
// count, so the narrow-STE address slicing in the top level is exercised.
//
// A generic mapper in the testbench builds random FSMs: a list of T unique
// {next state, outputs} transitions, and per state a random number of
// effective inputs (distinct random inputs) with a random truth table. Each
// state is placed in a random STE with a free pseudo state and enough
// effective inputs; when its own count is smaller the table is replicated.
// After loading, random inputs are applied and state and same-cycle outputs
// are compared with a direct model every cycle. Each STE, replication and
// reconfiguration must occur.
module tb_mram_overlay_large;
  import mram_pkg::*;

  localparam int S = 30, T = 40, I = 9, O = 10, NSTE = 3;
  localparam int unsigned EI_P [NSTE] = '{1, 3, 9};
  localparam int unsigned ST_P [NSTE] = '{16, 12, 4};
  localparam int SW = 5, TW = 6, IW = 4, PW = 4;
  localparam int N_FSMS = 12, CYCLES = 600;

  logic          clk = 0;
  logic          rst, en;
  logic [I-1:0]  in;
  logic [O-1:0]  out;
  logic [SW-1:0] state;
  logic          cfg_we;
  cfg_ram_e      cfg_ram;
  logic [1:0]    cfg_ste;
  logic [15:0]   cfg_addr;
  logic [63:0]   cfg_wdata;

  mram_overlay #(
    .S_TOTAL(S), .T_MAX(T), .I_TOTAL(I), .O_TOTAL(O), .NUM_STE(NSTE),
    .STE_EI(EI_P), .STE_STATES(ST_P)
  ) dut (
    .clk, .rst, .en, .in, .out, .state, .cfg_we, .cfg_ram, .cfg_ste,
    .cfg_addr  (cfg_addr[$bits(dut.cfg_addr)-1:0]),
    .cfg_wdata (cfg_wdata[$bits(dut.cfg_wdata)-1:0])
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_eff  [S];
  int eff_in [S][9];
  int table_t[S][512];
  int tc_next[T];
  int tc_out [T];
  int map_ste[S];
  int map_ps [S];
  int replicated[S];
  int n_ste_used[NSTE];
  int n_replicated = 0, n_reconfig = 0;

  task automatic cfg_write(cfg_ram_e r, int ste, int addr, logic [63:0] data);
    @(negedge clk);
    cfg_we = 1; cfg_ram = r; cfg_ste = 2'(ste); cfg_addr = 16'(addr); cfg_wdata = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic random_fsm();
    int used[NSTE];
    for (int i = 0; i < NSTE; i++) used[i] = 0;
    for (int t = 0; t < T; t++) begin
      tc_next[t] = $urandom_range(S - 1);
      tc_out[t]  = $urandom_range((1 << O) - 1);
    end
    for (int s = 0; s < S; s++) begin
      int i, lo, pick[I];
      do i = $urandom_range(NSTE - 1); while (used[i] >= int'(ST_P[i]));
      map_ste[s] = i; map_ps[s] = used[i]++;
      // mostly a count that needs this STE, sometimes a smaller one (replication)
      lo = (i == 0) ? 0 : int'(EI_P[i - 1]) + 1;
      n_eff[s] = ($urandom_range(3) == 0) ? $urandom_range(EI_P[i]) : $urandom_range(EI_P[i], lo);
      replicated[s] = (n_eff[s] < int'(EI_P[i])) ? 1 : 0;
      for (int b = 0; b < I; b++) pick[b] = b;
      pick.shuffle();
      for (int k = 0; k < n_eff[s]; k++) eff_in[s][k] = pick[k];
      for (int c = 0; c < 512; c++) table_t[s][c] = $urandom_range(T - 1);
    end
  endtask

  task automatic map_fsm();
    for (int t = 0; t < (1 << TW); t++)
      cfg_write(CFG_TRANS_CODE, 0, t, (t < T) ? 64'((tc_next[t] << O) | tc_out[t]) : {$urandom, $urandom});
    for (int s = 0; s < (1 << SW); s++)
      cfg_write(CFG_STATE_MAP, 0, s, (s < S) ? 64'((map_ste[s] << PW) | map_ps[s]) : 64'($urandom));
    for (int s = 0; s < S; s++) begin
      int i = map_ste[s], p = map_ps[s];
      logic [63:0] sel = '0;
      for (int k = 0; k < int'(EI_P[i]); k++)
        sel[k*IW +: IW] = IW'((k < n_eff[s]) ? eff_in[s][k] : int'($urandom_range(I - 1)));
      cfg_write(CFG_INPUT_SEL, i, p, sel);
      for (int c = 0; c < (1 << EI_P[i]); c++)
        cfg_write(CFG_STATE_TRANS, i, (p << EI_P[i]) | c, 64'(table_t[s][c & ((1 << n_eff[s]) - 1)]));
    end
  endtask

  function automatic int model_trans(int s, logic [I-1:0] x);
    int c = 0;
    for (int k = 0; k < n_eff[s]; k++) c |= int'(x[eff_in[s][k]]) << k;
    return table_t[s][c];
  endfunction

  initial begin
    rst = 1; en = 0; in = '0; cfg_we = 0; cfg_ram = CFG_STATE_MAP; cfg_ste = 0;
    cfg_addr = 0; cfg_wdata = 0;
    // the sizing formulas worked by hand: state map 32*(4+2) = 192; STE 0: 2^5*6 + 16*1*4 = 256;
    // STE 1: 2^7*6 + 16*3*4 = 960; STE 2: 2^11*6 + 4*9*4 = 12432; transition code 64*(5+10) = 960.
    check("RAM bits by the sizing formulas", int'(dut.RAM_BITS), 192 + 256 + 960 + 12432 + 960);
    for (int f = 0; f < N_FSMS; f++) begin
      int ms;
      ms = 0;
      random_fsm();
      map_fsm(); n_reconfig++;
      @(negedge clk); rst = 1; en = 1;
      @(negedge clk); rst = 0;
      for (int cyc = 0; cyc < CYCLES; cyc++) begin
        int t;
        in = I'($urandom);
        #1;
        t = model_trans(ms, in);
        check("state", int'(state), ms);
        check("out", int'(out), tc_out[t]);
        n_ste_used[map_ste[ms]]++;
        if (replicated[ms] != 0) n_replicated++;
        @(negedge clk);
        ms = tc_next[t];
      end
    end
    for (int i = 0; i < NSTE; i++) begin
      checks++;
      if (n_ste_used[i] == 0) begin failures++; $display("FAIL STE %0d never used", i); end
    end
    checks++; if (n_replicated == 0) begin failures++; $display("FAIL replication never used"); end
    checks++; if (n_reconfig < 2) begin failures++; $display("FAIL no reconfiguration"); end
    $display("mechanisms: ste0=%0d ste1=%0d ste2=%0d replicated=%0d reconfig=%0d RAM_BITS=%0d",
             n_ste_used[0], n_ste_used[1], n_ste_used[2], n_replicated, n_reconfig, dut.RAM_BITS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
