// Testbench of an STE state-transition RAM (STE 1 geometry of the five-state
// example: 2 pseudo states, 5 effective inputs, 3-bit transition index).
// Every address {pseudo, eff} is written with a random index and read back;
// then the example's table is loaded (pseudo state 0: index 0 when all five
// inputs are 1, else 4) and checked for all 32 input combinations.
module tb_mram_state_trans_ram;
  localparam int PSW = 1, EI = 5, TW = 3;
  logic clk = 0, we;
  logic [PSW+EI-1:0] waddr;
  logic [TW-1:0] wdata, trans;
  logic [PSW-1:0] pseudo;
  logic [EI-1:0] eff;
  logic [TW-1:0] shadow [2**(PSW+EI)];
  int checks = 0, failures = 0;

  mram_state_trans_ram #(.PSW(PSW), .EI(EI), .TW(TW)) dut (.clk, .we, .waddr, .wdata, .pseudo, .eff, .trans);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(int a, int d);
    @(negedge clk); we = 1; waddr = (PSW+EI)'(a); wdata = TW'(d);
    @(negedge clk); we = 0; shadow[a] = TW'(d);
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; pseudo = 0; eff = 0;
    for (int r = 0; r < 10; r++) begin
      for (int a = 0; a < 2**(PSW+EI); a++) write(a, $urandom);
      for (int a = 0; a < 2**(PSW+EI); a++) begin
        pseudo = PSW'(a >> EI); eff = EI'(a); #1;
        checks++;
        if (trans != shadow[a]) begin failures++; $display("FAIL addr %0d: %0d exp %0d", a, trans, shadow[a]); end
      end
    end
    for (int c = 0; c < 32; c++) write(c, (c == 31) ? 0 : 4);
    pseudo = 0;
    for (int c = 0; c < 32; c++) begin
      eff = EI'(c); #1;
      checks++;
      if (int'(trans) != ((c == 31) ? 0 : 4)) begin failures++; $display("FAIL example combo %0d", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
