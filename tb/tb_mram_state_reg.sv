// Testbench of the state register: synchronous reset to RESET_STATE, loading
// of next_state on each rising edge with en high, holding with en low.
// Expected values come from a shadow copy kept in the testbench.
module tb_mram_state_reg;
  localparam int SW = 3;
  logic clk = 0, rst, en;
  logic [SW-1:0] next_state, state, shadow;
  int checks = 0, failures = 0;

  mram_state_reg #(.SW(SW), .RESET_STATE(2)) dut (.clk, .rst, .en, .next_state, .state);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    rst = 1; en = 0; next_state = 5;
    @(negedge clk);
    check(int'(state), 2, "reset value");
    rst = 0;
    shadow = 2;
    for (int i = 0; i < 500; i++) begin
      en = ($urandom_range(3) != 0);
      rst = ($urandom_range(31) == 0);
      next_state = SW'($urandom);
      @(negedge clk);
      if (rst) shadow = 2;
      else if (en) shadow = next_state;
      check(int'(state), int'(shadow), "state");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
