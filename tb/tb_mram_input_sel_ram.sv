// Testbench of an STE input-selection RAM with five effective inputs and two
// pseudo states (STE 1 of the five-state example): random words are written,
// each pseudo state must return its EI input indices, index k from bits
// [k*IW +: IW] of the written word; a cycle with we low must change nothing.
module tb_mram_input_sel_ram;
  localparam int PSW = 1, EI = 5, IW = 3;
  logic clk = 0, we;
  logic [PSW-1:0] waddr, pseudo;
  logic [EI*IW-1:0] wdata;
  logic [EI-1:0][IW-1:0] sel;
  logic [EI*IW-1:0] shadow [2**PSW];
  int checks = 0, failures = 0;

  mram_input_sel_ram #(.PSW(PSW), .EI(EI), .IW(IW)) dut (.clk, .we, .waddr, .wdata, .pseudo, .sel);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int p = 0; p < 2**PSW; p++) begin
      pseudo = PSW'(p); #1;
      for (int k = 0; k < EI; k++) begin
        checks++;
        if (sel[k] != shadow[p][k*IW +: IW]) begin
          failures++; $display("FAIL ps %0d slot %0d: %0d exp %0d", p, k, sel[k], shadow[p][k*IW +: IW]);
        end
      end
    end
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; pseudo = 0;
    for (int r = 0; r < 50; r++) begin
      for (int p = 0; p < 2**PSW; p++) begin
        @(negedge clk); we = 1; waddr = PSW'(p); wdata = (EI*IW)'({$urandom, $urandom});
        @(negedge clk); we = 0; shadow[p] = wdata;
      end
      check_all();
      @(negedge clk); wdata = ~wdata; @(negedge clk);
      check_all();
    end
    // example: state 4 selects inputs B..F (indices 1..5)
    @(negedge clk); we = 1; waddr = 0; wdata = {3'd5, 3'd4, 3'd3, 3'd2, 3'd1};
    @(negedge clk); we = 0; pseudo = 0; #1;
    for (int k = 0; k < EI; k++) begin
      checks++;
      if (int'(sel[k]) != k + 1) begin failures++; $display("FAIL example slot %0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
