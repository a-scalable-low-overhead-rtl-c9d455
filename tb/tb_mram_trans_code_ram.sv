// Testbench of the transition-code RAM: random {next_state, outputs} words
// are written to every transition index and each index must return both
// fields in the same cycle; a cycle with we low must change nothing.
module tb_mram_trans_code_ram;
  localparam int TW = 3, SW = 3, OW = 4;
  logic clk = 0, we;
  logic [TW-1:0] waddr, trans;
  logic [SW+OW-1:0] wdata, shadow [2**TW];
  logic [SW-1:0] next_state;
  logic [OW-1:0] outputs;
  int checks = 0, failures = 0;

  mram_trans_code_ram #(.TW(TW), .SW(SW), .OW(OW)) dut (.clk, .we, .waddr, .wdata, .trans, .next_state, .outputs);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int t = 0; t < 2**TW; t++) begin
      trans = TW'(t); #1;
      checks += 2;
      if (next_state != shadow[t][OW +: SW]) begin failures++; $display("FAIL next of %0d", t); end
      if (outputs != shadow[t][0 +: OW]) begin failures++; $display("FAIL outputs of %0d", t); end
    end
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; trans = 0;
    for (int r = 0; r < 30; r++) begin
      for (int t = 0; t < 2**TW; t++) begin
        @(negedge clk); we = 1; waddr = TW'(t); wdata = (SW+OW)'($urandom);
        @(negedge clk); we = 0; shadow[t] = wdata;
      end
      check_all();
      @(negedge clk); wdata = ~wdata; @(negedge clk);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
