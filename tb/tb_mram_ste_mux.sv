// Testbench of the STE multiplexer with three STEs (so index 3 is out of
// range and must give 0): random per-STE transition indices and a random
// STE index are applied and the output is compared with the chosen input.
module tb_mram_ste_mux;
  localparam int N = 3, IDW = 2, TW = 4;
  logic [N-1:0][TW-1:0] ste_trans;
  logic [IDW-1:0] ste_id;
  logic [TW-1:0] trans;
  int checks = 0, failures = 0;

  mram_ste_mux #(.NUM_STE(N), .IDW(IDW), .TW(TW)) dut (.ste_trans, .ste_id, .trans);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 2000; r++) begin
      int exp;
      for (int i = 0; i < N; i++) ste_trans[i] = TW'($urandom);
      ste_id = IDW'($urandom);
      #1;
      exp = (int'(ste_id) < N) ? int'(ste_trans[ste_id]) : 0;
      checks++;
      if (int'(trans) != exp) begin failures++; $display("FAIL id %0d: %0d exp %0d", ste_id, trans, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
