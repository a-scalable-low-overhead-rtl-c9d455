// Testbench of an STE's input multiplexers: for random inputs and random
// selections (including indices past the last input, which must give 0) each
// effective-input bit is compared with the selected input bit.
module tb_mram_input_muxes;
  localparam int I = 6, EI = 5, IW = 3;
  logic [I-1:0] in;
  logic [EI-1:0][IW-1:0] sel;
  logic [EI-1:0] eff;
  int checks = 0, failures = 0;

  mram_input_muxes #(.I_TOTAL(I), .EI(EI), .IW(IW)) dut (.in, .sel, .eff);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 2000; r++) begin
      in = I'($urandom);
      for (int k = 0; k < EI; k++) sel[k] = IW'($urandom);
      #1;
      for (int k = 0; k < EI; k++) begin
        logic exp;
        exp = (int'(sel[k]) < I) ? in[sel[k]] : 1'b0;
        checks++;
        if (eff[k] !== exp) begin failures++; $display("FAIL slot %0d sel %0d", k, sel[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
