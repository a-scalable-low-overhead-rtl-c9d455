// Testbench of one state-transition element (6 FSM inputs, EI = 3, four
// pseudo states). For each of several rounds it gives every pseudo state a
// random set of effective inputs and a random truth table, writes the
// input-selection and state-transition RAMs accordingly, and checks the
// STE's transition index against the table for random FSM inputs.
module tb_mram_ste;
  import mram_pkg::*;
  localparam int I = 6, EI = 3, ST = 4, TW = 4;
  localparam int PSW = 2, IW = 3;
  logic clk = 0;
  logic [I-1:0] in;
  logic [PSW-1:0] pseudo, is_waddr;
  logic is_we, st_we;
  logic [EI*IW-1:0] is_wdata;
  logic [PSW+EI-1:0] st_waddr;
  logic [TW-1:0] st_wdata, trans;
  int idx [ST][EI];
  int tbl [ST][2**EI];
  int checks = 0, failures = 0;

  mram_ste #(.I_TOTAL(I), .EI(EI), .STATES(ST), .TW(TW)) dut (
    .clk, .in, .pseudo, .is_we, .is_waddr, .is_wdata, .st_we, .st_waddr, .st_wdata, .trans);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    is_we = 0; st_we = 0; is_waddr = 0; st_waddr = 0; is_wdata = 0; st_wdata = 0;
    in = 0; pseudo = 0;
    for (int r = 0; r < 20; r++) begin
      for (int p = 0; p < ST; p++) begin
        logic [EI*IW-1:0] w;
        w = '0;
        for (int k = 0; k < EI; k++) begin
          idx[p][k] = $urandom_range(I - 1);
          w[k*IW +: IW] = IW'(idx[p][k]);
        end
        @(negedge clk); is_we = 1; is_waddr = PSW'(p); is_wdata = w;
        @(negedge clk); is_we = 0;
        for (int c = 0; c < 2**EI; c++) begin
          tbl[p][c] = $urandom_range(2**TW - 1);
          @(negedge clk); st_we = 1; st_waddr = (PSW+EI)'((p << EI) | c); st_wdata = TW'(tbl[p][c]);
        end
        @(negedge clk); st_we = 0;
      end
      for (int n = 0; n < 200; n++) begin
        int c;
        c = 0;
        pseudo = PSW'($urandom_range(ST - 1));
        in = I'($urandom);
        #1;
        for (int k = 0; k < EI; k++) c |= int'(in[idx[pseudo][k]]) << k;
        checks++;
        if (int'(trans) != tbl[pseudo][c]) begin
          failures++; $display("FAIL ps %0d in %b: %0d exp %0d", pseudo, in, trans, tbl[pseudo][c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
