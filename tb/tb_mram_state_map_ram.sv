// Testbench of the state-map RAM: writes every entry with random {ste_id,
// pseudo} words, checks that each state reads back its own fields in the same
// cycle (combinational read), that a cycle with we low changes nothing, and
// then loads the mapping of the five-state example (states 0-3 -> STE 0,
// pseudo states 0-3; state 4 -> STE 1, pseudo state 0).
module tb_mram_state_map_ram;
  localparam int SW = 3, PW = 2, IDW = 1;
  logic clk = 0, we;
  logic [SW-1:0] waddr, state;
  logic [IDW+PW-1:0] wdata;
  logic [IDW-1:0] ste_id;
  logic [PW-1:0] pseudo;
  logic [IDW+PW-1:0] shadow [2**SW];
  int checks = 0, failures = 0;

  mram_state_map_ram #(.SW(SW), .PW(PW), .IDW(IDW)) dut (.clk, .we, .waddr, .wdata, .state, .ste_id, .pseudo);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(int a, int d);
    @(negedge clk); we = 1; waddr = SW'(a); wdata = (IDW+PW)'(d);
    @(negedge clk); we = 0;
    shadow[a] = (IDW+PW)'(d);
  endtask

  task automatic check_all();
    for (int s = 0; s < 2**SW; s++) begin
      state = SW'(s); #1;
      checks++;
      if ({ste_id, pseudo} != shadow[s]) begin
        failures++; $display("FAIL state %0d: id %0d ps %0d exp %0h", s, ste_id, pseudo, shadow[s]);
      end
    end
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; state = 0;
    for (int r = 0; r < 20; r++) begin
      for (int s = 0; s < 2**SW; s++) write(s, $urandom);
      check_all();
      // we low: nothing changes
      @(negedge clk); waddr = SW'($urandom); wdata = ~shadow[waddr];
      @(negedge clk);
      check_all();
    end
    for (int s = 0; s < 4; s++) write(s, (0 << PW) | s);
    write(4, (1 << PW) | 0);
    for (int s = 0; s < 5; s++) begin
      state = SW'(s); #1;
      checks += 2;
      if (int'(ste_id) != (s == 4 ? 1 : 0)) begin failures++; $display("FAIL example id of %0d", s); end
      if (int'(pseudo) != (s == 4 ? 0 : s)) begin failures++; $display("FAIL example pseudo of %0d", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
