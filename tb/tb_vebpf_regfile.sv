// tb_vebpf_regfile: self-checking test of the eleven 64-bit registers.
//
// Checks the reset values (R1-R5 from the input ports, R10 = frame pointer
// init, R0 and R6-R9 zero), write then read on both read ports one cycle
// later, that R10 is read-only, that writes are ignored while reset_in is
// high, and the R0 result port.
module tb_vebpf_regfile;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic reset_in, we;
  logic [4:0][63:0] r_in;
  logic [3:0] ra, rb, wa;
  logic [63:0] da, db, wd, r0;
  vebpf_regfile dut (.clk, .reset_in, .r_in, .fp_init(64'd2048), .ra, .rb, .da, .db, .we, .wa, .wd, .r0);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 5; i++) r_in[i] = 64'(100 + i);
    reset_in = 1; we = 0; wa = 0; wd = 0; ra = 0; rb = 0;
    repeat (2) @(posedge clk);
    reset_in = 0;
    #1;
    for (int r = 0; r <= 10; r++) begin
      logic [63:0] e;
      ra = 4'(r); rb = 4'(r); #1;
      e = (r >= 1 && r <= 5) ? 64'(99 + r) : (r == 10) ? 64'd2048 : 64'd0;
      chk(da == e && db == e, $sformatf("reset value R%0d = %0d", r, da));
    end
    for (int r = 0; r <= 9; r++) begin
      @(negedge clk); we = 1; wa = 4'(r); wd = {32'hA5A5_0000, 32'(r)};
      @(negedge clk); we = 0;
      ra = 4'(r); rb = 4'(r); #1;
      chk(da == {32'hA5A5_0000, 32'(r)} && db == da, $sformatf("write/read R%0d", r));
    end
    chk(r0 == 64'hA5A5_0000_0000_0000, "R0 port");
    @(negedge clk); we = 1; wa = 10; wd = 5;
    @(negedge clk); we = 0; ra = 10; #1;
    chk(da == 64'd2048, "R10 read-only");
    @(negedge clk); reset_in = 1; we = 1; wa = 6; wd = 77;
    @(negedge clk); we = 0; reset_in = 0; ra = 6; rb = 1; #1;
    chk(da == 0 && db == 100, "reset clears R6 and reloads R1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
