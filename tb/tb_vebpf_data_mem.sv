// tb_vebpf_data_mem: self-checking test of the 8-bit data memory.
//
// Fills all 2048 bytes with a pattern, reads every address back (one cycle
// read latency) and checks a write and a read of different addresses in the
// same cycle.
module tb_vebpf_data_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we;
  logic [10:0] wa, ra;
  logic [7:0] wd, rd;
  vebpf_data_mem dut (.clk, .we, .waddr(wa), .wdata(wd), .raddr(ra), .rdata(rd));
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    we = 0; wa = 0; wd = 0; ra = 0;
    for (int i = 0; i < 2048; i++) begin
      @(negedge clk); we = 1; wa = 11'(i); wd = 8'(i * 7 + 3);
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 2048; i++) begin
      ra = 11'(i);
      @(negedge clk); chk(rd == 8'(i * 7 + 3), $sformatf("byte %0d = %h", i, rd));
    end
    @(negedge clk); we = 1; wa = 5; wd = 8'hEE; ra = 6;
    @(negedge clk); we = 0; chk(rd == 8'(6 * 7 + 3), "read during write elsewhere");
    ra = 5;
    @(negedge clk); chk(rd == 8'hEE, "written byte");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #500000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
