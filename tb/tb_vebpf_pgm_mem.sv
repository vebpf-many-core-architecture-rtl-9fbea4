// tb_vebpf_pgm_mem: self-checking test of the 64-bit program memory.
//
// Writes words through the program bus four-phase handshake and checks that
// the ACK rises exactly one cycle after the enable, stays high while the
// enable is held, falls one cycle after the enable drops, and that the
// synchronous read port returns each word one cycle after its address.
module tb_vebpf_pgm_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst, en, ack;
  logic [63:0] wd, rd;
  logic [11:0] wa, ra;
  vebpf_pgm_mem #(.DEPTH(64)) dut (.clk, .rst, .VeBPF_pgm_data_in(wd), .VeBPF_pgm_addr_in(wa),
    .VeBPF_pgm_en_in(en), .VeBPF_pgm_ack_out(ack), .rd_addr(ra), .rd_data(rd));
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    rst = 1; en = 0; wd = 0; wa = 0; ra = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); en = 1; wa = 12'(i); wd = {32'(i), 32'hC0DE0000 + 32'(i)};
      @(negedge clk); chk(ack, "ack one cycle after enable");
      @(negedge clk); chk(ack, "ack held while enable held");
      en = 0; wd = 0;
      @(negedge clk); chk(!ack, "ack falls one cycle after enable drops");
    end
    for (int i = 63; i >= 0; i--) begin
      @(negedge clk); ra = 12'(i);
      @(negedge clk); chk(rd == {32'(i), 32'hC0DE0000 + 32'(i)}, $sformatf("read %0d = %h", i, rd));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
