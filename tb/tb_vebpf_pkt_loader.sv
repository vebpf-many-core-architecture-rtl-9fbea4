// tb_vebpf_pkt_loader: self-checking test of the per-core packet loader.
//
// Drives 64-bit words on the data bus and checks the byte-serial writes
// (byte i of the word to address base+i, little-endian), that ACK rises nine
// cycles after the enable (eight byte writes plus the ACK register), the
// four-phase release of ACK, and that a request is ignored while the core is
// out of reset (running).
module tb_vebpf_pkt_loader;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst, reset_in, en, ack, we, busy;
  logic [63:0] word;
  logic [10:0] addr, maddr;
  logic [7:0] mdat;
  logic [7:0] mem [2048];
  vebpf_pkt_loader dut (.clk, .rst, .reset_in, .VeBPF_data_word_in(word), .VeBPF_data_addr_in(addr),
    .VeBPF_data_en_in(en), .VeBPF_data_ack_out(ack), .mem_we(we), .mem_addr(maddr), .mem_wdata(mdat), .busy);
  always @(posedge clk) if (we) mem[maddr] <= mdat;
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int cyc;
  initial begin
    foreach (mem[i]) mem[i] = 0;
    rst = 1; reset_in = 1; en = 0; word = 0; addr = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int w = 0; w < 4; w++) begin
      @(negedge clk); en = 1; addr = 11'(16 + 8 * w); word = 64'h0807060504030201 + 64'(w) * 64'h1010101010101010;
      cyc = 0;
      do begin @(negedge clk); cyc++; end while (!ack && cyc < 50);
      chk(cyc == 9, $sformatf("ack after %0d cycles (want 9)", cyc));
      @(negedge clk); chk(ack, "ack held");
      en = 0;
      @(negedge clk); chk(!ack, "ack released");
    end
    for (int i = 0; i < 32; i++)
      chk(mem[16 + i] == 8'((i % 8) + 1 + 16 * (i / 8)), $sformatf("byte %0d = %h", i, mem[16 + i]));
    // running core: request ignored
    reset_in = 0;
    @(negedge clk); en = 1; addr = 0; word = '1;
    repeat (15) @(negedge clk);
    chk(!ack && !busy && mem[0] == 0, "no write while core runs");
    reset_in = 1;
    cyc = 0;
    do begin @(negedge clk); cyc++; end while (!ack && cyc < 50);
    chk(mem[0] == 8'hFF && mem[7] == 8'hFF, "write after core back in reset");
    en = 0;
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
