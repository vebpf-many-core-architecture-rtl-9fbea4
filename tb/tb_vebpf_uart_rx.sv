// tb_vebpf_uart_rx: self-checking test of the VeBPF UART RX command decoder.
//
// Sends 8N1 frames at 8 clocks per bit: two rules of instructions with
// next-rule and all-done commands, an unknown command byte, a frame with a
// bad stop bit and a new-rule-set command. Checks each instruction word and
// its running address, every flag pulse, pgm_done, the errors, and that a
// byte is decoded within one bit time after its stop bit (10 bit times per
// byte).
module tb_vebpf_uart_rx;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int CPB = 8;
  logic rst, rx, en, done, nxt, all, rnew, err;
  logic [63:0] data;
  logic [11:0] addr;
  vebpf_uart_rx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst, .rx, .VeBPF_pgm_data(data), .VeBPF_pgm_addr(addr),
    .VeBPF_pgm_en(en), .VeBPF_pgm_done(done), .VeBPF_next_rule_flag(nxt), .VeBPF_all_rules_done_flag(all),
    .VeBPF_rst_new_rules_flag(rnew), .Error_flag(err));
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic send_byte(input logic [7:0] b, input bit bad_stop = 0);
    rx = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (CPB) @(posedge clk); end
    rx = !bad_stop; repeat (CPB) @(posedge clk);
    rx = 1;
  endtask
  task automatic send_instr(input logic [63:0] w);
    send_byte(8'h01);
    for (int i = 0; i < 8; i++) send_byte(w[8*i +: 8]);
  endtask
  logic [63:0] words[$];
  logic [11:0] addrs[$];
  int n_next = 0, n_all = 0, n_new = 0, n_err = 0, last_en_cycle = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (!rst && en) begin words.push_back(data); addrs.push_back(addr); last_en_cycle = cyc; end
    if (!rst && nxt) n_next++;
    if (!rst && all) n_all++;
    if (!rst && rnew) n_new++;
    if (!rst && err) n_err++;
  end
  int t0;
  initial begin
    rst = 1; rx = 1;
    repeat (3) @(posedge clk); rst = 0;
    repeat (20) @(posedge clk);
    t0 = cyc;
    send_instr(64'h0000_0005_0000_00b7);
    repeat (CPB) @(posedge clk);
    chk(words.size() == 1 && last_en_cycle - t0 <= 9 * 10 * CPB + CPB,
        $sformatf("instruction decoded %0d cycles after start (9 bytes)", last_en_cycle - t0));
    send_instr(64'h0000_0000_0000_0095);
    send_byte(8'h02);
    send_instr(64'h1122_3344_5566_7788);
    send_byte(8'h03);
    repeat (2 * CPB) @(posedge clk);
    chk(words.size() == 3 && words[0] == 64'h0000_0005_0000_00b7 && words[1] == 64'h95 &&
        words[2] == 64'h1122_3344_5566_7788, "instruction words");
    chk(addrs[0] == 0 && addrs[1] == 1 && addrs[2] == 2, "running addresses");
    chk(n_next == 1 && n_all == 1 && done, "next-rule and all-done");
    chk(n_err == 0, "no error yet");
    send_byte(8'h7F);
    repeat (2 * CPB) @(posedge clk);
    chk(n_err == 1, "unknown command");
    send_byte(8'h02, 1);
    repeat (4 * CPB) @(posedge clk);
    chk(n_err >= 2 && n_next == 1, "framing error");
    send_byte(8'h04);
    repeat (2 * CPB) @(posedge clk);
    chk(n_new == 1 && !done, "new rule set clears done");
    send_instr(64'hABCD);
    repeat (2 * CPB) @(posedge clk);
    chk(words.size() == 4 && addrs[3] == 0 && words[3] == 64'hABCD, "address restarts at 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
