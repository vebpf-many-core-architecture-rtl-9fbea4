// tb_vebpf_rules_parser: self-checking test of the dynamic rules parser.
//
// Drives the UART RX signals for three rules of 3, 1 and 5 instructions and
// checks the FIFO pushes, the (start, length) metadata entries, the rules
// available flag, the error flag for an empty rule, a FIFO-full push and a
// UART error, and that a new-rule-set command clears the flags and is passed
// on.
module tb_vebpf_rules_parser;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst, en, nxt, all, rnew_in, uerr, fwr, ffull, mwr, movf, rnew, avail, err;
  logic [63:0] data, fdata;
  logic [11:0] addr, mstart, mlen;
  vebpf_rules_parser dut (.clk, .rst, .VeBPF_pgm_data(data), .VeBPF_pgm_addr(addr), .VeBPF_pgm_en(en),
    .VeBPF_next_rule_flag(nxt), .VeBPF_all_rules_done_flag(all), .VeBPF_rst_new_rules_flag_in(rnew_in),
    .uart_error(uerr), .rules_fifo_wr(fwr), .rules_fifo_data(fdata), .rules_fifo_full(ffull), .meta_wr(mwr),
    .meta_start(mstart), .meta_len(mlen), .meta_overflow(movf), .VeBPF_rst_new_rules_flag(rnew),
    .VeBPF_rules_available_flag(avail), .Error_flag(err));
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic [63:0] fq[$];
  logic [23:0] mq[$];
  always @(posedge clk) begin
    if (!rst && fwr) fq.push_back(fdata);
    if (!rst && mwr) mq.push_back({mstart, mlen});
  end
  int n = 0;
  task automatic instr;
    @(negedge clk); en = 1; data = 64'(1000 + n); addr = 12'(n); n++;
    @(negedge clk); en = 0;
  endtask
  task automatic pulse(ref logic s);
    @(negedge clk); s = 1;
    @(negedge clk); s = 0;
  endtask
  initial begin
    rst = 1; en = 0; nxt = 0; all = 0; rnew_in = 0; uerr = 0; ffull = 0; movf = 0; data = 0; addr = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst = 0;
    repeat (3) instr; pulse(nxt);
    instr; pulse(nxt);
    repeat (5) instr;
    chk(!avail, "not available before all-done");
    pulse(all);
    chk(avail && !err, "available after all-done");
    chk(fq.size() == 9 && fq[0] == 1000 && fq[8] == 1008, "instructions pushed into the FIFO");
    chk(mq.size() == 3 && mq[0] == {12'd0, 12'd3} && mq[1] == {12'd3, 12'd1} && mq[2] == {12'd4, 12'd5},
        "rule metadata");
    pulse(rnew_in);
    chk(!avail && !err, "new rule set clears");
    pulse(nxt);
    chk(err && mq.size() == 3, "empty rule is an error, no entry");
    pulse(rnew_in);
    n = 0;
    ffull = 1; instr; ffull = 0;
    chk(err && fq.size() == 9, "push into full FIFO is an error");
    pulse(rnew_in);
    pulse(uerr);
    chk(err, "UART error");
    pulse(rnew_in);
    chk(!err, "cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  // rst_new passed straight through
  always @(posedge clk) if (rnew !== rnew_in) begin checks++; failures++; $display("FAIL: rst_new pass-through"); end
endmodule
