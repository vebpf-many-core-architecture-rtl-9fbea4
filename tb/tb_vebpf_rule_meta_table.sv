// tb_vebpf_rule_meta_table: self-checking test of the rules metadata table.
//
// Appends rules and reads them back by index (rule index, start, length,
// valid), checks the total, the overflow flag when more than MAX_RULES are
// appended (MAX_RULES reduced to 8 here), and that clear empties the table.
module tb_vebpf_rule_meta_table;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst, clear, wr, ovf, valid;
  logic [11:0] ws, wl, ri, rri, rs, rl, total;
  vebpf_rule_meta_table #(.MAX_RULES(8)) dut (.clk, .rst, .clear, .wr, .wr_start(ws), .wr_len(wl), .overflow(ovf),
    .rd_idx(ri), .rd_rule_idx(rri), .rd_start(rs), .rd_len(rl), .rd_valid(valid), .total);
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int o;
  initial begin
    rst = 1; clear = 0; wr = 0; ws = 0; wl = 0; ri = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst = 0;
    chk(total == 0 && !valid, "empty");
    o = 0;
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); wr = 1; ws = 12'(10 * i); wl = 12'(i + 2); #1 chk(!ovf, "no overflow");
      @(negedge clk); wr = 0;
    end
    chk(total == 8, "total 8");
    @(negedge clk); wr = 1; ws = 999; wl = 1; #1 chk(ovf, "overflow at MAX_RULES");
    @(negedge clk); wr = 0;
    chk(total == 8, "dropped");
    for (int i = 0; i < 8; i++) begin
      ri = 12'(i); #1;
      chk(valid && rri == 12'(i) && rs == 12'(10 * i) && rl == 12'(i + 2), $sformatf("entry %0d", i));
    end
    ri = 8; #1 chk(!valid, "past total invalid");
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    ri = 0; #1 chk(total == 0 && !valid, "cleared");
    @(negedge clk); wr = 1; ws = 7; wl = 3; @(negedge clk); wr = 0; #1;
    chk(total == 1 && valid && rs == 7 && rl == 3, "refill after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
