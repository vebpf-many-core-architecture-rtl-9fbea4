// tb_vebpf_result_analyzer: self-checking test of the multi-rule result
// analyzer.
//
// Feeds per-core results: a drop result before all rules finished must be
// decided at once, a store result likewise, don't-care results only when the
// completed count reaches the total (then the result is don't care), and an
// error code is passed on. Checks the one-cycle write/registered/load-next
// pulse, that only one decision is taken per header (later results ignored)
// and that the analyzer is ready again for the next header.
module tb_vebpf_result_analyzer;
  import vebpf_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst, flag, active, we, regf, lnext;
  logic [7:0] r0, res;
  logic [11:0] total, done;
  vebpf_result_analyzer dut (.clk, .rst, .VeBPF_core_most_recent_result_r0(r0),
    .VeBPF_core_most_recent_result_flag(flag), .Total_eBPF_rules(total), .Total_eBPF_rules_reprogrammed(done),
    .pkt_active(active), .VeBPF_write_result_enable(we), .VeBPF_result_r0(res),
    .VeBPF_result_registered_flag(regf), .VeBPF_load_next_rxpkthdr_flag(lnext));
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int nwe = 0;
  always @(posedge clk) if (!rst && we) nwe++;
  task automatic give(input logic [7:0] v, input int d);
    @(negedge clk); flag = 1; r0 = v; done = 12'(d);
    @(negedge clk); flag = 0;
  endtask
  task automatic next_header;
    @(negedge clk); active = 0; @(negedge clk); active = 1;
  endtask
  initial begin
    rst = 1; flag = 0; active = 0; r0 = 0; total = 4; done = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst = 0;
    active = 1;
    give(RES_DONT_CARE, 0);
    chk(!we && nwe == 0, "don't care before all rules: no decision");
    give(RES_DROP, 1);
    chk(we && regf && lnext && res == RES_DROP, "drop decided the cycle after");
    @(negedge clk);
    chk(!we && nwe == 1, "single-cycle pulse");
    give(RES_STORE, 2);
    chk(nwe == 1, "later results of the same header ignored");
    next_header;
    give(RES_DONT_CARE, 1); give(RES_DONT_CARE, 2); give(RES_DONT_CARE, 3);
    chk(nwe == 1, "not yet");
    give(RES_DONT_CARE, 4);     // the count already includes the result it comes with
    chk(we && res == RES_DONT_CARE, "all rules don't care");
    next_header;
    give(RES_STORE, 0);
    chk(we && res == RES_STORE, "store");
    next_header;
    give(RES_ERROR, 0);
    chk(we && res == RES_ERROR, "error");
    @(negedge clk);
    chk(nwe == 4, "one decision per header");
    active = 0;
    give(RES_DROP, 0);
    chk(nwe == 4, "no decision without a loaded header");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
