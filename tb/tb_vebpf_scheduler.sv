// tb_vebpf_scheduler: self-checking test of the multi-rule scheduler
// (arbiter, core selector, tracker and DEMUX together).
//
// Four modelled VeBPF cores take the rule start address while in reset with
// en_ip_next, run for a time that depends on the rule, and halt with a result
// that depends on the rule. Seven rules are more than the cores, so the
// scheduler must wait for cores to become free. Checks that every rule runs
// exactly once on some core with its own start address, that no more than
// four run at once, that each result is reported, the started and completed
// counts, and that the result-registered flag aborts the remaining rules.
module tb_vebpf_scheduler;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 4, R = 7;
  logic rst, ldone, upl, reg_f, rflag;
  logic [11:0] ridx, mstart, total, ip, tot_o, done_cnt, started;
  logic [N-1:0] en_ip, creset, halt, err;
  logic [N-1:0][7:0] cr0;
  logic [7:0] r0;
  vebpf_scheduler #(.N_VEBPF(N)) dut (.clk, .rst, .VeBPF_data_loading_done_flag(ldone),
    .All_eBPF_rules_uploaded_flag(upl), .VeBPF_result_registered_flag(reg_f), .meta_rd_idx(ridx),
    .meta_start(mstart), .meta_total(total), .core_en_ip_next(en_ip), .core_ip_next(ip), .core_reset(creset),
    .core_halt(halt), .core_error(err), .core_r0(cr0), .VeBPF_core_most_recent_result_r0(r0),
    .VeBPF_core_most_recent_result_flag(rflag), .Total_eBPF_rules(tot_o),
    .Total_eBPF_rules_reprogrammed(done_cnt), .Total_eBPF_rules_started(started));
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  assign mstart = 12'(200 + 10 * ridx);
  logic [7:0] rule_res [R];
  // cores
  logic [11:0] pc [N];
  int run_t [N];
  int ran [R];
  int max_run = 0;
  for (genvar c = 0; c < N; c++) begin : g_core
    always @(posedge clk) begin
      if (rst || creset[c]) begin
        run_t[c] <= 0;
        if (en_ip[c]) pc[c] <= ip;
      end else if (!halt[c]) begin
        run_t[c] <= run_t[c] + 1;
        if (run_t[c] == 0) ran[(pc[c] - 200) / 10]++;
      end
    end
    assign halt[c] = !creset[c] && run_t[c] >= 5 + 3 * ((pc[c] - 200) / 10);
    assign cr0[c]  = rule_res[(pc[c] - 200) / 10];
    assign err[c]  = 1'b0;
  end
  always @(posedge clk) if (!rst && $countones(~creset) > max_run) max_run = $countones(~creset);
  int nres;
  always @(posedge clk) if (!rst && rflag) nres++;
  initial begin
    rst = 1; ldone = 0; upl = 0; reg_f = 0; total = R; nres = 0;
    foreach (ran[i]) ran[i] = 0;
    foreach (rule_res[i]) rule_res[i] = 8'h00;
    foreach (pc[i]) pc[i] = 200;
    repeat (2) @(posedge clk); @(negedge clk) rst = 0;
    chk(&creset, "cores in reset");
    ldone = 1; upl = 1;
    begin
      int t;
      t = 0;
      while (done_cnt != R && t < 1000) begin @(negedge clk); t++; end
    end
    @(negedge clk);
    chk(done_cnt == R && started == R && tot_o == R, "all rules completed");
    chk(nres == R, $sformatf("%0d results reported", nres));
    foreach (ran[i]) chk(ran[i] == 1, $sformatf("rule %0d ran %0d times", i, ran[i]));
    chk(max_run == N, $sformatf("at most %0d cores busy (%0d)", N, max_run));
    // next packet: rule 1 drops; the analyzer flushes at its result
    @(negedge clk); reg_f = 1; @(negedge clk); reg_f = 0;
    foreach (ran[i]) ran[i] = 0;
    rule_res[1] = 8'h01; nres = 0;
    while (!(rflag && r0 == 8'h01)) @(negedge clk);
    reg_f = 1; ldone = 0; @(negedge clk); reg_f = 0;
    chk(&creset && done_cnt == 0 && started == 0, "flush puts all cores back in reset");
    repeat (30) @(negedge clk);
    chk(ran[6] == 0 && nres < R, "remaining rules aborted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
