// tb_vebpf_core_selector: self-checking test of the core-selector and
// multi-rule re-programmer.
//
// The testbench models the rules metadata table (five rules), the arbiter
// (grants with a chosen delay and id) and the tracker's done-ack (one cycle
// after the activate request). Checks that nothing starts before a header is
// loaded and the rules are uploaded, the rule start pointer and grant id
// sent with each activate pulse in rule order, the started-rule count, the
// stop after the last rule, the 4-cycle-per-rule dispatch rate with an
// immediate grant, and the restart for the next packet after the result is
// registered (also mid-way, aborting remaining rules).
module tb_vebpf_core_selector;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst, ldone, upl, reg_f, req, grant, en_ip, act, ack;
  logic [11:0] ridx, mstart, total, ip, started;
  logic [7:0] gid_in, gid;
  vebpf_core_selector dut (.clk, .rst, .VeBPF_data_loading_done_flag(ldone), .All_eBPF_rules_uploaded_flag(upl),
    .VeBPF_result_registered_flag(reg_f), .meta_rd_idx(ridx), .meta_start(mstart), .Total_eBPF_rules(total),
    .VeBPF_core_req(req), .VeBPF_core_grant(grant), .VeBPF_core_grant_id_in(gid_in), .en_ip_next_eBPF_rule(en_ip),
    .ip_next_eBPF_rule(ip), .VeBPF_core_grant_id(gid), .Activate_granted_reprog_VeBPF_core_req(act),
    .Activate_granted_reprog_VeBPF_core_req_done_ack(ack), .Total_eBPF_rules_reprogrammed(started));
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  assign mstart = 12'(100 + 7 * ridx);
  always @(posedge clk) ack <= act;
  int gdelay = 0, gcnt = 0, next_id = 0;
  always @(posedge clk) begin
    grant <= 0;
    if (!rst && req && !grant) begin
      if (gcnt >= gdelay) begin grant <= 1; gid_in <= 8'(next_id); next_id = (next_id + 1) % 12; gcnt <= 0; end
      else gcnt <= gcnt + 1;
    end
  end
  int acts[$], ids[$], act_cyc[$], cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (!rst && act) begin acts.push_back(ip); ids.push_back(gid); act_cyc.push_back(cyc); chk(en_ip, "en_ip with activate"); end
  end
  initial begin
    rst = 1; ldone = 0; upl = 0; reg_f = 0; total = 5;
    repeat (2) @(posedge clk); @(negedge clk) rst = 0;
    ldone = 1;
    repeat (5) @(negedge clk);
    chk(acts.size() == 0 && !req, "waits for rules uploaded");
    upl = 1;
    repeat (40) @(negedge clk);
    chk(acts.size() == 5, $sformatf("five rules started (%0d)", acts.size()));
    for (int i = 0; i < acts.size(); i++) chk(acts[i] == 100 + 7 * i && ids[i] == i, $sformatf("rule %0d start/id", i));
    for (int i = 1; i < act_cyc.size(); i++)
      chk(act_cyc[i] - act_cyc[i-1] == 4, $sformatf("dispatch interval %0d (want 4 cycles per rule)", act_cyc[i] - act_cyc[i-1]));
    chk(started == 5 && !req, "all dispatched, no further request");
    // next packet
    @(negedge clk); reg_f = 1; @(negedge clk); reg_f = 0;
    chk(started == 0, "count cleared by result registered");
    acts.delete(); ids.delete(); act_cyc.delete();
    gdelay = 3;
    repeat (14) @(negedge clk);
    // abort mid-way
    reg_f = 1; ldone = 0; @(negedge clk); reg_f = 0;
    chk(acts.size() >= 1 && acts.size() < 5, $sformatf("aborted after %0d rules", acts.size()));
    chk(acts[0] == 100, "restart from rule 0");
    begin
      int n;
      n = acts.size();
      repeat (20) @(negedge clk);
      chk(acts.size() == n, "no dispatch without a loaded header");
    end
    total = 0; ldone = 1;
    repeat (10) @(negedge clk);
    chk(!req, "no rules, no request");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
