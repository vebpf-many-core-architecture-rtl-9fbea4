// tb_vebpf_tracker: self-checking test of the many-core tracker and
// rules-runner.
//
// Activates cores, checks that reset_in of the activated core falls at the
// next edge and the done-ack follows one cycle later, the available flags,
// that halted cores are reported one per cycle lowest number first with
// their R0 (RES_ERROR for a core that stopped on an error), the completed
// rule count, and that the result-registered flag puts every core back in
// reset.
module tb_vebpf_tracker;
  import vebpf_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 4;
  logic rst, act, ack, rflag, reg_f;
  logic [7:0] gid, r0;
  logic [N-1:0] rin, halt, err, avail;
  logic [N-1:0][7:0] cr0;
  logic [11:0] tot, done_cnt;
  vebpf_tracker #(.N_VEBPF(N)) dut (.clk, .rst, .Activate_granted_reprog_VeBPF_core_req(act), .VeBPF_core_grant_id(gid),
    .Activate_granted_reprog_VeBPF_core_req_done_ack(ack), .VeBPF_reset_in(rin), .VeBPF_Halt_out(halt),
    .VeBPF_Error_out(err), .VeBPF_R0(cr0), .VeBPF_core_available_flag(avail), .Total_eBPF_rules_in(12'd9),
    .Total_eBPF_rules(tot), .VeBPF_core_most_recent_result_r0(r0), .VeBPF_core_most_recent_result_flag(rflag),
    .Total_eBPF_rules_reprogrammed(done_cnt), .VeBPF_result_registered_flag(reg_f));
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  // core halt model: halts while out of reset after it was told to
  logic [N-1:0] halt_req;
  assign halt = halt_req & ~rin;
  task automatic activate(input int c);
    @(negedge clk); act = 1; gid = 8'(c);
    @(negedge clk); act = 0;
    chk(!rin[c] && !avail[c], $sformatf("core %0d released at the next edge", c));
    chk(ack, "done ack one cycle after the request");
  endtask
  logic [7:0] res[$];
  always @(posedge clk) if (!rst && rflag) res.push_back(r0);
  initial begin
    rst = 1; act = 0; gid = 0; halt_req = 0; err = 0; reg_f = 0;
    for (int i = 0; i < N; i++) cr0[i] = 8'(16 * i);
    repeat (2) @(posedge clk); @(negedge clk) rst = 0;
    chk(&rin && &avail && tot == 9, "all idle in reset");
    activate(2); activate(0); activate(3);
    chk(rin == 4'b0010, "three running");
    // cores 3 and 0 halt together, 2 later with an error
    halt_req[3] = 1; halt_req[0] = 1;
    @(negedge clk);
    chk(rflag && r0 == 8'h00 && !rin[3], "lowest halted core reported first");
    @(negedge clk);
    chk(rflag && r0 == 8'h30, "then the next");
    @(negedge clk);
    chk(!rflag && done_cnt == 2 && rin[0] && rin[3], "two completed, back in reset");
    halt_req = 0;
    err[2] = 1; halt_req[2] = 1;
    @(negedge clk);
    chk(rflag && r0 == RES_ERROR, "error reported as RES_ERROR");
    halt_req = 0; err = 0;
    @(negedge clk);
    chk(done_cnt == 3 && &rin, "all idle");
    activate(1); activate(2);
    @(negedge clk); reg_f = 1; @(negedge clk); reg_f = 0;
    chk(&rin && done_cnt == 0 && !ack, "flush on result registered");
    chk(res.size() == 3, "three results");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
