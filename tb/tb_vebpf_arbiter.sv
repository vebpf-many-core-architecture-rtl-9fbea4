// tb_vebpf_arbiter: self-checking test of the multi-core arbiter.
//
// With all 12 cores available, repeated requests must be granted round-robin
// 0,1,...,11,0 with the grant one cycle after the request. With a random
// subset available, each grant must name an available core, the next one
// after the previous grant in circular order. With no core available the
// request waits and the grant comes one cycle after a core frees up.
module tb_vebpf_arbiter;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst, req, grant;
  logic [11:0] avail;
  logic [7:0] gid;
  vebpf_arbiter dut (.clk, .rst, .VeBPF_core_available_flag(avail), .VeBPF_core_req(req),
    .VeBPF_core_grant(grant), .VeBPF_core_grant_id(gid));
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int lat;
  task automatic request(output int l);
    req = 1; l = 0;
    do begin @(negedge clk); l++; end while (!grant && l < 100);
    req = 0;
  endtask
  int last;
  initial begin
    rst = 1; req = 0; avail = '1;
    repeat (2) @(posedge clk); @(negedge clk) rst = 0;
    for (int i = 0; i < 24; i++) begin
      request(lat);
      chk(lat == 1, $sformatf("grant latency %0d", lat));
      chk(gid == 8'(i % 12), $sformatf("round robin id %0d want %0d", gid, i % 12));
      @(negedge clk);
      chk(!grant, "grant is a single-cycle pulse");
    end
    last = 11;
    for (int i = 0; i < 200; i++) begin
      int exp;
      avail = 12'($urandom) | 12'(1 << $urandom_range(0, 11));
      exp = -1;
      for (int k = 1; k <= 12 && exp < 0; k++) if (avail[(last + k) % 12]) exp = (last + k) % 12;
      request(lat);
      chk(int'(gid) == exp, $sformatf("subset grant %0d want %0d", gid, exp));
      last = gid;
      @(negedge clk);
    end
    avail = 0; req = 1;
    repeat (5) @(negedge clk);
    chk(!grant, "no grant while no core available");
    avail = 12'h010;
    @(negedge clk);
    chk(grant && gid == 4, "grant as soon as a core is free");
    req = 0;
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
