// vebpf_arbiter: VeBPF multi-core arbiter of the scheduler.
//
// Answers a request for an idle core. Each core's available flag says it is
// idle (held in reset, not running a rule). While VeBPF_core_req is high and
// at least one core is available, the arbiter picks one round-robin after the
// previously granted core and pulses VeBPF_core_grant for one cycle with its
// number on VeBPF_core_grant_id (registered, so one cycle after the request
// at the earliest). The requester must drop the request after a grant; a new
// request is served only after the grant pulse. Signal names and the 8-bit
// grant id are the architecture's; the round-robin policy is this design's.
module vebpf_arbiter #(
  parameter int unsigned N_VEBPF = 12
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [N_VEBPF-1:0] VeBPF_core_available_flag,
  input  logic               VeBPF_core_req,
  output logic               VeBPF_core_grant,
  output logic [7:0]         VeBPF_core_grant_id
);

  logic [7:0] last, pick;
  logic       any;

  always_comb begin
    pick = last;
    any  = 1'b0;
    for (int k = 1; k <= N_VEBPF; k++) begin
      int unsigned c;
      c = (32'(last) + k) % N_VEBPF;
      if (!any && VeBPF_core_available_flag[c]) begin
        any  = 1'b1;
        pick = 8'(c);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      VeBPF_core_grant <= 1'b0;
      VeBPF_core_grant_id <= '0;
      last <= 8'(N_VEBPF - 1);
    end else begin
      VeBPF_core_grant <= 1'b0;
      if (VeBPF_core_req && !VeBPF_core_grant && any) begin
        VeBPF_core_grant    <= 1'b1;
        VeBPF_core_grant_id <= pick;
        last                <= pick;
      end
    end
  end

  // a grant always names a core that was available
  assert property (@(posedge clk) disable iff (rst)
    VeBPF_core_req && !VeBPF_core_grant && any |=> VeBPF_core_grant && 32'(VeBPF_core_grant_id) < N_VEBPF);

endmodule
