// vebpf_tracker: VeBPF Many-core Tracker and Rules-runner of the scheduler.
//
// Owns the reset line of every core (the "Splitter N Rst_i buses"): a core
// not running a rule is held in reset and reported available to the arbiter.
// When the core selector asks it to run a freshly reprogrammed core
// (Activate_granted_reprog_VeBPF_core_req with the grant id), the tracker
// releases that core's reset at the next clock edge and acknowledges one
// cycle later. It watches all Halt_o lines in parallel; each cycle the
// lowest-numbered halted core gives its result: the low 8 bits of R0, or
// the ERROR code when the core's Error_out is high. The result is put on
// VeBPF_core_most_recent_result_r0 with a one-cycle
// VeBPF_core_most_recent_result_flag, the count of finished rules is
// increased, and the core goes back into reset and becomes available again.
// VeBPF_result_registered_flag ends the packet: every core is put back into
// reset, unfinished rules are abandoned and the count restarts at 0.
// Total_eBPF_rules is passed through to the result analyzer.
// The architecture calls the forwarded count "rules reprogrammed"; here it
// counts rules that have finished, so "all rules done" is only seen once the
// last rule's result is in.
module vebpf_tracker
  import vebpf_pkg::*;
#(
  parameter int unsigned N_VEBPF = 12
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  Activate_granted_reprog_VeBPF_core_req,
  input  logic [7:0]            VeBPF_core_grant_id,
  output logic                  Activate_granted_reprog_VeBPF_core_req_done_ack,
  output logic [N_VEBPF-1:0]    VeBPF_reset_in,
  input  logic [N_VEBPF-1:0]    VeBPF_Halt_out,
  input  logic [N_VEBPF-1:0]    VeBPF_Error_out,
  input  logic [N_VEBPF-1:0][7:0] VeBPF_R0,
  output logic [N_VEBPF-1:0]    VeBPF_core_available_flag,
  input  logic [11:0]           Total_eBPF_rules_in,
  output logic [11:0]           Total_eBPF_rules,
  output logic [7:0]            VeBPF_core_most_recent_result_r0,
  output logic                  VeBPF_core_most_recent_result_flag,
  output logic [11:0]           Total_eBPF_rules_reprogrammed,
  input  logic                  VeBPF_result_registered_flag
);

  logic [N_VEBPF-1:0] running;
  localparam int unsigned IW = (N_VEBPF > 1) ? $clog2(N_VEBPF) : 1;  // grant id bits used as index
  logic [N_VEBPF-1:0] done;
  logic               found;
  int unsigned        sel;

  assign VeBPF_reset_in            = ~running;
  assign VeBPF_core_available_flag = ~running;
  assign Total_eBPF_rules          = Total_eBPF_rules_in;
  assign done                      = running & VeBPF_Halt_out;

  always_comb begin
    found = 1'b0;
    sel   = 0;
    for (int i = N_VEBPF - 1; i >= 0; i--) begin
      if (done[i]) begin
        found = 1'b1;
        sel   = i;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst || VeBPF_result_registered_flag) begin
      running <= '0;
      Total_eBPF_rules_reprogrammed <= '0;
      VeBPF_core_most_recent_result_flag <= 1'b0;
      Activate_granted_reprog_VeBPF_core_req_done_ack <= 1'b0;
      if (rst) VeBPF_core_most_recent_result_r0 <= '0;
    end else begin
      VeBPF_core_most_recent_result_flag <= 1'b0;
      Activate_granted_reprog_VeBPF_core_req_done_ack <= Activate_granted_reprog_VeBPF_core_req;
      if (found) begin
        running[sel] <= 1'b0;
        VeBPF_core_most_recent_result_flag <= 1'b1;
        VeBPF_core_most_recent_result_r0   <= VeBPF_Error_out[sel] ? RES_ERROR : VeBPF_R0[sel];
        Total_eBPF_rules_reprogrammed      <= Total_eBPF_rules_reprogrammed + 12'd1;
      end
      if (Activate_granted_reprog_VeBPF_core_req && 32'(VeBPF_core_grant_id) < N_VEBPF)
        running[VeBPF_core_grant_id[IW-1:0]] <= 1'b1;
    end
  end

  // a core is only started while it is idle
  assert property (@(posedge clk) disable iff (rst)
    Activate_granted_reprog_VeBPF_core_req && 32'(VeBPF_core_grant_id) < N_VEBPF
      |-> !running[VeBPF_core_grant_id[IW-1:0]]);

endmodule
