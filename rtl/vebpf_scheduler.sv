// vebpf_scheduler: VeBPF Many-core Multi-rule Scheduler.
//
// Puts together the arbiter, the core selector and re-programmer, the
// tracker and rules-runner, and the DEMUX between them and the cores. The
// DEMUX routes the selector's en_ip_next pulse to the core named by the
// grant id (its select line); the 12-bit ip_next value goes to all cores.
// Starting rule k on an idle core takes four cycles from the request (grant,
// program, release from reset and acknowledge), so with several idle cores
// rules are started one after another while earlier ones still run. Results
// leave through the tracker towards the result analyzer.
// Structure and signal names follow the architecture's scheduler diagram.
module vebpf_scheduler #(
  parameter int unsigned N_VEBPF = 12
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     VeBPF_data_loading_done_flag,
  input  logic                     All_eBPF_rules_uploaded_flag,
  input  logic                     VeBPF_result_registered_flag,
  output logic [11:0]              meta_rd_idx,
  input  logic [11:0]              meta_start,
  input  logic [11:0]              meta_total,
  output logic [N_VEBPF-1:0]       core_en_ip_next,
  output logic [11:0]              core_ip_next,
  output logic [N_VEBPF-1:0]       core_reset,
  input  logic [N_VEBPF-1:0]       core_halt,
  input  logic [N_VEBPF-1:0]       core_error,
  input  logic [N_VEBPF-1:0][7:0]  core_r0,
  output logic [7:0]               VeBPF_core_most_recent_result_r0,
  output logic                     VeBPF_core_most_recent_result_flag,
  output logic [11:0]              Total_eBPF_rules,
  output logic [11:0]              Total_eBPF_rules_reprogrammed,
  output logic [11:0]              Total_eBPF_rules_started
);

  logic [N_VEBPF-1:0] avail;
  logic       req, grant, en_ip, act_req, act_ack;
  logic [7:0] grant_id_arb, grant_id_sel;

  vebpf_arbiter #(.N_VEBPF(N_VEBPF)) u_arb (
    .clk, .rst,
    .VeBPF_core_available_flag(avail), .VeBPF_core_req(req),
    .VeBPF_core_grant(grant), .VeBPF_core_grant_id(grant_id_arb)
  );

  vebpf_core_selector u_sel (
    .clk, .rst,
    .VeBPF_data_loading_done_flag, .All_eBPF_rules_uploaded_flag, .VeBPF_result_registered_flag,
    .meta_rd_idx, .meta_start, .Total_eBPF_rules(meta_total),
    .VeBPF_core_req(req), .VeBPF_core_grant(grant), .VeBPF_core_grant_id_in(grant_id_arb),
    .en_ip_next_eBPF_rule(en_ip), .ip_next_eBPF_rule(core_ip_next), .VeBPF_core_grant_id(grant_id_sel),
    .Activate_granted_reprog_VeBPF_core_req(act_req),
    .Activate_granted_reprog_VeBPF_core_req_done_ack(act_ack),
    .Total_eBPF_rules_reprogrammed(Total_eBPF_rules_started)
  );

  vebpf_tracker #(.N_VEBPF(N_VEBPF)) u_trk (
    .clk, .rst,
    .Activate_granted_reprog_VeBPF_core_req(act_req), .VeBPF_core_grant_id(grant_id_sel),
    .Activate_granted_reprog_VeBPF_core_req_done_ack(act_ack),
    .VeBPF_reset_in(core_reset), .VeBPF_Halt_out(core_halt), .VeBPF_Error_out(core_error),
    .VeBPF_R0(core_r0), .VeBPF_core_available_flag(avail),
    .Total_eBPF_rules_in(meta_total), .Total_eBPF_rules,
    .VeBPF_core_most_recent_result_r0, .VeBPF_core_most_recent_result_flag,
    .Total_eBPF_rules_reprogrammed, .VeBPF_result_registered_flag
  );

  // DEMUX: the grant id selects the core that sees en_ip_next
  always_comb begin
    core_en_ip_next = '0;
    for (int i = 0; i < N_VEBPF; i++)
      core_en_ip_next[i] = en_ip && (32'(grant_id_sel) == i);
  end

endmodule
