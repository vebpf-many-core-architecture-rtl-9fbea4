// vebpf_core_selector: VeBPF Many-core Core-Selector and Multi-rule
// Re-programmer of the scheduler.
//
// Runs the rule list on the current packet header. When the data loader has
// put a header into all cores (VeBPF_data_loading_done_flag) and all rules
// are uploaded, it walks rule index 0, 1, ... Total_eBPF_rules-1. For each
// rule: request an idle core from the arbiter (REQ); on the grant, in one
// cycle, drive en_ip_next_eBPF_rule and ip_next_eBPF_rule (the rule's start
// pointer from the metadata table) through the DEMUX to the granted core and
// ask the tracker to run it (PROG); wait for the tracker's acknowledge
// (ACK), count the rule as reprogrammed and move to the next rule. After the
// last rule it waits (ALLDISP). VeBPF_result_registered_flag from the result
// analyzer ends the packet in any state and returns to IDLE.
// Per rule: grant 1 cycle after the request, programming 1 cycle, ACK 1
// cycle, so a new rule is started every 4 cycles while cores are idle.
// The flow and signal names are the architecture's; the cycle timing and the
// req/ack details are this design's.
module vebpf_core_selector (
  input  logic        clk,
  input  logic        rst,
  input  logic        VeBPF_data_loading_done_flag,
  input  logic        All_eBPF_rules_uploaded_flag,
  input  logic        VeBPF_result_registered_flag,
  // rules metadata table
  output logic [11:0] meta_rd_idx,
  input  logic [11:0] meta_start,
  input  logic [11:0] Total_eBPF_rules,
  // arbiter
  output logic        VeBPF_core_req,
  input  logic        VeBPF_core_grant,
  input  logic [7:0]  VeBPF_core_grant_id_in,
  // DEMUX
  output logic        en_ip_next_eBPF_rule,
  output logic [11:0] ip_next_eBPF_rule,
  output logic [7:0]  VeBPF_core_grant_id,
  // tracker
  output logic        Activate_granted_reprog_VeBPF_core_req,
  input  logic        Activate_granted_reprog_VeBPF_core_req_done_ack,
  output logic [11:0] Total_eBPF_rules_reprogrammed
);

  typedef enum logic [2:0] {IDLE, REQ, PROG, ACK, ALLDISP} state_t;
  state_t state;

  logic [11:0] rule_idx;

  assign meta_rd_idx          = rule_idx;
  assign VeBPF_core_req       = (state == REQ) && !VeBPF_core_grant;
  assign en_ip_next_eBPF_rule = (state == PROG);
  assign ip_next_eBPF_rule    = meta_start;
  assign Activate_granted_reprog_VeBPF_core_req = (state == PROG);
  assign Total_eBPF_rules_reprogrammed = rule_idx;

  always_ff @(posedge clk) begin
    if (rst || VeBPF_result_registered_flag) begin
      state <= IDLE;
      rule_idx <= '0;
      if (rst) VeBPF_core_grant_id <= '0;
    end else begin
      case (state)
        IDLE: if (VeBPF_data_loading_done_flag && All_eBPF_rules_uploaded_flag &&
                  Total_eBPF_rules != '0) begin
          state    <= REQ;
          rule_idx <= '0;
        end
        REQ: if (VeBPF_core_grant) begin
          VeBPF_core_grant_id <= VeBPF_core_grant_id_in;
          state <= PROG;
        end
        PROG: state <= ACK;
        ACK: if (Activate_granted_reprog_VeBPF_core_req_done_ack) begin
          rule_idx <= rule_idx + 12'd1;
          state    <= (rule_idx + 12'd1 == Total_eBPF_rules) ? ALLDISP : REQ;
        end
        default: ; // ALLDISP: every rule started, wait for the result
      endcase
    end
  end

endmodule
