// vebpf_result_analyzer: VeBPF Many-core Multi-rule Result Analyzer, with
// its "Write VeBPF Result" stage.
//
// Decides, result by result, when a packet is finished. A result of
// "store result", "error" or "drop packet" (any code other than DONT_CARE)
// ends the packet at once, leaving the other rules unfinished; a
// "don't care" result ends it only when it is the last outstanding rule
// (Total_eBPF_rules_reprogrammed equal to Total_eBPF_rules). Write VeBPF
// Result then, one cycle after the deciding result, pulses
// VeBPF_write_result_enable with the result for the descriptor table and
// pulses VeBPF_result_registered_flag (to the scheduler) and
// VeBPF_load_next_rxpkthdr_flag (to the data loader). Exactly one result is
// written per header: later results are ignored until pkt_active (the data
// loader's loading-done flag) has fallen. The decision rule is the
// architecture's; the result codes and the one-result guard are this
// design's.
module vebpf_result_analyzer
  import vebpf_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic [7:0]  VeBPF_core_most_recent_result_r0,
  input  logic        VeBPF_core_most_recent_result_flag,
  input  logic [11:0] Total_eBPF_rules,
  input  logic [11:0] Total_eBPF_rules_reprogrammed,
  input  logic        pkt_active,
  output logic        VeBPF_write_result_enable,
  output logic [7:0]  VeBPF_result_r0,
  output logic        VeBPF_result_registered_flag,
  output logic        VeBPF_load_next_rxpkthdr_flag
);

  logic decided, finish;

  assign finish = VeBPF_core_most_recent_result_flag && pkt_active && !decided &&
                  (VeBPF_core_most_recent_result_r0 != RES_DONT_CARE ||
                   Total_eBPF_rules_reprogrammed == Total_eBPF_rules);

  assign VeBPF_result_registered_flag  = VeBPF_write_result_enable;
  assign VeBPF_load_next_rxpkthdr_flag = VeBPF_write_result_enable;

  always_ff @(posedge clk) begin
    if (rst) begin
      decided <= 1'b0;
      VeBPF_write_result_enable <= 1'b0;
      VeBPF_result_r0 <= '0;
    end else begin
      VeBPF_write_result_enable <= finish;
      if (finish) begin
        decided <= 1'b1;
        VeBPF_result_r0 <= VeBPF_core_most_recent_result_r0;
      end else if (!pkt_active) begin
        decided <= 1'b0;
      end
    end
  end

endmodule
