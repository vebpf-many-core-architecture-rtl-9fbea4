// vebpf_uart_rx: VeBPF UART RX, the path by which the host uploads eBPF rules.
//
// A UART byte receiver followed by a command decoder that produces the
// signals the rules parser expects. Byte commands (this design's own
// protocol; the architecture names only the signals):
//   0x01 b0..b7  one instruction, 64-bit little-endian: pulses VeBPF_pgm_en
//                with VeBPF_pgm_data and VeBPF_pgm_addr = running count
//   0x02         end of the current rule: pulses VeBPF_next_rule_flag
//   0x03         last rule sent: pulses VeBPF_all_rules_done_flag and sets
//                VeBPF_pgm_done
//   0x04         new rule set: pulses VeBPF_rst_new_rules_flag, restarts the
//                instruction count and clears VeBPF_pgm_done
//   other, or a UART framing error: pulses Error_flag
// Every output pulse lasts one cycle, the cycle after the last byte's stop
// bit was sampled.
module vebpf_uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        rx,
  output logic [63:0] VeBPF_pgm_data,
  output logic [11:0] VeBPF_pgm_addr,
  output logic        VeBPF_pgm_en,
  output logic        VeBPF_pgm_done,
  output logic        VeBPF_next_rule_flag,
  output logic        VeBPF_all_rules_done_flag,
  output logic        VeBPF_rst_new_rules_flag,
  output logic        Error_flag
);

  logic       bv, ferr;
  logic [7:0] b;

  vebpf_uart_byte_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst, .rx, .byte_valid(bv), .byte_data(b), .frame_err(ferr)
  );

  logic        in_instr;
  logic [3:0]  nb;
  logic [11:0] count;

  always_ff @(posedge clk) begin
    if (rst) begin
      in_instr <= 1'b0;
      nb <= '0;
      count <= '0;
      VeBPF_pgm_data <= '0;
      VeBPF_pgm_addr <= '0;
      VeBPF_pgm_en <= 1'b0;
      VeBPF_pgm_done <= 1'b0;
      VeBPF_next_rule_flag <= 1'b0;
      VeBPF_all_rules_done_flag <= 1'b0;
      VeBPF_rst_new_rules_flag <= 1'b0;
      Error_flag <= 1'b0;
    end else begin
      VeBPF_pgm_en <= 1'b0;
      VeBPF_next_rule_flag <= 1'b0;
      VeBPF_all_rules_done_flag <= 1'b0;
      VeBPF_rst_new_rules_flag <= 1'b0;
      Error_flag <= ferr;
      if (bv) begin
        if (in_instr) begin
          VeBPF_pgm_data <= {b, VeBPF_pgm_data[63:8]};
          nb <= nb + 4'd1;
          if (nb == 4'd7) begin
            in_instr <= 1'b0;
            VeBPF_pgm_en <= 1'b1;
            VeBPF_pgm_addr <= count;
            count <= count + 12'd1;
          end
        end else begin
          case (b)
            8'h01: begin in_instr <= 1'b1; nb <= '0; end
            8'h02: VeBPF_next_rule_flag <= 1'b1;
            8'h03: begin VeBPF_all_rules_done_flag <= 1'b1; VeBPF_pgm_done <= 1'b1; end
            8'h04: begin VeBPF_rst_new_rules_flag <= 1'b1; VeBPF_pgm_done <= 1'b0; count <= '0; end
            default: Error_flag <= 1'b1;
          endcase
        end
      end
    end
  end

endmodule
