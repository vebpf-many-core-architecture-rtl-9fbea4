// vebpf_rules_parser: Dynamic eBPF Rules Metadata Parser.
//
// Sorts the instruction stream from the VeBPF UART RX into rules. Every
// instruction (VeBPF_pgm_en) is pushed into the eBPF Rules FIFO; the first
// instruction of a rule records its start pointer (VeBPF_pgm_addr, the
// running instruction number, which is also where the uploader will place it
// in program memory). VeBPF_next_rule_flag closes the current rule and
// appends (start, length) to the rules metadata table; VeBPF_all_rules_done
// _flag closes the last rule if it has instructions and raises
// VeBPF_rules_available_flag. VeBPF_rst_new_rules_flag (from the UART) clears
// everything, is passed on to the uploader and to the FIFO and table clears.
// Error_flag goes high and stays high until the next new-rule-set command on
// a UART error, an empty rule, a full FIFO or a table overflow.
// The blocks and signal names are the architecture's; the rule delimiting
// and error conditions are this design's.
module vebpf_rules_parser (
  input  logic        clk,
  input  logic        rst,
  input  logic [63:0] VeBPF_pgm_data,
  input  logic [11:0] VeBPF_pgm_addr,
  input  logic        VeBPF_pgm_en,
  input  logic        VeBPF_next_rule_flag,
  input  logic        VeBPF_all_rules_done_flag,
  input  logic        VeBPF_rst_new_rules_flag_in,
  input  logic        uart_error,
  // eBPF Rules FIFO
  output logic        rules_fifo_wr,
  output logic [63:0] rules_fifo_data,
  input  logic        rules_fifo_full,
  // rules metadata table
  output logic        meta_wr,
  output logic [11:0] meta_start,
  output logic [11:0] meta_len,
  input  logic        meta_overflow,
  // to the instruction uploader
  output logic        VeBPF_rst_new_rules_flag,
  output logic        VeBPF_rules_available_flag,
  output logic        Error_flag
);

  logic [11:0] cur_start, cur_len;

  assign rules_fifo_wr   = VeBPF_pgm_en && !rules_fifo_full;
  assign rules_fifo_data = VeBPF_pgm_data;
  assign meta_wr         = (VeBPF_next_rule_flag || VeBPF_all_rules_done_flag) && cur_len != '0;
  assign meta_start      = cur_start;
  assign meta_len        = cur_len;
  assign VeBPF_rst_new_rules_flag = VeBPF_rst_new_rules_flag_in;

  always_ff @(posedge clk) begin
    if (rst || VeBPF_rst_new_rules_flag_in) begin
      cur_start <= '0;
      cur_len <= '0;
      VeBPF_rules_available_flag <= 1'b0;
      Error_flag <= 1'b0;
    end else begin
      if (VeBPF_pgm_en) begin
        if (rules_fifo_full) Error_flag <= 1'b1;
        if (cur_len == '0) cur_start <= VeBPF_pgm_addr;
        cur_len <= cur_len + 12'd1;
      end
      if (VeBPF_next_rule_flag) begin
        if (cur_len == '0) Error_flag <= 1'b1;
        cur_len <= '0;
      end
      if (VeBPF_all_rules_done_flag) begin
        cur_len <= '0;
        VeBPF_rules_available_flag <= 1'b1;
      end
      if (uart_error || meta_overflow) Error_flag <= 1'b1;
    end
  end

endmodule
