// vebpf_pkt_loader: network packet loader of a VeBPF core.
//
// Core-side end of the many-core data shared bus. A request (VeBPF_data_en_in
// with a 64-bit word and an 11-bit byte address) is taken only while the core
// is held in reset, so a running rule never sees its header change. The word
// is written into the byte-wide data memory one byte per cycle, byte i
// (bits 8i+7:8i) to address addr+i, so eight cycles per word; then
// VeBPF_data_ack_out rises and stays high until the loader drops the enable
// (four-phase handshake, so the ACKs of all cores can be AND-reduced).
// The bus signals and the ACK are the architecture's; the byte order, the
// byte-serial write and the reset-only acceptance are this design's choices.
module vebpf_pkt_loader (
  input  logic        clk,
  input  logic        rst,
  input  logic        reset_in,
  input  logic [63:0] VeBPF_data_word_in,
  input  logic [10:0] VeBPF_data_addr_in,
  input  logic        VeBPF_data_en_in,
  output logic        VeBPF_data_ack_out,
  output logic        mem_we,
  output logic [10:0] mem_addr,
  output logic [7:0]  mem_wdata,
  output logic        busy
);

  logic [2:0]  idx;
  logic [63:0] word;
  logic [10:0] base;

  assign mem_we    = busy;
  assign mem_addr  = base + 11'(idx);
  assign mem_wdata = word[8*idx +: 8];

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      idx <= '0;
      VeBPF_data_ack_out <= 1'b0;
      word <= '0;
      base <= '0;
    end else if (busy) begin
      idx <= idx + 3'd1;
      if (idx == 3'd7) begin
        busy <= 1'b0;
        VeBPF_data_ack_out <= 1'b1;
      end
    end else if (VeBPF_data_ack_out) begin
      if (!VeBPF_data_en_in) VeBPF_data_ack_out <= 1'b0;
    end else if (VeBPF_data_en_in && reset_in) begin
      busy <= 1'b1;
      idx  <= '0;
      word <= VeBPF_data_word_in;
      base <= VeBPF_data_addr_in;
    end
  end

endmodule
