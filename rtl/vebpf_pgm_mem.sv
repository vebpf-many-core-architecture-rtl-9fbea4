// vebpf_pgm_mem: 64-bit wide program memory of a VeBPF core.
//
// One synchronous read port for instruction fetch (rd_data is valid the cycle
// after rd_addr) and one write port driven by the many-core program shared
// bus. The write side uses a four-phase handshake: when VeBPF_pgm_en_in is
// seen the word is written and VeBPF_pgm_ack_out rises in the next cycle; the
// ACK stays high until the uploader drops the enable, so the ACKs of all cores
// can be AND-reduced. The 64-bit width and 12-bit address are the
// architecture's; the depth defaults to the full 12-bit range and is a
// parameter, as the architecture leaves it adjustable.
module vebpf_pgm_mem #(
  parameter int unsigned DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [63:0] VeBPF_pgm_data_in,
  input  logic [11:0] VeBPF_pgm_addr_in,
  input  logic        VeBPF_pgm_en_in,
  output logic        VeBPF_pgm_ack_out,
  input  logic [11:0] rd_addr,
  output logic [63:0] rd_data
);

  logic [63:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (VeBPF_pgm_en_in && !VeBPF_pgm_ack_out && 32'(VeBPF_pgm_addr_in) < DEPTH)
      mem[VeBPF_pgm_addr_in] <= VeBPF_pgm_data_in;
    rd_data <= mem[rd_addr[$clog2(DEPTH)-1:0]];
  end

  always_ff @(posedge clk) begin
    if (rst) VeBPF_pgm_ack_out <= 1'b0;
    else     VeBPF_pgm_ack_out <= VeBPF_pgm_en_in;
  end

endmodule
