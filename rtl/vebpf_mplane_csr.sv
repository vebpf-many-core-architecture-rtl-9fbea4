// vebpf_mplane_csr: the VeBPF management plane (m-plane) register block.
//
// The management RISC-V reaches the many-core engine through memory-mapped
// registers on a simple 32-bit bus (write: mmio_we with address and data,
// taking effect at the clock edge; read: combinational mmio_rdata for
// mmio_addr). Register map (byte addresses, this design's own):
//   0x00 RW  start address of the packet region
//   0x04 RW  total bytes of the packet region; a write arms the DMA (csr_load,
//          pulsed the cycle after, so the DMA sees the new value)
//   0x08 RW  custom header length in bytes (0 = by packet type)
//   0x0C R   status: [15:0] descriptor entries, [16] all rules uploaded,
//            [17] rule upload error
//   0x10 R   head descriptor: packet index
//   0x14 R   head descriptor: start address
//   0x18 R   head descriptor: length
//   0x1C R   head descriptor: [7:0] VeBPF result, [8] result valid
//   0x20 W   clear the head descriptor (pops it, frees its memory)
//   0x24 R   available packet memory in bytes
// What the CPU sets and reads (region CSRs, descriptor table read and
// clear) is the architecture's; the addresses and bus are this design's.
module vebpf_mplane_csr (
  input  logic        clk,
  input  logic        rst,
  input  logic [7:0]  mmio_addr,
  input  logic [31:0] mmio_wdata,
  input  logic        mmio_we,
  output logic [31:0] mmio_rdata,
  output logic [31:0] csr_start_addr,
  output logic [31:0] csr_total_mem,
  output logic        csr_load,
  output logic [10:0] csr_custom_hdr_len,
  input  logic [15:0] desc_count,
  input  logic [15:0] desc_head_idx,
  input  logic [31:0] desc_head_start,
  input  logic [15:0] desc_head_len,
  input  logic [7:0]  desc_head_result,
  input  logic        desc_head_result_valid,
  output logic        desc_pop,
  input  logic        rules_uploaded,
  input  logic        rules_error,
  input  logic [31:0] avail_mem
);

  assign desc_pop = mmio_we && mmio_addr == 8'h20;

  always_ff @(posedge clk) begin
    if (rst) begin
      csr_start_addr <= '0;
      csr_total_mem <= '0;
      csr_custom_hdr_len <= '0;
      csr_load <= 1'b0;
    end else begin
      // the DMA re-arms the cycle after the total is written, with the new value
      csr_load <= mmio_we && mmio_addr == 8'h04;
      if (mmio_we) begin
        case (mmio_addr)
          8'h00: csr_start_addr <= mmio_wdata;
          8'h04: csr_total_mem <= mmio_wdata;
          8'h08: csr_custom_hdr_len <= mmio_wdata[10:0];
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    case (mmio_addr)
      8'h00:   mmio_rdata = csr_start_addr;
      8'h04:   mmio_rdata = csr_total_mem;
      8'h08:   mmio_rdata = {21'd0, csr_custom_hdr_len};
      8'h0C:   mmio_rdata = {14'd0, rules_error, rules_uploaded, desc_count};
      8'h10:   mmio_rdata = {16'd0, desc_head_idx};
      8'h14:   mmio_rdata = desc_head_start;
      8'h18:   mmio_rdata = {16'd0, desc_head_len};
      8'h1C:   mmio_rdata = {23'd0, desc_head_result_valid, desc_head_result};
      8'h24:   mmio_rdata = avail_mem;
      default: mmio_rdata = '0;
    endcase
  end

endmodule
