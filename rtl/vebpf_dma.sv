// vebpf_dma: "DMA RxPkt to DDR" block of the slicer-and-DMA module.
//
// Writes every received packet into a ring-shaped packet region of memory
// and records it in the RxPkt descriptor table. The region is given by two
// CSRs set by the management CPU (start address, total bytes); csr_load
// (re) arms the DMA: the current address goes to the start and all the memory
// becomes available. For each packet offered by the slicer
// (RxPkt_available_flag) the DMA waits for at least MAX_PKT_BYTES of free
// memory and a non-full descriptor table, requests the memory bus, and once
// granted writes the beats (64-bit, byte strobes from tkeep) at consecutive
// addresses, wrapping at the end of the region. After the last beat it
// writes the descriptor (index, start address, length in bytes), subtracts
// the length rounded up to 8 bytes from the available memory, drops the bus
// request and pulses Clear_RxPkt_avail_flag. When the CPU clears a
// descriptor (free_en with that entry's length) the memory is given back.
// The CSRs, the bus request/grant, the descriptor write and the tracking of
// current address and available memory are the architecture's; the simple
// valid/ready write port, the ring wrap and the admission rule are this
// design's. Region start and size must be multiples of 8.
module vebpf_dma #(
  parameter int unsigned MAX_PKT_BYTES = 1536
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] csr_start_addr,
  input  logic [31:0] csr_total_mem,
  input  logic        csr_load,
  // packet stream from the slicer
  input  logic [63:0] pkt_tdata,
  input  logic [7:0]  pkt_tkeep,
  input  logic        pkt_tvalid,
  input  logic        pkt_tlast,
  output logic        pkt_tready,
  input  logic        RxPkt_available_flag,
  output logic        Clear_RxPkt_avail_flag,
  // memory bus
  output logic        bus_req,
  input  logic        bus_grant,
  output logic        m_wr_valid,
  output logic [31:0] m_wr_addr,
  output logic [63:0] m_wr_data,
  output logic [7:0]  m_wr_strb,
  input  logic        m_wr_ready,
  // descriptor table
  output logic        desc_wr,
  output logic [15:0] desc_idx,
  output logic [31:0] desc_start,
  output logic [15:0] desc_len,
  input  logic        Fifo_full_flag,
  input  logic        free_en,
  input  logic [15:0] free_len,
  // status
  output logic [31:0] avail_mem,
  output logic [31:0] cur_addr
);

  typedef enum logic [1:0] {IDLE, REQ, XFER, DESC} state_t;
  state_t state;

  logic        armed;
  logic [31:0] start_r, total_r, off, pkt_start;
  logic [15:0] len, pkt_cnt;
  logic [3:0]  nkeep;
  logic        wbeat;

  always_comb begin
    nkeep = '0;
    for (int i = 0; i < 8; i++) nkeep += 4'(pkt_tkeep[i]);
  end

  assign cur_addr   = start_r + off;
  assign bus_req    = (state == REQ) || (state == XFER);
  assign m_wr_valid = (state == XFER) && bus_grant && pkt_tvalid;
  assign m_wr_addr  = cur_addr;
  assign m_wr_data  = pkt_tdata;
  assign m_wr_strb  = pkt_tkeep;
  assign pkt_tready = (state == XFER) && bus_grant && m_wr_ready;
  assign wbeat      = m_wr_valid && m_wr_ready;

  assign desc_wr    = (state == DESC);
  assign desc_idx   = pkt_cnt;
  assign desc_start = start_r + pkt_start;
  assign desc_len   = len;
  assign Clear_RxPkt_avail_flag = (state == DESC);

  function automatic logic [31:0] round8(input logic [15:0] l);
    return {16'd0, l + 16'd7} & 32'hFFFF_FFF8;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE;
      armed <= 1'b0;
      start_r <= '0;
      total_r <= '0;
      off <= '0;
      avail_mem <= '0;
      len <= '0;
      pkt_cnt <= '0;
      pkt_start <= '0;
    end else if (csr_load) begin
      armed     <= 1'b1;
      start_r   <= csr_start_addr;
      total_r   <= csr_total_mem;
      off       <= '0;
      avail_mem <= csr_total_mem;
      state     <= IDLE;
    end else begin
      // memory given back by the CPU, possibly in the same cycle as a take
      avail_mem <= avail_mem + (free_en ? round8(free_len) : 32'd0)
                             - ((state == DESC) ? round8(len) : 32'd0);
      case (state)
        IDLE: if (armed && RxPkt_available_flag && !Fifo_full_flag &&
                  avail_mem >= 32'(MAX_PKT_BYTES)) begin
          state     <= REQ;
          len       <= '0;
          pkt_start <= off;
        end
        REQ: if (bus_grant) state <= XFER;
        XFER: if (wbeat) begin
          len <= len + 16'(nkeep);
          off <= (off + 32'd8 >= total_r) ? 32'd0 : off + 32'd8;
          if (pkt_tlast) state <= DESC;
        end
        default: begin // DESC
          pkt_cnt <= pkt_cnt + 16'd1;
          state   <= IDLE;
        end
      endcase
    end
  end

endmodule
