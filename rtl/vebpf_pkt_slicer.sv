// vebpf_pkt_slicer: network packet slicer of the slicer-and-DMA module.
//
// Takes received packets (RxPkt) from the Ethernet controller on a 64-bit
// AXI-stream slave, copies the header words into the RxPkt Headers FIFO and
// the header length into the RxPkt Headers Length FIFO, and passes the whole
// packet beat by beat to the DMA. Packet byte 0 is tdata[7:0]; tkeep must be
// contiguous from bit 0.
//
// Header length: custom_hdr_len when non-zero, otherwise by packet type:
// IPv4 (EtherType 0x0800) gives 14 + IHL*4 + 8 (UDP, ICMP) or 20 (TCP) or 0,
// any other EtherType gives 14. The result is capped at MAX_HDR_BYTES and at
// the packet length; exactly ceil(length/8) header words are written. The
// EtherType and IHL arrive in beat 1 and the IP protocol in beat 2, early
// enough to decide about every later beat.
//
// Hand-off: a packet is accepted (tready) only when the headers FIFO has room
// for a full header, the length FIFO is not full and the DMA has cleared the
// previous packet. RxPkt_available_flag is high from the first beat until the
// DMA pulses Clear_RxPkt_avail_flag, after which the next packet may start.
// The FIFOs, the two flags and the type-dependent header length are the
// architecture's; the length rule, widths and flow control are this design's.
module vebpf_pkt_slicer #(
  parameter int unsigned MAX_HDR_BYTES = 128,
  parameter int unsigned HDR_FIFO_DEPTH = 64
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [63:0] s_axis_tdata,
  input  logic [7:0]  s_axis_tkeep,
  input  logic        s_axis_tvalid,
  input  logic        s_axis_tlast,
  output logic        s_axis_tready,
  input  logic [10:0] custom_hdr_len,
  // RxPkt Headers FIFO
  output logic        hdr_wr,
  output logic [63:0] hdr_data,
  input  logic [$clog2(HDR_FIFO_DEPTH):0] hdr_count,
  // RxPkt Headers Length FIFO
  output logic        len_wr,
  output logic [10:0] len_data,
  input  logic        len_full,
  // RxPkt stream to the DMA
  output logic [63:0] pkt_tdata,
  output logic [7:0]  pkt_tkeep,
  output logic        pkt_tvalid,
  output logic        pkt_tlast,
  input  logic        pkt_tready,
  output logic        RxPkt_available_flag,
  input  logic        Clear_RxPkt_avail_flag
);

  localparam int unsigned MAX_HDR_WORDS = (MAX_HDR_BYTES + 7) / 8;

  typedef enum logic [1:0] {IDLE, PASS, WAITCLR} state_t;
  state_t state;

  logic [15:0] wcnt;          // beat index within the packet
  logic [15:0] plen;          // bytes so far
  logic [15:0] ethertype;
  logic [3:0]  ihl;
  logic [7:0]  proto;
  logic        beat;
  logic [3:0]  nkeep;
  logic [15:0] hlen;          // header length known so far
  logic [15:0] hlen_final;
  logic [15:0] plen_next;

  always_comb begin
    nkeep = '0;
    for (int i = 0; i < 8; i++) nkeep += 4'(s_axis_tkeep[i]);
  end

  // header length from what is known (fields of earlier beats)
  always_comb begin
    logic [15:0] l4;
    logic [7:0]  pr;
    pr = (wcnt == 16'd2) ? s_axis_tdata[63:56] : proto;
    case (pr)
      8'd17, 8'd1: l4 = 16'd8;
      8'd6:        l4 = 16'd20;
      default:     l4 = 16'd0;
    endcase
    if (custom_hdr_len != '0)        hlen = 16'(custom_hdr_len);
    else if (wcnt < 16'd2)           hlen = 16'(MAX_HDR_BYTES);   // not yet known; at least 14
    else if (ethertype == 16'h0800)  hlen = 16'd14 + {10'd0, ihl, 2'b00} + l4;
    else                             hlen = 16'd14;
    if (hlen > 16'(MAX_HDR_BYTES)) hlen = 16'(MAX_HDR_BYTES);
  end

  assign plen_next  = plen + 16'(nkeep);
  assign hlen_final = (plen_next < hlen) ? plen_next : hlen;

  assign s_axis_tready        = (state == PASS) && pkt_tready;
  assign beat                 = s_axis_tvalid && s_axis_tready;
  assign pkt_tdata            = s_axis_tdata;
  assign pkt_tkeep            = s_axis_tkeep;
  assign pkt_tlast            = s_axis_tlast;
  assign pkt_tvalid           = (state == PASS) && s_axis_tvalid;
  assign RxPkt_available_flag = (state == WAITCLR) || (state == PASS && (wcnt != '0 || s_axis_tvalid));

  // header words: beats 0 and 1 always (every header is at least 14 bytes,
  // or the custom length decides); later beats while inside the header
  assign hdr_wr   = beat && ({wcnt, 3'b000} < 19'(hlen));
  assign hdr_data = s_axis_tdata;
  assign len_wr   = beat && s_axis_tlast;
  assign len_data = 11'(hlen_final);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE;
      wcnt <= '0;
      plen <= '0;
      ethertype <= '0;
      ihl <= '0;
      proto <= '0;
    end else begin
      case (state)
        IDLE: if (!len_full && 32'(hdr_count) + MAX_HDR_WORDS <= HDR_FIFO_DEPTH) begin
          state <= PASS;
          wcnt  <= '0;
          plen  <= '0;
        end
        PASS: if (beat) begin
          wcnt <= wcnt + 16'd1;
          plen <= plen_next;
          if (wcnt == 16'd1) begin
            ethertype <= {s_axis_tdata[39:32], s_axis_tdata[47:40]};
            ihl       <= s_axis_tdata[51:48];
          end
          if (wcnt == 16'd2) proto <= s_axis_tdata[63:56];
          if (s_axis_tlast) state <= WAITCLR;
        end
        default: if (Clear_RxPkt_avail_flag) state <= IDLE;
      endcase
    end
  end

endmodule
