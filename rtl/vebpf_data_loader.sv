// vebpf_data_loader: VeBPF many-core data loader.
//
// Copies the next packet header from the RxPkt Headers FIFO into the data
// memory of every core over the shared data bus. It starts when a header and
// its length are available (RxPktHdr_available_flag) and all rules have been
// uploaded, for the first header at once and for later ones after the result
// analyzer pulses VeBPF_load_next_rxpkthdr_flag. It pops the length, drives
// it on VeBPF_R1_RxPkt_len (R1 of every core), then for each of the
// ceil(len/8) header words: drives word, byte address 8*k and
// VeBPF_data_en, waits until the AND of all cores' ACKs is high, pops the
// word, drops the enable and waits until every ACK has fallen (four-phase
// handshake). Then VeBPF_data_loading_done_flag goes high and stays high
// until the load-next flag. The bus signals, the AND-reduced ACKs and the
// flags are the architecture's; the four-phase handshake and the FIFO
// popping order are this design's.
module vebpf_data_loader #(
  parameter int unsigned N_VEBPF = 12
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               RxPktHdr_available_flag,
  input  logic               All_eBPF_rules_uploaded_flag,
  input  logic               VeBPF_load_next_rxpkthdr_flag,
  output logic               len_rd,
  input  logic [10:0]        len_data,
  output logic               hdr_rd,
  input  logic [63:0]        hdr_data,
  output logic [63:0]        VeBPF_data_word,
  output logic [10:0]        VeBPF_data_addr,
  output logic               VeBPF_data_en,
  output logic [10:0]        VeBPF_R1_RxPkt_len,
  input  logic [N_VEBPF-1:0] VeBPF_data_ack_out,
  output logic               VeBPF_data_loading_done_flag
);

  typedef enum logic [2:0] {IDLE, WRITE, WAITLOW, DONE} state_t;
  state_t state;

  logic [7:0] widx, nwords;
  logic       all_ack, any_ack;

  assign all_ack = &VeBPF_data_ack_out;
  assign any_ack = |VeBPF_data_ack_out;

  assign len_rd          = (state == IDLE) && RxPktHdr_available_flag && All_eBPF_rules_uploaded_flag;
  assign VeBPF_data_en   = (state == WRITE);
  assign VeBPF_data_word = hdr_data;
  assign VeBPF_data_addr = {widx, 3'b000};
  assign hdr_rd          = (state == WRITE) && all_ack;
  assign VeBPF_data_loading_done_flag = (state == DONE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE;
      widx <= '0;
      nwords <= '0;
      VeBPF_R1_RxPkt_len <= '0;
    end else begin
      case (state)
        IDLE: if (len_rd) begin
          VeBPF_R1_RxPkt_len <= len_data;
          nwords <= 8'((len_data + 11'd7) >> 3);
          widx   <= '0;
          state  <= (len_data == '0) ? DONE : WRITE;
        end
        WRITE: if (all_ack) state <= WAITLOW;
        WAITLOW: if (!any_ack) begin
          widx  <= widx + 8'd1;
          state <= (widx + 8'd1 == nwords) ? DONE : WRITE;
        end
        default: if (VeBPF_load_next_rxpkthdr_flag) state <= IDLE;
      endcase
    end
  end

endmodule
