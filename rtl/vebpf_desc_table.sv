// vebpf_desc_table: RxPkt Descriptor Table FIFO with VeBPF Processing Results.
//
// A circular table with one entry per received packet and the columns
// Rxpkt Idx, Rxpkt Start Ptr, Rxpkt Length, VeBPF result and VeBPF result
// valid. The DMA pushes the first three at the write pointer; the result
// writer fills the last two at its own pointer, one packet after the other
// in arrival order, which may happen before or after the DMA's push for the
// same packet. The management CPU reads the head entry and clears it (pop),
// which frees the slot and its result. count is the number of pushed,
// uncleared entries; full blocks the DMA. Writes land at the clock edge; the
// head outputs are combinational. The columns and the read-and-clear use are
// the architecture's; the depth and the separate result pointer are this
// design's choices.
module vebpf_desc_table #(
  parameter int unsigned DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        push,
  input  logic [15:0] push_idx,
  input  logic [31:0] push_start,
  input  logic [15:0] push_len,
  output logic        full,
  input  logic        res_wr,
  input  logic [7:0]  res_val,
  input  logic        pop,
  output logic [15:0] head_idx,
  output logic [31:0] head_start,
  output logic [15:0] head_len,
  output logic [7:0]  head_result,
  output logic        head_result_valid,
  output logic [$clog2(DEPTH):0] count
);

  localparam int unsigned AW = $clog2(DEPTH);

  typedef struct packed {
    logic [15:0] idx;
    logic [31:0] start;
    logic [15:0] len;
  } meta_t;

  meta_t         meta [DEPTH];
  logic [7:0]    result [DEPTH];
  logic [DEPTH-1:0] rvalid;
  logic [AW-1:0] wp, rp, resp;
  logic          do_push, do_pop;

  assign full    = (count == (AW+1)'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && (count != '0);

  assign head_idx          = meta[rp].idx;
  assign head_start        = meta[rp].start;
  assign head_len          = meta[rp].len;
  assign head_result       = result[rp];
  assign head_result_valid = rvalid[rp];

  always_ff @(posedge clk) begin
    if (do_push) meta[wp] <= '{idx: push_idx, start: push_start, len: push_len};
    if (res_wr)  result[resp] <= res_val;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
      resp <= '0;
      count <= '0;
      rvalid <= '0;
    end else begin
      if (do_push) wp <= wp + 1'b1;
      if (do_pop) begin
        rp <= rp + 1'b1;
        rvalid[rp] <= 1'b0;
      end
      if (res_wr) begin
        resp <= resp + 1'b1;
        rvalid[resp] <= 1'b1;
      end
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

endmodule
