// vebpf_sync_fifo: synchronous first-word-fall-through FIFO.
//
// Used for the RxPkt Headers FIFO, the RxPkt Headers Length FIFO and the
// eBPF Rules FIFO. rd_data always shows the oldest entry while empty is low;
// rd_en pops it at the clock edge. wr_en pushes wr_data when not full. A push
// and a pop in the same cycle are both taken. count is the fill level.
// The FIFOs and their full/empty flags are the architecture's; the depths
// and the first-word-fall-through behaviour are this design's choices.
module vebpf_sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  output logic                     full,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);

  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_wr, do_rd;

  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
      count <= '0;
    end else begin
      if (do_wr) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

endmodule
