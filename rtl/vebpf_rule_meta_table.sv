// vebpf_rule_meta_table: eBPF Rules Metadata Table.
//
// One entry per uploaded rule with the columns eBPF Rule Idx, eBPF Rules
// FIFO Start Ptr and eBPF Rule Length, plus the Total eBPF Rules count. The
// rules parser appends entries (wr); clear empties the table for a new rule
// set. The scheduler reads entries by rule index (rd_idx, combinational
// outputs) because every packet runs the rule list again; rd_valid is low
// once rd_idx reaches the total (the table's empty flag for that reader).
// Appends beyond MAX_RULES are dropped and raise overflow. MAX_RULES
// defaults to 4095, the most a 12-bit Total eBPF Rules count can hold.
// Columns and total are the architecture's; indexed reading is this design's.
module vebpf_rule_meta_table #(
  parameter int unsigned MAX_RULES = 4095
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        clear,
  input  logic        wr,
  input  logic [11:0] wr_start,
  input  logic [11:0] wr_len,
  output logic        overflow,
  input  logic [11:0] rd_idx,
  output logic [11:0] rd_rule_idx,
  output logic [11:0] rd_start,
  output logic [11:0] rd_len,
  output logic        rd_valid,
  output logic [11:0] total
);

  localparam int unsigned AW = (MAX_RULES > 1) ? $clog2(MAX_RULES) : 1;

  typedef struct packed {
    logic [11:0] idx;
    logic [11:0] start;
    logic [11:0] len;
  } entry_t;

  entry_t tab [MAX_RULES];
  entry_t e;

  assign overflow    = wr && (32'(total) >= MAX_RULES);
  assign e           = tab[rd_idx[AW-1:0]];
  assign rd_valid    = rd_idx < total;
  assign rd_rule_idx = e.idx;
  assign rd_start    = e.start;
  assign rd_len      = e.len;

  always_ff @(posedge clk) begin
    if (wr && !overflow && !clear)
      tab[total[AW-1:0]] <= '{idx: total, start: wr_start, len: wr_len};
  end

  always_ff @(posedge clk) begin
    if (rst || clear)             total <= '0;
    else if (wr && !overflow)     total <= total + 12'd1;
  end

endmodule
