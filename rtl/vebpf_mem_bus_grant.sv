// vebpf_mem_bus_grant: Mem Bus Grant Module.
//
// Shares one memory port between NREQ masters (the packet DMA and the
// management RISC-V). A master raises req and keeps it high for as long as it
// needs the bus; the module grants one requester at a time, round-robin after
// the previous owner, and keeps the grant until that owner drops req. The
// grant is registered: it appears the cycle after the request at the
// earliest. The granted master's write and read channels are muxed to the
// memory side; ready and read data go back to it only. Memory side: simple
// valid/ready single-beat 64-bit writes with byte strobes, and reads whose
// data is valid with mem_rd_ready. The req/grant interface is the
// architecture's; the round-robin policy and the bus protocol are this
// design's.
module vebpf_mem_bus_grant #(
  parameter int unsigned NREQ = 2
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [NREQ-1:0]        req,
  output logic [NREQ-1:0]        grant,
  input  logic [NREQ-1:0]        m_wr_valid,
  input  logic [NREQ-1:0][31:0]  m_wr_addr,
  input  logic [NREQ-1:0][63:0]  m_wr_data,
  input  logic [NREQ-1:0][7:0]   m_wr_strb,
  output logic [NREQ-1:0]        m_wr_ready,
  input  logic [NREQ-1:0]        m_rd_valid,
  input  logic [NREQ-1:0][31:0]  m_rd_addr,
  output logic [NREQ-1:0]        m_rd_ready,
  output logic [63:0]            m_rd_data,
  output logic                   mem_wr_valid,
  output logic [31:0]            mem_wr_addr,
  output logic [63:0]            mem_wr_data,
  output logic [7:0]             mem_wr_strb,
  input  logic                   mem_wr_ready,
  output logic                   mem_rd_valid,
  output logic [31:0]            mem_rd_addr,
  input  logic                   mem_rd_ready,
  input  logic [63:0]            mem_rd_data
);

  localparam int unsigned IW = (NREQ > 1) ? $clog2(NREQ) : 1;
  logic [IW-1:0] owner, last;
  logic          busy;

  // next requester after `last`, round-robin
  logic [IW-1:0] pick;
  logic          any;
  always_comb begin
    pick = last;
    any  = 1'b0;
    for (int k = 1; k <= NREQ; k++) begin
      int unsigned c;
      c = (32'(last) + k) % NREQ;
      if (!any && req[c]) begin
        any  = 1'b1;
        pick = IW'(c);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      owner <= '0;
      last  <= IW'(NREQ - 1);
    end else if (busy && !req[owner]) begin
      busy <= 1'b0;
      last <= owner;
    end else if (!busy && any) begin
      busy  <= 1'b1;
      owner <= pick;
    end
  end

  always_comb begin
    grant        = '0;
    m_wr_ready   = '0;
    m_rd_ready   = '0;
    mem_wr_valid = 1'b0;
    mem_rd_valid = 1'b0;
    mem_wr_addr  = m_wr_addr[owner];
    mem_wr_data  = m_wr_data[owner];
    mem_wr_strb  = m_wr_strb[owner];
    mem_rd_addr  = m_rd_addr[owner];
    m_rd_data    = mem_rd_data;
    if (busy && req[owner]) begin
      grant[owner]      = 1'b1;
      mem_wr_valid      = m_wr_valid[owner];
      mem_rd_valid      = m_rd_valid[owner];
      m_wr_ready[owner] = mem_wr_ready;
      m_rd_ready[owner] = mem_rd_ready;
    end
  end

  // only one master owns the bus
  assert property (@(posedge clk) disable iff (rst) $onehot0(grant));

endmodule
