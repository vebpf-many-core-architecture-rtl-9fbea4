// vebpf_manycore_top: the VeBPF many-core packet-processing engine.
//
// N_VEBPF eBPF cores run a set of eBPF rules on the header of every received
// packet, in parallel, and the first decisive verdict is written next to the
// packet's descriptor for the management CPU. Data path:
//   AXI-stream RxPkt -> packet slicer -> (headers FIFO, header-length FIFO)
//                    -> DMA -> memory bus grant -> packet memory
//                    -> descriptor table (index, start, length)
//   data loader: header FIFO -> all cores' data memories (shared data bus)
//   UART -> rules parser -> rules FIFO + rule metadata table
//        -> instruction uploader -> all cores' program memories (shared
//           program bus)
//   scheduler: arbiter + core selector/re-programmer + tracker + DEMUX start
//        rule k on an idle core by loading its PC in one cycle
//   result analyzer: first non-"don't care" result (or the last result)
//        -> descriptor table, then the next header is loaded
//   m-plane registers: packet-region CSRs, descriptor read/clear
// Outside parts appear as ports: the Ethernet controller (s_axis_*), the
// UART line of the host (uart_rx), the management RISC-V (mmio_* and its
// memory master cpu_*), the memory subsystem (mem_*) and the custom call
// handlers of the cores (call_*). R1 of every core holds the header length,
// R2-R5 are zero.
// The module structure, shared buses and flags are the architecture's;
// widths not printed in its figures, FIFO depths and protocols are this
// design's choices (see each module).
module vebpf_manycore_top
  import vebpf_pkg::*;
#(
  parameter int unsigned N_VEBPF          = 12,
  parameter int unsigned PGM_DEPTH        = 4096,
  parameter int unsigned DATA_DEPTH       = 2048,
  parameter int unsigned CLKS_PER_BIT     = 868,
  parameter int unsigned HDR_FIFO_DEPTH   = 64,
  parameter int unsigned LEN_FIFO_DEPTH   = 16,
  parameter int unsigned RULES_FIFO_DEPTH = 4096,
  parameter int unsigned MAX_RULES        = 4095,
  parameter int unsigned DESC_DEPTH       = 16,
  parameter int unsigned MAX_HDR_BYTES    = 128,
  parameter int unsigned MAX_PKT_BYTES    = 1536
) (
  input  logic                     clk,
  input  logic                     rst,
  // rules upload from the host
  input  logic                     uart_rx,
  // received packets from the Ethernet controller
  input  logic [63:0]              s_axis_tdata,
  input  logic [7:0]               s_axis_tkeep,
  input  logic                     s_axis_tvalid,
  input  logic                     s_axis_tlast,
  output logic                     s_axis_tready,
  // management-plane MMIO from the RISC-V
  input  logic [7:0]               mmio_addr,
  input  logic [31:0]              mmio_wdata,
  input  logic                     mmio_we,
  output logic [31:0]              mmio_rdata,
  // RISC-V memory master through the bus grant module
  input  logic                     cpu_bus_req,
  output logic                     cpu_bus_grant,
  input  logic                     cpu_wr_valid,
  input  logic [31:0]              cpu_wr_addr,
  input  logic [63:0]              cpu_wr_data,
  input  logic [7:0]               cpu_wr_strb,
  output logic                     cpu_wr_ready,
  input  logic                     cpu_rd_valid,
  input  logic [31:0]              cpu_rd_addr,
  output logic                     cpu_rd_ready,
  output logic [63:0]              cpu_rd_data,
  // memory subsystem
  output logic                     mem_wr_valid,
  output logic [31:0]              mem_wr_addr,
  output logic [63:0]              mem_wr_data,
  output logic [7:0]               mem_wr_strb,
  input  logic                     mem_wr_ready,
  output logic                     mem_rd_valid,
  output logic [31:0]              mem_rd_addr,
  input  logic                     mem_rd_ready,
  input  logic [63:0]              mem_rd_data,
  // custom PL call handlers
  output logic [N_VEBPF-1:0]       call_req,
  output logic [N_VEBPF-1:0][31:0] call_id,
  input  logic [N_VEBPF-1:0]       call_ack,
  input  logic [N_VEBPF-1:0][63:0] call_result
);

  // ------------------------------------------------------------ m-plane
  logic [31:0] csr_start, csr_total, avail_mem;
  logic        csr_load, desc_pop;
  logic [10:0] custom_hdr_len;
  logic [$clog2(DESC_DEPTH):0] desc_count;
  logic [15:0] head_idx, head_len;
  logic [31:0] head_start;
  logic [7:0]  head_result;
  logic        head_rvalid, rules_uploaded, rules_error;

  vebpf_mplane_csr u_mplane (
    .clk, .rst, .mmio_addr, .mmio_wdata, .mmio_we, .mmio_rdata,
    .csr_start_addr(csr_start), .csr_total_mem(csr_total), .csr_load,
    .csr_custom_hdr_len(custom_hdr_len),
    .desc_count(16'(desc_count)), .desc_head_idx(head_idx), .desc_head_start(head_start),
    .desc_head_len(head_len), .desc_head_result(head_result), .desc_head_result_valid(head_rvalid),
    .desc_pop, .rules_uploaded, .rules_error, .avail_mem
  );

  // ------------------------------------------------------------ slicer + FIFOs
  logic        hdr_wr, hdr_rd, hdr_empty, hdr_full;
  logic [63:0] hdr_wdata, hdr_rdata;
  logic [$clog2(HDR_FIFO_DEPTH):0] hdr_count;
  logic        len_wr, len_rd, len_empty, len_full;
  logic [10:0] len_wdata, len_rdata;
  logic [63:0] pkt_tdata;
  logic [7:0]  pkt_tkeep;
  logic        pkt_tvalid, pkt_tlast, pkt_tready, pkt_avail, pkt_clear;

  vebpf_pkt_slicer #(.MAX_HDR_BYTES(MAX_HDR_BYTES), .HDR_FIFO_DEPTH(HDR_FIFO_DEPTH)) u_slicer (
    .clk, .rst, .s_axis_tdata, .s_axis_tkeep, .s_axis_tvalid, .s_axis_tlast, .s_axis_tready,
    .custom_hdr_len,
    .hdr_wr, .hdr_data(hdr_wdata), .hdr_count,
    .len_wr, .len_data(len_wdata), .len_full,
    .pkt_tdata, .pkt_tkeep, .pkt_tvalid, .pkt_tlast, .pkt_tready,
    .RxPkt_available_flag(pkt_avail), .Clear_RxPkt_avail_flag(pkt_clear)
  );

  vebpf_sync_fifo #(.WIDTH(64), .DEPTH(HDR_FIFO_DEPTH)) u_hdr_fifo (
    .clk, .rst, .wr_en(hdr_wr), .wr_data(hdr_wdata), .full(hdr_full),
    .rd_en(hdr_rd), .rd_data(hdr_rdata), .empty(hdr_empty), .count(hdr_count)
  );

  vebpf_sync_fifo #(.WIDTH(11), .DEPTH(LEN_FIFO_DEPTH)) u_len_fifo (
    .clk, .rst, .wr_en(len_wr), .wr_data(len_wdata), .full(len_full),
    .rd_en(len_rd), .rd_data(len_rdata), .empty(len_empty), .count()
  );

  // ------------------------------------------------------------ DMA, bus, descriptors
  logic        dma_req, dma_grant, dma_wvalid, dma_wready;
  logic [31:0] dma_waddr;
  logic [63:0] dma_wdata;
  logic [7:0]  dma_wstrb;
  logic        desc_wr, desc_full;
  logic [15:0] desc_idx, desc_len;
  logic [31:0] desc_start;

  vebpf_dma #(.MAX_PKT_BYTES(MAX_PKT_BYTES)) u_dma (
    .clk, .rst, .csr_start_addr(csr_start), .csr_total_mem(csr_total), .csr_load,
    .pkt_tdata, .pkt_tkeep, .pkt_tvalid, .pkt_tlast, .pkt_tready,
    .RxPkt_available_flag(pkt_avail), .Clear_RxPkt_avail_flag(pkt_clear),
    .bus_req(dma_req), .bus_grant(dma_grant),
    .m_wr_valid(dma_wvalid), .m_wr_addr(dma_waddr), .m_wr_data(dma_wdata), .m_wr_strb(dma_wstrb),
    .m_wr_ready(dma_wready),
    .desc_wr, .desc_idx, .desc_start, .desc_len, .Fifo_full_flag(desc_full),
    .free_en(desc_pop && desc_count != '0), .free_len(head_len),
    .avail_mem, .cur_addr()
  );

  logic [1:0] gnt, wready, rready;
  vebpf_mem_bus_grant #(.NREQ(2)) u_grant (
    .clk, .rst,
    .req({cpu_bus_req, dma_req}), .grant(gnt),
    .m_wr_valid({cpu_wr_valid, dma_wvalid}), .m_wr_addr({cpu_wr_addr, dma_waddr}),
    .m_wr_data({cpu_wr_data, dma_wdata}), .m_wr_strb({cpu_wr_strb, dma_wstrb}),
    .m_wr_ready(wready),
    .m_rd_valid({cpu_rd_valid, 1'b0}), .m_rd_addr({cpu_rd_addr, 32'd0}),
    .m_rd_ready(rready), .m_rd_data(cpu_rd_data),
    .mem_wr_valid, .mem_wr_addr, .mem_wr_data, .mem_wr_strb, .mem_wr_ready,
    .mem_rd_valid, .mem_rd_addr, .mem_rd_ready, .mem_rd_data
  );
  assign dma_grant     = gnt[0];
  assign dma_wready    = wready[0];
  assign cpu_bus_grant = gnt[1];
  assign cpu_wr_ready  = wready[1];
  assign cpu_rd_ready  = rready[1];

  logic       res_wr;
  logic [7:0] res_val;

  vebpf_desc_table #(.DEPTH(DESC_DEPTH)) u_desc (
    .clk, .rst, .push(desc_wr), .push_idx(desc_idx), .push_start(desc_start), .push_len(desc_len),
    .full(desc_full), .res_wr, .res_val, .pop(desc_pop),
    .head_idx, .head_start, .head_len, .head_result, .head_result_valid(head_rvalid),
    .count(desc_count)
  );

  // ------------------------------------------------------------ program loader
  logic [63:0] u_pgm_data;
  logic [11:0] u_pgm_addr;
  logic        u_pgm_en, u_done, u_next, u_all, u_rstnew, u_err;
  logic        rf_wr, rf_rd, rf_full, rf_empty;
  logic [63:0] rf_wdata, rf_rdata;
  logic        meta_wr, meta_ovf, p_rstnew, p_avail;
  logic [11:0] meta_wstart, meta_wlen;

  vebpf_uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst, .rx(uart_rx),
    .VeBPF_pgm_data(u_pgm_data), .VeBPF_pgm_addr(u_pgm_addr), .VeBPF_pgm_en(u_pgm_en),
    .VeBPF_pgm_done(u_done), .VeBPF_next_rule_flag(u_next), .VeBPF_all_rules_done_flag(u_all),
    .VeBPF_rst_new_rules_flag(u_rstnew), .Error_flag(u_err)
  );

  vebpf_rules_parser u_parser (
    .clk, .rst,
    .VeBPF_pgm_data(u_pgm_data), .VeBPF_pgm_addr(u_pgm_addr), .VeBPF_pgm_en(u_pgm_en),
    .VeBPF_next_rule_flag(u_next), .VeBPF_all_rules_done_flag(u_all),
    .VeBPF_rst_new_rules_flag_in(u_rstnew), .uart_error(u_err),
    .rules_fifo_wr(rf_wr), .rules_fifo_data(rf_wdata), .rules_fifo_full(rf_full),
    .meta_wr, .meta_start(meta_wstart), .meta_len(meta_wlen), .meta_overflow(meta_ovf),
    .VeBPF_rst_new_rules_flag(p_rstnew), .VeBPF_rules_available_flag(p_avail),
    .Error_flag(rules_error)
  );

  vebpf_sync_fifo #(.WIDTH(64), .DEPTH(RULES_FIFO_DEPTH)) u_rules_fifo (
    .clk, .rst(rst | p_rstnew), .wr_en(rf_wr), .wr_data(rf_wdata), .full(rf_full),
    .rd_en(rf_rd), .rd_data(rf_rdata), .empty(rf_empty), .count()
  );

  logic [11:0] meta_rd_idx, meta_start, meta_total;
  vebpf_rule_meta_table #(.MAX_RULES(MAX_RULES)) u_meta (
    .clk, .rst, .clear(p_rstnew), .wr(meta_wr), .wr_start(meta_wstart), .wr_len(meta_wlen),
    .overflow(meta_ovf), .rd_idx(meta_rd_idx), .rd_rule_idx(), .rd_start(meta_start), .rd_len(),
    .rd_valid(), .total(meta_total)
  );

  logic [63:0]        pgm_bus_data;
  logic [11:0]        pgm_bus_addr;
  logic               pgm_bus_en;
  logic [N_VEBPF-1:0] pgm_ack;

  vebpf_instr_uploader #(.N_VEBPF(N_VEBPF)) u_uploader (
    .clk, .rst, .VeBPF_rules_available_flag(p_avail), .VeBPF_rst_new_rules_flag(p_rstnew),
    .Error_flag(rules_error),
    .fifo_rd(rf_rd), .fifo_data(rf_rdata), .fifo_empty(rf_empty),
    .VeBPF_pgm_data(pgm_bus_data), .VeBPF_pgm_addr(pgm_bus_addr), .VeBPF_pgm_en(pgm_bus_en),
    .VeBPF_pgm_ack_out(pgm_ack), .All_eBPF_rules_uploaded_flag(rules_uploaded)
  );

  // ------------------------------------------------------------ data loader
  logic [63:0]        data_bus_word;
  logic [10:0]        data_bus_addr, r1_len;
  logic               data_bus_en, loading_done, load_next;
  logic [N_VEBPF-1:0] data_ack;

  vebpf_data_loader #(.N_VEBPF(N_VEBPF)) u_loader (
    .clk, .rst,
    .RxPktHdr_available_flag(!hdr_empty && !len_empty),
    .All_eBPF_rules_uploaded_flag(rules_uploaded),
    .VeBPF_load_next_rxpkthdr_flag(load_next),
    .len_rd, .len_data(len_rdata), .hdr_rd, .hdr_data(hdr_rdata),
    .VeBPF_data_word(data_bus_word), .VeBPF_data_addr(data_bus_addr), .VeBPF_data_en(data_bus_en),
    .VeBPF_R1_RxPkt_len(r1_len), .VeBPF_data_ack_out(data_ack),
    .VeBPF_data_loading_done_flag(loading_done)
  );

  // ------------------------------------------------------------ scheduler
  logic [N_VEBPF-1:0]      core_en_ip, core_rst, core_halt, core_err;
  logic [11:0]             core_ip;
  logic [N_VEBPF-1:0][7:0] core_r0;
  logic [7:0]              last_r0;
  logic                    last_flag, result_registered;
  logic [11:0]             tot_rules, tot_done;

  vebpf_scheduler #(.N_VEBPF(N_VEBPF)) u_sched (
    .clk, .rst,
    .VeBPF_data_loading_done_flag(loading_done), .All_eBPF_rules_uploaded_flag(rules_uploaded),
    .VeBPF_result_registered_flag(result_registered),
    .meta_rd_idx, .meta_start, .meta_total,
    .core_en_ip_next(core_en_ip), .core_ip_next(core_ip), .core_reset(core_rst),
    .core_halt, .core_error(core_err), .core_r0,
    .VeBPF_core_most_recent_result_r0(last_r0), .VeBPF_core_most_recent_result_flag(last_flag),
    .Total_eBPF_rules(tot_rules), .Total_eBPF_rules_reprogrammed(tot_done),
    .Total_eBPF_rules_started()
  );

  // ------------------------------------------------------------ cores
  for (genvar i = 0; i < N_VEBPF; i++) begin : g_core
    logic [63:0] r0_full;
    vebpf_core #(.PGM_DEPTH(PGM_DEPTH), .DATA_DEPTH(DATA_DEPTH)) u_core (
      .clk_in(clk), .rst, .reset_in(core_rst[i]),
      .ip_next_eBPF_rule_in(core_ip), .enable_new_eBPF_rule_in(core_en_ip[i]),
      .R1_in(64'(r1_len)), .R2_in('0), .R3_in('0), .R4_in('0), .R5_in('0),
      .VeBPF_pgm_data_in(pgm_bus_data), .VeBPF_pgm_addr_in(pgm_bus_addr),
      .VeBPF_pgm_en_in(pgm_bus_en), .VeBPF_pgm_ack_out(pgm_ack[i]),
      .VeBPF_data_word_in(data_bus_word), .VeBPF_data_addr_in(data_bus_addr),
      .VeBPF_data_en_in(data_bus_en), .VeBPF_data_ack_out(data_ack[i]),
      .call_req(call_req[i]), .call_id(call_id[i]), .call_ack(call_ack[i]),
      .call_result(call_result[i]),
      .R0_out(r0_full), .Halt_out(core_halt[i]), .Error_out(core_err[i]), .Ticks_out()
    );
    assign core_r0[i] = r0_full[7:0];
  end

  // ------------------------------------------------------------ result analyzer
  vebpf_result_analyzer u_analyzer (
    .clk, .rst,
    .VeBPF_core_most_recent_result_r0(last_r0), .VeBPF_core_most_recent_result_flag(last_flag),
    .Total_eBPF_rules(tot_rules), .Total_eBPF_rules_reprogrammed(tot_done),
    .pkt_active(loading_done),
    .VeBPF_write_result_enable(res_wr), .VeBPF_result_r0(res_val),
    .VeBPF_result_registered_flag(result_registered), .VeBPF_load_next_rxpkthdr_flag(load_next)
  );

endmodule
