// tb_vebpf_dma: self-checking test of the RxPkt-to-memory DMA.
//
// The testbench plays the slicer (offers packets with the available flag and
// drops it on the clear pulse), the memory bus grant (grants after a random
// delay) and the memory (random write stalls). The packet region is 4 KiB at
// 0x1000. Checks the written bytes at their ring addresses, including a packet
// that wraps around the end of the region, the descriptors (index, start,
// length), the available-memory accounting, that a packet waits while less
// than MAX_PKT_BYTES is free or the descriptor table is full and resumes when
// memory is given back, and that with an immediate grant and no stalls a
// packet of n beats is moved in n + 3 cycles (one beat per cycle).
module tb_vebpf_dma;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst, load, tvalid, tlast, tready, avail, clr, req, grant, wv, wrdy, dwr, ffull, free_en;
  logic [63:0] tdata, wdata;
  logic [7:0] tkeep, wstrb;
  logic [31:0] waddr, dstart, avail_mem, cur;
  logic [15:0] didx, dlen, free_len;
  vebpf_dma dut (.clk, .rst, .csr_start_addr(32'h1000), .csr_total_mem(32'd4096), .csr_load(load),
    .pkt_tdata(tdata), .pkt_tkeep(tkeep), .pkt_tvalid(tvalid), .pkt_tlast(tlast), .pkt_tready(tready),
    .RxPkt_available_flag(avail), .Clear_RxPkt_avail_flag(clr), .bus_req(req), .bus_grant(grant),
    .m_wr_valid(wv), .m_wr_addr(waddr), .m_wr_data(wdata), .m_wr_strb(wstrb), .m_wr_ready(wrdy),
    .desc_wr(dwr), .desc_idx(didx), .desc_start(dstart), .desc_len(dlen), .Fifo_full_flag(ffull),
    .free_en, .free_len, .avail_mem, .cur_addr(cur));

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] mem [logic [31:0]];
  bit stall_mem, slow_grant;
  always @(posedge clk) if (!rst && wv && wrdy) for (int b = 0; b < 8; b++) if (wstrb[b]) mem[waddr + 32'(b)] = wdata[8*b +: 8];
  always @(negedge clk) wrdy = stall_mem ? 1'($urandom) : 1'b1;
  // grant: after a random delay while requested
  int gdel;
  always @(posedge clk) begin
    if (!req) begin grant <= 0; gdel <= slow_grant ? $urandom_range(0, 4) : 0; end
    else if (gdel == 0) grant <= 1;
    else gdel <= gdel - 1;
  end
  typedef struct { logic [15:0] idx; logic [31:0] start; logic [15:0] len; } d_t;
  d_t dq[$];
  always @(posedge clk) if (!rst && dwr) dq.push_back('{didx, dstart, dlen});

  int pcycles;
  task automatic send(input int len, input logic [7:0] seed);
    int nb, c;
    nb = (len + 7) / 8;
    @(negedge clk); avail = 1; c = 0;
    for (int b = 0; b < nb; b++) begin
      tvalid = 1;
      for (int k = 0; k < 8; k++) begin
        tdata[8*k +: 8] = 8'(seed + 8 * b + k);
        tkeep[k] = (8 * b + k < len);
      end
      tlast = (b == nb - 1);
      #1;
      while (!tready) begin @(negedge clk); c++; #1; end
      @(negedge clk); c++;
    end
    tvalid = 0; tlast = 0;
    while (!clr) begin #1; if (clr) break; @(negedge clk); c++; end
    @(negedge clk); avail = 0;
    pcycles = c;
  endtask

  function automatic bit mem_ok(input logic [31:0] off, input int len, input logic [7:0] seed);
    for (int i = 0; i < len; i++) begin
      logic [31:0] a;
      a = 32'h1000 + ((off + 32'(i)) % 4096);
      if (!mem.exists(a) || mem[a] != 8'(seed + i)) return 0;
    end
    return 1;
  endfunction

  initial begin
    rst = 1; load = 0; avail = 0; tvalid = 0; tlast = 0; tdata = 0; tkeep = 0; ffull = 0;
    free_en = 0; free_len = 0; stall_mem = 0; slow_grant = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst = 0;
    load = 1; @(negedge clk) load = 0;
    chk(avail_mem == 4096 && cur == 32'h1000, "armed by csr load");
    send(64, 8'h10);
    chk(pcycles <= 8 + 3, $sformatf("64-byte packet took %0d cycles (want <= 11)", pcycles));
    send(1000, 8'h20);
    chk(pcycles <= 125 + 3, $sformatf("1000-byte packet took %0d cycles (want <= 128)", pcycles));
    repeat (2) @(negedge clk);
    chk(dq.size() == 2 && dq[0].idx == 0 && dq[0].start == 32'h1000 && dq[0].len == 64, "descriptor 0");
    chk(dq[1].idx == 1 && dq[1].start == 32'h1040 && dq[1].len == 1000, "descriptor 1");
    chk(mem_ok(0, 64, 8'h10) && mem_ok(64, 1000, 8'h20), "packet bytes in memory");
    chk(avail_mem == 4096 - 64 - 1000, $sformatf("available memory %0d", avail_mem));
    // next 1500-byte packet fits (3032 free), after it 1528 < 1536 remain
    stall_mem = 1; slow_grant = 1;
    send(1500, 8'h30);
    chk(avail_mem == 4096 - 64 - 1000 - 1504, $sformatf("available memory %0d", avail_mem));
    // DMA full: the next packet must wait
    fork
      send(1200, 8'h40);
      begin
        repeat (30) @(negedge clk);
        chk(!req && dq.size() == 3, "packet held while memory short");
        free_en = 1; free_len = 64;
        @(negedge clk) free_en = 0;
        // 1592 now free; accepted
      end
    join
    repeat (2) @(negedge clk);
    chk(dq.size() == 4 && dq[3].start == 32'h1000 + 32'd2568 && dq[3].len == 1200, "descriptor after wait");
    // this packet runs past the end of the region (2568 + 1200 > 4096)? no: 3768; next wraps
    chk(mem_ok(2568, 1200, 8'h40), "packet 3 bytes");
    free_en = 1; free_len = 1000; @(negedge clk);
    free_len = 1500; @(negedge clk); free_en = 0;
    chk(avail_mem == 4096 - 1200, $sformatf("memory given back %0d", avail_mem));
    send(700, 8'h50);             // 3768 .. 4467 wraps at 4096
    repeat (2) @(negedge clk);
    chk(dq[4].start == 32'h1000 + 32'd3768 && mem_ok(3768, 700, 8'h50), "wrapping packet");
    // descriptor table full blocks the DMA
    ffull = 1;
    fork
      send(100, 8'h60);
      begin repeat (20) @(negedge clk); chk(!req && dq.size() == 5, "held while table full"); ffull = 0; end
    join
    repeat (2) @(negedge clk);
    chk(dq.size() == 6 && dq[5].idx == 5 && mem_ok((3768 + 704) % 4096, 100, 8'h60), "resumed after table not full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
