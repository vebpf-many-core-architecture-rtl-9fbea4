// tb_vebpf_pkt_slicer: self-checking test of the network packet slicer.
//
// Sends Ethernet frames on the AXI-stream input: IPv4/UDP, IPv4/TCP, IPv4
// with IP options, ARP, a runt shorter than its computed header, a custom
// header length and a custom length above the cap. Checks per packet the
// header length written to the length FIFO, the header words (the first
// ceil(len/8) beats, nothing more), that the packet stream to the DMA equals
// the input, and the available/clear hand-off. With the DMA always ready the
// slicer must pass one beat per cycle (the line-rate requirement), checked
// by counting the cycles from the first to the last beat.
module tb_vebpf_pkt_slicer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst;
  logic [63:0] tdata, pdata, hdata;
  logic [7:0] tkeep, pkeep;
  logic tvalid, tlast, tready, pvalid, plast, pready, hwr, lwr, avail, clr;
  logic [10:0] custom, ldata;
  logic [6:0] hcount;
  vebpf_pkt_slicer dut (.clk, .rst, .s_axis_tdata(tdata), .s_axis_tkeep(tkeep), .s_axis_tvalid(tvalid),
    .s_axis_tlast(tlast), .s_axis_tready(tready), .custom_hdr_len(custom), .hdr_wr(hwr), .hdr_data(hdata),
    .hdr_count(hcount), .len_wr(lwr), .len_data(ldata), .len_full(1'b0), .pkt_tdata(pdata), .pkt_tkeep(pkeep),
    .pkt_tvalid(pvalid), .pkt_tlast(plast), .pkt_tready(pready), .RxPkt_available_flag(avail),
    .Clear_RxPkt_avail_flag(clr));

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [63:0] hdr_q[$], out_q[$];
  logic [10:0] len_q[$];
  always @(posedge clk) begin
    if (!rst && hwr) hdr_q.push_back(hdata);
    if (!rst && lwr) len_q.push_back(ldata);
    if (!rst && pvalid && pready) out_q.push_back(pdata & {{8{pkeep[7]}}, {8{pkeep[6]}}, {8{pkeep[5]}}, {8{pkeep[4]}},
                                                    {8{pkeep[3]}}, {8{pkeep[2]}}, {8{pkeep[1]}}, {8{pkeep[0]}}});
  end
  // DMA side model: clear one cycle after the last beat
  always @(posedge clk) clr <= !rst && pvalid && pready && plast;
  assign hcount = 7'(hdr_q.size());

  logic [7:0] pkt [];
  function automatic void make(input int len, input logic [15:0] et, input logic [3:0] ihl, input logic [7:0] proto);
    pkt = new[len];
    foreach (pkt[i]) pkt[i] = 8'($urandom);
    pkt[12] = et[15:8]; pkt[13] = et[7:0];
    if (len > 14) pkt[14] = {4'h4, ihl};
    if (len > 23) pkt[23] = proto;
  endfunction

  int span;
  bit fire_wait = 0;
  task automatic send(input int exp_hlen, input bit stall);
    int nb, first, last_c, c;
    nb = (pkt.size() + 7) / 8;
    hdr_q.delete(); out_q.delete(); len_q.delete();
    c = 0; first = -1; last_c = 0;
    for (int b = 0; b < nb; b++) begin
      bit fire;
      @(negedge clk);
      tvalid = 1;
      for (int k = 0; k < 8; k++) begin
        tdata[8*k +: 8] = (8 * b + k < pkt.size()) ? pkt[8 * b + k] : 8'h00;
        tkeep[k] = (8 * b + k < pkt.size());
      end
      tlast = (b == nb - 1);
      do begin
        if (fire_wait) @(negedge clk);
        pready = stall ? 1'($urandom) : 1'b1;
        #1 fire = tready && pready;
        c++;
        fire_wait = !fire;
      end while (!fire);
      @(posedge clk);
      if (first < 0) first = c;
      last_c = c;
    end
    @(negedge clk);
    tvalid = 0; tlast = 0; pready = 1;
    span = last_c - first + 1;
    repeat (3) @(posedge clk); #1;
    chk(len_q.size() == 1 && len_q[0] == 11'(exp_hlen),
        $sformatf("header length %0d want %0d", len_q.size() ? len_q[0] : 0, exp_hlen));
    chk(hdr_q.size() == (exp_hlen + 7) / 8, $sformatf("header words %0d want %0d", hdr_q.size(), (exp_hlen + 7) / 8));
    for (int w = 0; w < hdr_q.size() && w < nb; w++) begin
      logic [63:0] e;
      for (int k = 0; k < 8; k++) e[8*k +: 8] = (8 * w + k < pkt.size()) ? pkt[8 * w + k] : 8'h00;
      chk(hdr_q[w] == e, $sformatf("header word %0d", w));
    end
    chk(out_q.size() == nb, "all beats to the DMA");
    for (int w = 0; w < out_q.size(); w++) begin
      logic [63:0] e;
      for (int k = 0; k < 8; k++) e[8*k +: 8] = (8 * w + k < pkt.size()) ? pkt[8 * w + k] : 8'h00;
      chk(out_q[w] == e, $sformatf("stream word %0d", w));
    end
    chk(!avail, "available flag cleared by the DMA");
  endtask

  initial begin
    rst = 1; tvalid = 0; tlast = 0; tdata = 0; tkeep = 0; pready = 1; custom = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    make(64, 16'h0800, 5, 17);   send(42, 0);
    chk(span == 8, $sformatf("64-byte packet took %0d cycles, want 8 (one beat per cycle)", span));
    make(1500, 16'h0800, 5, 6);  send(54, 0);
    chk(span == 188, $sformatf("1500-byte packet took %0d cycles, want 188", span));
    make(100, 16'h0800, 6, 17);  send(46, 1);
    make(90, 16'h0800, 15, 6);   send(90, 1);   // 94 capped at the packet length
    make(120, 16'h0800, 15, 6);  send(94, 0);
    make(60, 16'h0806, 5, 0);    send(14, 0);
    make(30, 16'h0800, 5, 6);    send(30, 0);
    make(61, 16'h0800, 5, 1);    send(42, 1);
    custom = 100; make(300, 16'h0800, 5, 17); send(100, 0);
    custom = 50;  make(20, 16'h0800, 5, 17);  send(20, 0);
    custom = 400; make(400, 16'h0800, 5, 17); send(128, 1);
    custom = 0;
    for (int i = 0; i < 20; i++) begin
      int l, pr, exp;
      l = $urandom_range(20, 300); pr = ($urandom_range(0, 2) == 0) ? 6 : 17;
      make(l, 16'h0800, 5, 8'(pr));
      exp = (pr == 6) ? 54 : 42;
      if (exp > l) exp = l;
      send(exp, i % 2);
    end
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
