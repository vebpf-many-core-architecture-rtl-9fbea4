// tb_vebpf_manycore_top: end-to-end self-checking test of the VeBPF
// many-core engine as an eBPF firewall.
//
// Twelve cores (the architecture's default) with a fast UART (16 clocks per
// bit, instead of 868, to keep the rule upload short) and a small 8 KiB
// packet region so the DMA runs out of memory. The testbench plays
//   * the host: uploads rule sets over the UART (own byte protocol: 0x01 +
//     8 bytes per instruction, 0x02 next rule, 0x03 done, 0x04 new set);
//   * the Ethernet controller: sends IPv4 UDP/TCP/ICMP and ARP frames of 64
//     to 1500 bytes on the AXI stream;
//   * the memory: a byte-addressed model behind the memory port;
//   * the management RISC-V: arms the DMA through the m-plane registers,
//     reads each descriptor, checks its VeBPF result against a reference
//     model and the packet's first word through the shared memory bus, then
//     clears the descriptor;
//   * the custom PL call handler (returns 2 = store for call 5).
// Rule set A is the four firewall rule types of the evaluation combined
// (type 1 source IPs 255.255.255.255, 127/8, 240/4, 0/8; type 2 and type 3
// UDP destination ports), one eBPF rule per blocked item, 17 rules, more
// than the cores. Rule set B is type 1 plus a rule that reaches an illegal
// instruction for ICMP (error result), a rule that calls the call handler
// for UDP port 22 (store result) and thirteen long-running header byte-sum
// rules that decide nothing (19 rules, so all cores get busy). Phases: a UART command error and
// recovery, set A traffic with the CPU paused (first small frames until the
// descriptor table is full, then large ones until the DMA memory is full;
// the input stalls), set A at the 100 Mbit/s line rate of 64-byte
// frames (672 cycles apart at an assumed 100 MHz clock) with the per-packet
// decision time checked against that budget, a rule set change to B, set B
// traffic.
// Every mechanism is counted and a failure is counted for any that never
// happened: drop, don't care, store and error results, abort of running
// rules, all cores busy, memory bus contention, DMA memory full, descriptor
// table full, ring wrap, input stall, call handshake, UART error, rule set
// change.
module tb_vebpf_manycore_top;
  import vebpf_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 12;
  localparam int CPB = 16;
  localparam logic [31:0] REGION = 32'h0010_0000;
  localparam int REGION_BYTES = 8192;

  logic rst, uart_rx;
  logic [63:0] s_tdata;
  logic [7:0] s_tkeep;
  logic s_tvalid, s_tlast, s_tready;
  logic [7:0] mmio_addr;
  logic [31:0] mmio_wdata, mmio_rdata;
  logic mmio_we;
  logic cpu_req, cpu_grant, cpu_wv, cpu_wr_rdy, cpu_rv, cpu_rd_rdy;
  logic [31:0] cpu_ra;
  logic [63:0] cpu_rd;
  logic mem_wv, mem_rv;
  logic [31:0] mem_wa, mem_ra;
  logic [63:0] mem_wd, mem_rdat;
  logic [7:0] mem_ws;
  logic [N-1:0] call_req, call_ack;
  logic [N-1:0][31:0] call_id;
  logic [N-1:0][63:0] call_result;

  vebpf_manycore_top #(.CLKS_PER_BIT(CPB)) dut (
    .clk, .rst, .uart_rx,
    .s_axis_tdata(s_tdata), .s_axis_tkeep(s_tkeep), .s_axis_tvalid(s_tvalid), .s_axis_tlast(s_tlast),
    .s_axis_tready(s_tready),
    .mmio_addr, .mmio_wdata, .mmio_we, .mmio_rdata,
    .cpu_bus_req(cpu_req), .cpu_bus_grant(cpu_grant), .cpu_wr_valid(cpu_wv), .cpu_wr_addr(32'd0),
    .cpu_wr_data(64'd0), .cpu_wr_strb(8'd0), .cpu_wr_ready(cpu_wr_rdy), .cpu_rd_valid(cpu_rv),
    .cpu_rd_addr(cpu_ra), .cpu_rd_ready(cpu_rd_rdy), .cpu_rd_data(cpu_rd),
    .mem_wr_valid(mem_wv), .mem_wr_addr(mem_wa), .mem_wr_data(mem_wd), .mem_wr_strb(mem_ws),
    .mem_wr_ready(1'b1), .mem_rd_valid(mem_rv), .mem_rd_addr(mem_ra), .mem_rd_ready(mem_rv),
    .mem_rd_data(mem_rdat),
    .call_req, .call_id, .call_ack, .call_result
  );

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- memory
  logic [7:0] mem [logic [31:0]];
  always @(posedge clk)
    if (mem_wv) for (int b = 0; b < 8; b++) if (mem_ws[b]) mem[mem_wa + 32'(b)] = mem_wd[8*b +: 8];
  always_comb
    for (int b = 0; b < 8; b++) mem_rdat[8*b +: 8] = mem.exists(mem_ra + 32'(b)) ? mem[mem_ra + 32'(b)] : 8'h00;

  // ---------------------------------------------------------------- call handler
  int m_call = 0;
  always @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      call_ack[i]    <= call_req[i] && !call_ack[i];
      call_result[i] <= (call_id[i] == 5) ? 64'd2 : 64'd0;
      if (call_req[i] && !call_ack[i]) m_call++;
    end
  end

  // ---------------------------------------------------------------- eBPF rules
  function automatic logic [63:0] I(input logic [7:0] opc, input logic [3:0] dst, input logic [3:0] src,
                                    input logic [15:0] off, input logic [31:0] imm);
    return {imm, off, src, dst, opc};
  endfunction

  typedef logic [63:0] prog_t[$];
  typedef prog_t rules_t[$];

  // if IPv4 [and ip proto == proto] and (field & mask) == val: return action
  function automatic prog_t match_rule(input int off, input int sz, input logic [31:0] mask, input logic [31:0] val,
                                       input int proto, input logic [7:0] action, input bit via_call = 0);
    prog_t p;
    int jf[$];
    p.push_back(I(8'h69, 2, 6, 16'd12, 0));                  // r2 = ethertype (LE)
    jf.push_back(p.size()); p.push_back(I(8'h55, 2, 0, 0, 32'h0008));
    if (proto >= 0) begin
      p.push_back(I(8'h71, 4, 6, 16'd23, 0));                // r4 = ip proto
      jf.push_back(p.size()); p.push_back(I(8'h55, 4, 0, 0, 32'(proto)));
    end
    p.push_back(I(sz == 4 ? 8'h61 : 8'h69, 3, 6, 16'(off), 0));
    if (sz == 2) p.push_back(I(8'hdc, 3, 0, 0, 16));          // network to host order
    if (mask != 0) p.push_back(I(8'h57, 3, 0, 0, mask));
    jf.push_back(p.size()); p.push_back(I(8'h56, 3, 0, 0, val));   // jne32
    if (via_call) p.push_back(I(8'h85, 0, 0, 0, 5));
    else          p.push_back(I(8'hb7, 0, 0, 0, 32'(action)));
    p.push_back(I(8'h95, 0, 0, 0, 0));
    foreach (jf[k]) p[jf[k]][31:16] = 16'(p.size() - (jf[k] + 1));
    p.push_back(I(8'hb7, 0, 0, 0, 0));
    p.push_back(I(8'h95, 0, 0, 0, 0));
    return p;
  endfunction

  function automatic prog_t error_rule();   // IPv4 ICMP packets reach an illegal instruction
    prog_t p;
    p.push_back(I(8'h69, 2, 6, 16'd12, 0));
    p.push_back(I(8'h55, 2, 0, 16'd3, 32'h0008));
    p.push_back(I(8'h71, 4, 6, 16'd23, 0));
    p.push_back(I(8'h55, 4, 0, 16'd1, 32'd1));
    p.push_back(I(8'h00, 0, 0, 0, 0));
    p.push_back(I(8'hb7, 0, 0, 0, 0));
    p.push_back(I(8'h95, 0, 0, 0, 0));
    return p;
  endfunction

  int ports2[9] = '{111, 2000, 37, 135, 137, 138, 161, 162, 514};
  int ports3[4] = '{69, 2049, 389, 4045};

  // sums the header bytes (R1 = header length) and decides nothing: a
  // long-running rule that keeps cores busy
  function automatic prog_t sum_rule();
    prog_t p;
    p.push_back(I(8'hb7, 2, 0, 0, 0));
    p.push_back(I(8'hb7, 0, 0, 0, 0));
    p.push_back(I(8'h3d, 2, 1, 16'd4, 0));      // if r2 >= r1 goto end
    p.push_back(I(8'h71, 3, 2, 0, 0));
    p.push_back(I(8'h0f, 0, 3, 0, 0));
    p.push_back(I(8'h07, 2, 0, 0, 1));
    p.push_back(I(8'h05, 0, 0, 16'hfffb, 0));   // goto loop
    p.push_back(I(8'hb7, 0, 0, 0, 0));
    p.push_back(I(8'h95, 0, 0, 0, 0));
    return p;
  endfunction

  function automatic rules_t type1();
    rules_t r;
    r.push_back(match_rule(26, 4, 32'hFFFF_FFFF, 32'hFFFF_FFFF, -1, RES_DROP));  // 255.255.255.255
    r.push_back(match_rule(26, 4, 32'h0000_00FF, 32'd127, -1, RES_DROP));        // 127.0.0.0/8
    r.push_back(match_rule(26, 4, 32'h0000_00F0, 32'hF0, -1, RES_DROP));         // 240.0.0.0/4
    r.push_back(match_rule(26, 4, 32'h0000_00FF, 32'd0, -1, RES_DROP));          // 0.0.0.0/8
    return r;
  endfunction

  function automatic rules_t set_a();
    rules_t r;
    r = type1();
    foreach (ports2[i]) r.push_back(match_rule(36, 2, 0, 32'(ports2[i]), 17, RES_DROP));
    foreach (ports3[i]) r.push_back(match_rule(36, 2, 0, 32'(ports3[i]), 17, RES_DROP));
    return r;
  endfunction

  function automatic rules_t set_b();
    rules_t r;
    r = type1();
    r.push_back(error_rule());
    r.push_back(match_rule(36, 2, 0, 32'd22, 17, RES_STORE, 1));
    for (int i = 0; i < 13; i++) r.push_back(sum_rule());
    return r;
  endfunction

  // ---------------------------------------------------------------- UART host
  task automatic uart_byte(input logic [7:0] b);
    uart_rx = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin uart_rx = b[i]; repeat (CPB) @(posedge clk); end
    uart_rx = 1; repeat (CPB) @(posedge clk);
  endtask

  task automatic upload(input rules_t r);
    uart_byte(8'h04);
    foreach (r[k]) begin
      foreach (r[k][j]) begin
        uart_byte(8'h01);
        for (int b = 0; b < 8; b++) uart_byte(r[k][j][8*b +: 8]);
      end
      if (k != r.size() - 1) uart_byte(8'h02);
    end
    uart_byte(8'h03);
  endtask

  // ---------------------------------------------------------------- packets
  typedef enum int {P_BENIGN_UDP, P_BENIGN_TCP, P_BAD_SRC, P_BAD_PORT2, P_BAD_PORT3, P_TCP_BADPORT,
                    P_ARP, P_ICMP, P_PORT22} kind_t;
  logic [7:0] pkt [];
  logic [31:0] cur_src;
  int cur_dport, cur_proto;

  function automatic void make(input kind_t k, input int len);
    logic [31:0] src;
    int dport, proto;
    pkt = new[len];
    foreach (pkt[i]) pkt[i] = 8'($urandom);
    src = {8'd10, 8'($urandom), 8'($urandom), 8'($urandom)};
    proto = 17;
    dport = $urandom_range(1024, 1999);
    case (k)
      P_BENIGN_TCP, P_TCP_BADPORT: proto = 6;
      P_ICMP: proto = 1;
      default: ;
    endcase
    case (k)
      P_BAD_SRC: case ($urandom_range(0, 3))
        0: src = 32'hFFFF_FFFF;
        1: src = {8'd127, 24'($urandom)};
        2: src = {4'hF, 28'($urandom)};
        default: src = {8'd0, 24'($urandom)};
      endcase
      P_BAD_PORT2, P_TCP_BADPORT: dport = ports2[$urandom_range(0, 8)];
      P_BAD_PORT3: dport = ports3[$urandom_range(0, 3)];
      P_PORT22: dport = 22;
      default: ;
    endcase
    pkt[12] = (k == P_ARP) ? 8'h08 : 8'h08; pkt[13] = (k == P_ARP) ? 8'h06 : 8'h00;
    pkt[14] = 8'h45; pkt[23] = 8'(proto);
    {pkt[26], pkt[27], pkt[28], pkt[29]} = src;
    pkt[36] = 8'(dport >> 8); pkt[37] = 8'(dport);
    cur_src = src; cur_dport = dport; cur_proto = (k == P_ARP) ? -1 : proto;
  endfunction

  function automatic logic [7:0] expect_res(input kind_t k, input bit setb);
    if (k == P_ARP) return RES_DONT_CARE;
    if (cur_src == 32'hFFFF_FFFF || cur_src[31:24] == 127 || cur_src[31:28] == 4'hF || cur_src[31:24] == 0)
      return RES_DROP;
    if (!setb) begin
      if (cur_proto == 17) begin
        foreach (ports2[i]) if (cur_dport == ports2[i]) return RES_DROP;
        foreach (ports3[i]) if (cur_dport == ports3[i]) return RES_DROP;
      end
      return RES_DONT_CARE;
    end
    if (cur_proto == 1) return RES_ERROR;
    if (cur_proto == 17 && cur_dport == 22) return RES_STORE;
    return RES_DONT_CARE;
  endfunction

  logic [7:0] exp_q[$];
  logic [63:0] first_q[$];
  int sent = 0;

  task automatic send_pkt();
    int nb;
    nb = (pkt.size() + 7) / 8;
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      s_tvalid = 1;
      for (int k = 0; k < 8; k++) begin
        s_tdata[8*k +: 8] = (8 * b + k < pkt.size()) ? pkt[8 * b + k] : 8'h00;
        s_tkeep[k] = (8 * b + k < pkt.size());
      end
      s_tlast = (b == nb - 1);
      #1;
      while (!s_tready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk);
    s_tvalid = 0; s_tlast = 0;
    sent++;
  endtask

  task automatic send_random(input int count, input bit setb, input int minlen, input int maxlen, input int gap);
    for (int i = 0; i < count; i++) begin
      kind_t k;
      int len;
      k = kind_t'($urandom_range(0, setb ? 8 : 6));
      len = $urandom_range(minlen, maxlen);
      make(k, len);
      exp_q.push_back(expect_res(k, setb));
      first_q.push_back({pkt[7], pkt[6], pkt[5], pkt[4], pkt[3], pkt[2], pkt[1], pkt[0]});
      send_pkt();
      repeat (gap) @(negedge clk);
    end
  endtask

  // ---------------------------------------------------------------- management CPU
  bit cpu_run = 0;
  int checked = 0;
  int m_drop = 0, m_dc = 0, m_store = 0, m_err = 0, m_wrap = 0;

  task automatic mmio_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); mmio_addr = a; mmio_wdata = d; mmio_we = 1;
    @(negedge clk); mmio_we = 0;
  endtask
  task automatic mmio_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); mmio_addr = a; #1 d = mmio_rdata;
  endtask
  task automatic bus_read(input logic [31:0] a, output logic [63:0] d);
    @(negedge clk); cpu_req = 1;
    #1; while (!cpu_grant) begin @(negedge clk); #1; end
    cpu_rv = 1; cpu_ra = a; #1;
    while (!cpu_rd_rdy) begin @(negedge clk); #1; end
    d = cpu_rd;
    @(negedge clk); cpu_rv = 0; cpu_req = 0;
  endtask

  initial begin
    forever begin
      logic [31:0] st, idx, start, len, res;
      logic [63:0] w;
      @(negedge clk);
      if (!cpu_run) continue;
      mmio_read(8'h0C, st);
      if (st[15:0] == 0) continue;
      mmio_read(8'h1C, res);
      if (!res[8]) continue;             // result not yet written
      mmio_read(8'h10, idx);
      mmio_read(8'h14, start);
      mmio_read(8'h18, len);
      if (exp_q.size() == 0) begin chk(0, "descriptor without a sent packet"); mmio_write(8'h20, 0); continue; end
      chk(idx[15:0] == 16'(checked), $sformatf("descriptor index %0d want %0d", idx, checked));
      chk(res[7:0] == exp_q[0], $sformatf("packet %0d result %0d want %0d", checked, res[7:0], exp_q[0]));
      case (res[7:0])
        RES_DROP: m_drop++;
        RES_DONT_CARE: m_dc++;
        RES_STORE: m_store++;
        RES_ERROR: m_err++;
        default: ;
      endcase
      if (start + len > REGION + REGION_BYTES) m_wrap++;
      bus_read(start, w);
      chk(w == first_q[0] || len < 8, $sformatf("packet %0d first word in memory %h want %h", checked, w, first_q[0]));
      void'(exp_q.pop_front());
      void'(first_q.pop_front());
      checked++;
      mmio_write(8'h20, 0);
    end
  end

  // ---------------------------------------------------------------- mechanism monitors
  int m_abort = 0, m_busy = 0, m_bus = 0, m_dmafull = 0, m_descfull = 0, m_stall = 0, m_uerr = 0, m_reload = 0;
  int t_load = 0, max_decide = 0, cyc = 0;
  bit measuring = 0;
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (dut.result_registered && !(&dut.core_rst)) m_abort++;
    if (dut.u_sched.req && dut.u_sched.avail == '0) m_busy++;
    if (cpu_req && !cpu_grant && dut.u_grant.grant[0]) m_bus++;
    if (dut.pkt_avail && dut.u_dma.state == dut.u_dma.IDLE && dut.avail_mem < 32'd1536) m_dmafull++;
    if (dut.pkt_avail && dut.desc_full) m_descfull++;
    if (s_tvalid && !s_tready) m_stall++;
    if (dut.rules_error) m_uerr++;
    if (dut.len_rd) t_load = cyc;
    if (dut.result_registered && measuring && cyc - t_load > max_decide) max_decide = cyc - t_load;
  end

  task automatic wait_uploaded(input int limit, input int nrules);
    int t;
    t = 0;
    while (!dut.rules_uploaded && t < limit) begin @(negedge clk); t++; end
    chk(dut.rules_uploaded && !dut.rules_error && dut.meta_total == 12'(nrules),
        $sformatf("rule set of %0d rules uploaded (%0d)", nrules, dut.meta_total));
  endtask

  task automatic drain(input int limit);
    int t;
    t = 0;
    while (checked != sent && t < limit) begin @(negedge clk); t++; end
    chk(checked == sent, $sformatf("all packets decided and read (%0d of %0d)", checked, sent));
  endtask

  initial begin
    logic [31:0] st;
    rst = 1; uart_rx = 1; s_tvalid = 0; s_tlast = 0; s_tdata = 0; s_tkeep = 0;
    mmio_addr = 0; mmio_wdata = 0; mmio_we = 0; cpu_req = 0; cpu_wv = 0; cpu_rv = 0; cpu_ra = 0;
    repeat (5) @(posedge clk);
    @(negedge clk) rst = 0;
    // m-plane: packet region
    mmio_write(8'h00, REGION);
    mmio_write(8'h04, REGION_BYTES);
    mmio_read(8'h24, st);
    chk(st == REGION_BYTES, "available memory after arming");
    // a bad UART command raises the rules error; a new rule set clears it
    uart_byte(8'h55);
    repeat (5) @(negedge clk);
    mmio_read(8'h0C, st);
    chk(st[17] == 1'b1 && st[16] == 1'b0, "UART command error reported");
    // rule set A
    upload(set_a());
    wait_uploaded(5000, 17);
    mmio_read(8'h0C, st);
    chk(st[16] == 1'b1 && st[17] == 1'b0, "status register: uploaded, no error");
    // phase 1a: CPU paused, small packets back to back: the descriptor table fills
    fork
      send_random(24, 0, 64, 128, 0);
      begin wait (m_descfull > 50); @(negedge clk); cpu_run = 1; end
    join
    drain(200000);
    // phase 1b: CPU paused, big packets back to back: packet memory fills
    cpu_run = 0;
    fork
      send_random(40, 0, 64, 1500, 0);
      begin wait (m_dmafull > 50); @(negedge clk); cpu_run = 1; end
    join
    drain(200000);
    // phase 2: 64-byte frames at the 100 Mbit/s line rate (672 cycles apart)
    measuring = 1;
    begin
      int t0;
      t0 = cyc;
      for (int i = 0; i < 30; i++) begin
        int ts;
        ts = cyc;
        send_random(1, 0, 64, 64, 0);
        while (cyc - ts < 672) @(negedge clk);
      end
      drain(5000);
      chk(cyc - t0 <= 31 * 672, $sformatf("30 frames at line rate handled in %0d cycles", cyc - t0));
    end
    measuring = 0;
    chk(max_decide > 0 && max_decide <= 672,
        $sformatf("worst header-load-to-decision time %0d cycles within the 672-cycle line-rate budget", max_decide));
    // phase 3: change the rule set at run time
    upload(set_b());
    wait_uploaded(5000, 19);
    m_reload++;
    cpu_run = 1;
    send_random(60, 1, 64, 600, 20);
    drain(200000);
    // mechanism coverage
    chk(m_drop > 0, "mechanism: drop result");
    chk(m_dc > 0, "mechanism: don't care result");
    chk(m_store > 0, "mechanism: store result");
    chk(m_err > 0, "mechanism: error result");
    chk(m_abort > 0, "mechanism: rules aborted on an early decision");
    chk(m_busy > 0, "mechanism: all cores busy");
    chk(m_bus > 0, "mechanism: memory bus contention");
    chk(m_dmafull > 0, "mechanism: DMA memory full");
    chk(m_descfull > 0, "mechanism: descriptor table full");
    chk(m_wrap > 0, "mechanism: ring wrap");
    chk(m_stall > 0, "mechanism: input stall");
    chk(m_call > 0, "mechanism: call handshake");
    chk(m_uerr > 0, "mechanism: UART error");
    chk(m_reload > 0, "mechanism: rule set change");
    $display("packets=%0d drop=%0d dc=%0d store=%0d err=%0d abort=%0d busy=%0d bus=%0d dmafull=%0d descfull=%0d wrap=%0d stall=%0d call=%0d worst=%0d",
             checked, m_drop, m_dc, m_store, m_err, m_abort, m_busy, m_bus, m_dmafull, m_descfull, m_wrap, m_stall, m_call, max_decide);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #30000000; failures++;
    $display("watchdog: checked %0d of %0d", checked, sent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
