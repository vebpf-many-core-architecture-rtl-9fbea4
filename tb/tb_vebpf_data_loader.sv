// tb_vebpf_data_loader: self-checking test of the many-core data loader.
//
// Four modelled cores answer the shared data bus with random ACK delays and
// store what they receive. Checks that nothing is loaded before the rules
// are uploaded, that each header word reaches every core at address 8*i,
// that the enable is held until all ACKs are high and the next word waits
// until all have fallen (the AND/OR of the ACKs), the R1 packet length, the
// loading-done flag and its release by load-next, and a zero-length header.
module tb_vebpf_data_loader;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 4;
  logic rst, hdr_avail, uploaded, next, len_rd, hdr_rd, en, done;
  logic [10:0] len_data, addr, r1;
  logic [63:0] hdr_data, word;
  logic [N-1:0] ack;
  vebpf_data_loader #(.N_VEBPF(N)) dut (.clk, .rst, .RxPktHdr_available_flag(hdr_avail),
    .All_eBPF_rules_uploaded_flag(uploaded), .VeBPF_load_next_rxpkthdr_flag(next), .len_rd, .len_data,
    .hdr_rd, .hdr_data, .VeBPF_data_word(word), .VeBPF_data_addr(addr), .VeBPF_data_en(en),
    .VeBPF_R1_RxPkt_len(r1), .VeBPF_data_ack_out(ack), .VeBPF_data_loading_done_flag(done));
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  // FIFOs
  logic [10:0] lq[$];
  logic [63:0] hq[$];
  assign hdr_avail = lq.size() != 0;
  assign len_data  = lq.size() ? lq[0] : '0;
  assign hdr_data  = hq.size() ? hq[0] : '0;
  // FIFO models pop just after the edge, as a clocked FIFO would
  always @(posedge clk) if (!rst && len_rd) begin #1 void'(lq.pop_front()); end
  always @(posedge clk) if (!rst && hdr_rd) begin #1 void'(hq.pop_front()); end
  // cores
  logic [63:0] cmem [N][32];
  int dly [N];
  int proto_err = 0;
  for (genvar c = 0; c < N; c++) begin : g_core
    always @(posedge clk) begin
      if (rst) begin ack[c] <= 0; dly[c] <= 0; end
      else if (!ack[c] && en) begin
        if (dly[c] == 0) dly[c] <= $urandom_range(1, 6);
        else if (dly[c] == 1) begin ack[c] <= 1; cmem[c][addr[10:3]] <= word; dly[c] <= 0; end
        else dly[c] <= dly[c] - 1;
      end else if (ack[c] && !en) ack[c] <= 0;
    end
  end
  // enable must not drop before all ACKs are high
  logic en_d;
  always @(posedge clk) begin
    en_d <= en;
    if (!rst && en_d && !en && !(&ack)) proto_err++;
  end
  initial begin
    rst = 1; uploaded = 0; next = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst = 0;
    lq.push_back(11'd42);
    for (int i = 0; i < 6; i++) hq.push_back({32'h1111_0000 + 32'(i), 32'hA0 + 32'(i)});
    repeat (10) @(negedge clk);
    chk(!en && lq.size() == 1, "waits for rules uploaded");
    uploaded = 1;
    while (!done) @(negedge clk);
    chk(r1 == 42, "R1 = packet header length");
    chk(hq.size() == 0, "six words consumed for 42 bytes");
    for (int c = 0; c < N; c++)
      for (int w = 0; w < 6; w++)
        chk(cmem[c][w] == {32'h1111_0000 + 32'(w), 32'hA0 + 32'(w)}, $sformatf("core %0d word %0d", c, w));
    repeat (5) @(negedge clk);
    chk(done, "done held until load next");
    lq.push_back(11'd8); hq.push_back(64'hFEED);
    repeat (3) @(negedge clk);
    chk(done && lq.size() == 1, "next header waits for load next");
    next = 1; @(negedge clk) next = 0;
    while (!done) @(negedge clk);
    chk(r1 == 8 && cmem[2][0] == 64'hFEED, "one-word header");
    next = 1; @(negedge clk) next = 0;
    lq.push_back(11'd0);
    repeat (3) @(negedge clk);
    chk(done && r1 == 0, "zero-length header completes without writes");
    chk(proto_err == 0, "enable held until all ACKs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
