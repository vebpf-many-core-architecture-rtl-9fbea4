// tb_vebpf_instr_uploader: self-checking test of the multi-core multi-rule
// instructions uploader.
//
// Three modelled cores store program words and answer the shared program
// bus with random ACK rise and fall delays. Checks that nothing is written while the parser
// reports an error or before rules are available, that every FIFO word lands
// at consecutive addresses in every core, the four-phase handshake (enable
// held until all ACKs, next word only after all fall), the uploaded flag, and
// a restart on a new rule set.
module tb_vebpf_instr_uploader;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 3;
  logic rst, avail, rnew, err, frd, fempty, en, done;
  logic [63:0] fdata, pdata;
  logic [11:0] paddr;
  logic [N-1:0] ack;
  vebpf_instr_uploader #(.N_VEBPF(N)) dut (.clk, .rst, .VeBPF_rules_available_flag(avail),
    .VeBPF_rst_new_rules_flag(rnew), .Error_flag(err), .fifo_rd(frd), .fifo_data(fdata), .fifo_empty(fempty),
    .VeBPF_pgm_data(pdata), .VeBPF_pgm_addr(paddr), .VeBPF_pgm_en(en), .VeBPF_pgm_ack_out(ack),
    .All_eBPF_rules_uploaded_flag(done));
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic [63:0] q[$];
  assign fempty = q.size() == 0;
  assign fdata = fempty ? '0 : q[0];
  always @(posedge clk) if (frd) begin #1 void'(q.pop_front()); end   // after the edge, as a clocked FIFO would
  logic [63:0] pm [N][64];
  int dly [N];
  for (genvar c = 0; c < N; c++) begin : g_core
    always @(posedge clk) begin
      if (rst) begin ack[c] <= 0; dly[c] <= 0; end
      else if (!ack[c] && en) begin
        if (dly[c] == 0) dly[c] <= $urandom_range(1, 4);
        else if (dly[c] == 1) begin ack[c] <= 1; pm[c][paddr[5:0]] <= pdata; dly[c] <= 0; end
        else dly[c] <= dly[c] - 1;
      end else if (ack[c] && !en) begin
        // each core releases its ACK after its own delay
        if (dly[c] == 0) dly[c] <= $urandom_range(1, 4);
        else if (dly[c] == 1) begin ack[c] <= 0; dly[c] <= 0; end
        else dly[c] <= dly[c] - 1;
      end
    end
  end
  int viol = 0;
  logic en_d;
  always @(posedge clk) begin en_d <= en; if (!rst && en_d && !en && !(&ack) && !fempty) viol++; end
  initial begin
    rst = 1; avail = 0; rnew = 0; err = 0;
    for (int i = 0; i < 20; i++) q.push_back(64'hC0DE_0000 + 64'(i));
    repeat (2) @(posedge clk); @(negedge clk) rst = 0;
    avail = 1; err = 1;
    repeat (10) @(negedge clk);
    chk(!en && q.size() == 20, "no upload while the parser reports an error");
    err = 0;
    while (!done) @(negedge clk);
    chk(q.size() == 0, "FIFO drained");
    for (int c = 0; c < N; c++) for (int i = 0; i < 20; i++)
      chk(pm[c][i] == 64'hC0DE_0000 + 64'(i), $sformatf("core %0d word %0d", c, i));
    chk(viol == 0, "enable held until all ACKs");
    @(negedge clk); rnew = 1; avail = 0; @(negedge clk); rnew = 0;
    chk(!done, "new rule set clears uploaded");
    for (int i = 0; i < 5; i++) q.push_back(64'hBEEF_0000 + 64'(i));
    avail = 1;
    while (!done) @(negedge clk);
    chk(pm[1][0] == 64'hBEEF_0000 && pm[1][4] == 64'hBEEF_0004 && pm[1][5] == 64'hC0DE_0005, "second set from address 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
