// tb_vebpf_mem_bus_grant: self-checking test of the memory bus grant module.
//
// Two masters (DMA and CPU) request the memory port. Checks the registered
// grant (one cycle after the request), that the grant is held while the
// owner keeps requesting even if the other master asks, round-robin hand-over
// when both request, and that writes and reads reach a behavioural memory
// from the owner only, with ready returned to the owner only.
module tb_vebpf_mem_bus_grant;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst;
  logic [1:0] req, grant, wv, wr_rdy, rv, rr;
  logic [1:0][31:0] wa, ra;
  logic [1:0][63:0] wdat;
  logic [1:0][7:0] ws;
  logic [63:0] rdat, mrd;
  logic mwv, mrv;
  logic [31:0] mwa, mra;
  logic [63:0] mwd;
  logic [7:0] mws;
  logic [63:0] mem [256];
  vebpf_mem_bus_grant dut (.clk, .rst, .req, .grant, .m_wr_valid(wv), .m_wr_addr(wa), .m_wr_data(wdat),
    .m_wr_strb(ws), .m_wr_ready(wr_rdy), .m_rd_valid(rv), .m_rd_addr(ra), .m_rd_ready(rr), .m_rd_data(rdat),
    .mem_wr_valid(mwv), .mem_wr_addr(mwa), .mem_wr_data(mwd), .mem_wr_strb(mws), .mem_wr_ready(1'b1),
    .mem_rd_valid(mrv), .mem_rd_addr(mra), .mem_rd_ready(mrv), .mem_rd_data(mrd));
  assign mrd = mem[mra[10:3]];
  always @(posedge clk) if (mwv) for (int b = 0; b < 8; b++) if (mws[b]) mem[mwa[10:3]][8*b +: 8] <= mwd[8*b +: 8];
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    foreach (mem[i]) mem[i] = 0;
    rst = 1; req = 0; wv = 0; rv = 0; wa = 0; ra = 0; wdat = 0; ws = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst = 0;
    req[0] = 1;
    @(negedge clk); chk(grant == 2'b01, "master 0 granted after one cycle");
    req[1] = 1;
    wv[0] = 1; wa[0] = 32'h40; wdat[0] = 64'h1111_2222_3333_4444; ws[0] = 8'hFF;
    wv[1] = 1; wa[1] = 32'h48; wdat[1] = 64'hDEAD; ws[1] = 8'hFF;
    #1 chk(wr_rdy == 2'b01, "ready to owner only");
    @(negedge clk); wv[0] = 0;
    chk(grant == 2'b01, "grant held while owner requests");
    chk(mem[8] == 64'h1111_2222_3333_4444 && mem[9] == 0, "owner write landed, other blocked");
    rv[0] = 1; ra[0] = 32'h40; #1;
    chk(rr == 2'b01 && rdat == 64'h1111_2222_3333_4444, "owner read");
    @(negedge clk); rv[0] = 0; req[0] = 0;
    #1 chk(grant == 2'b00, "grant drops with the request");
    @(negedge clk); chk(grant == 2'b00, "released");
    @(negedge clk); chk(grant == 2'b10, "other master granted");
    #1 chk(wr_rdy == 2'b10, "ready to master 1");
    @(negedge clk); wv[1] = 0;
    chk(mem[9] == 64'hDEAD, "master 1 write");
    // partial strobe
    wv[1] = 1; wa[1] = 32'h48; wdat[1] = 64'hFF00; ws[1] = 8'h02;
    @(negedge clk); wv[1] = 0;
    chk(mem[9] == 64'hFFAD, "byte strobe");
    // both request again: round robin gives master 0 next
    req[0] = 1; req[1] = 0;
    repeat (2) @(negedge clk);
    chk(grant == 2'b01, "round robin back to master 0");
    req[1] = 1; req[0] = 0;
    repeat (2) @(negedge clk);
    chk(grant == 2'b10, "then master 1");
    req = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
