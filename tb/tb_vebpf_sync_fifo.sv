// tb_vebpf_sync_fifo: self-checking test of the synchronous FIFO used for the
// header, header-length and rules FIFOs.
//
// Compares the first-word-fall-through FIFO against a queue model over 3000
// cycles of random pushes and pops, checking data, empty, full and count each
// cycle, and checks that a push into a full FIFO and a pop from an empty one
// are ignored.
module tb_vebpf_sync_fifo;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst, wr, rd, full, empty;
  logic [15:0] wd, rdat;
  logic [3:0] count;
  logic [15:0] q[$];
  vebpf_sync_fifo #(.WIDTH(16), .DEPTH(8)) dut (.clk, .rst, .wr_en(wr), .wr_data(wd), .full,
    .rd_en(rd), .rd_data(rdat), .empty, .count);
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    rst = 1; wr = 0; rd = 0; wd = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      chk(empty == (q.size() == 0) && full == (q.size() == 8) && count == 4'(q.size()),
          $sformatf("flags size=%0d count=%0d", q.size(), count));
      if (q.size() != 0) chk(rdat == q[0], "head data");
      // phases: fill-heavy, drain-heavy, mixed
      wr = ($urandom_range(0, 99) < ((c / 500) % 2 == 0 ? 70 : 30));
      rd = ($urandom_range(0, 99) < ((c / 500) % 2 == 0 ? 30 : 70));
      wd = 16'($urandom);
      @(posedge clk);
      begin
        bit was_full;
        was_full = (q.size() == 8);
        if (rd && q.size() != 0) void'(q.pop_front());
        if (wr && !was_full) q.push_back(wd);
      end
    end
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
