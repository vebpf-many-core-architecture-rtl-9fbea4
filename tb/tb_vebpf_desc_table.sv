// tb_vebpf_desc_table: self-checking test of the RxPkt descriptor table.
//
// Pushes descriptors and writes results in both orders (result before the
// DMA's push and after it), reads and clears the head, fills the table to
// check full and that a push into a full table is dropped, and checks that a
// cleared slot's result-valid flag is reset for the next packet.
module tb_vebpf_desc_table;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst, push, full, res_wr, pop, hv;
  logic [15:0] pidx, plen, hidx, hlen;
  logic [31:0] pstart, hstart;
  logic [7:0] rv, hres;
  logic [2:0] count;
  vebpf_desc_table #(.DEPTH(4)) dut (.clk, .rst, .push, .push_idx(pidx), .push_start(pstart), .push_len(plen),
    .full, .res_wr, .res_val(rv), .pop, .head_idx(hidx), .head_start(hstart), .head_len(hlen),
    .head_result(hres), .head_result_valid(hv), .count);
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic do_push(input int i);
    @(negedge clk); push = 1; pidx = 16'(i); pstart = 32'(1000 + 64 * i); plen = 16'(60 + i);
    @(negedge clk); push = 0;
  endtask
  task automatic do_res(input logic [7:0] v);
    @(negedge clk); res_wr = 1; rv = v;
    @(negedge clk); res_wr = 0;
  endtask
  task automatic do_pop;
    @(negedge clk); pop = 1;
    @(negedge clk); pop = 0;
  endtask
  initial begin
    rst = 1; push = 0; res_wr = 0; pop = 0; pidx = 0; pstart = 0; plen = 0; rv = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst = 0;
    chk(count == 0 && !full, "empty after reset");
    do_push(0);
    chk(count == 1 && hidx == 0 && hstart == 1000 && hlen == 60 && !hv, "push without result");
    do_res(8'h01);
    chk(hv && hres == 8'h01, "result after push");
    do_res(8'h02);                // result for packet 1 before its descriptor
    do_push(1);
    do_pop;
    chk(count == 1 && hidx == 1 && hlen == 61 && hv && hres == 8'h02, "result before push");
    do_pop;
    chk(count == 0, "empty after clears");
    for (int i = 2; i < 6; i++) do_push(i);
    chk(full && count == 4, "full at depth");
    do_push(6);
    chk(count == 4, "push into full dropped");
    for (int i = 2; i < 6; i++) begin
      chk(hidx == 16'(i) && !hv, $sformatf("slot %0d has no stale result", i));
      do_res(8'(i));
      chk(hv && hres == 8'(i), "result on reused slot");
      do_pop;
    end
    chk(count == 0 && !full, "drained");
    do_pop;
    chk(count == 0, "pop on empty ignored");
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
