// tb_vebpf_mplane_csr: self-checking test of the m-plane register block.
//
// Writes and reads back the region and header-length registers, checks the
// DMA arm pulse one cycle after the total-size write, the read-only status,
// descriptor and available-memory registers, and the clear pulse on a write
// to 0x20.
module tb_vebpf_mplane_csr;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst, we, load, pop;
  logic [7:0] addr;
  logic [31:0] wd, rd, cs, ct;
  logic [10:0] chl;
  vebpf_mplane_csr dut (.clk, .rst, .mmio_addr(addr), .mmio_wdata(wd), .mmio_we(we), .mmio_rdata(rd),
    .csr_start_addr(cs), .csr_total_mem(ct), .csr_load(load), .csr_custom_hdr_len(chl), .desc_count(16'd3),
    .desc_head_idx(16'd7), .desc_head_start(32'h8000_1000), .desc_head_len(16'd1500), .desc_head_result(8'h02),
    .desc_head_result_valid(1'b1), .desc_pop(pop), .rules_uploaded(1'b1), .rules_error(1'b0),
    .avail_mem(32'd12345));
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); we = 1; addr = a; wd = d; #1;
    chk(a != 8'h20 || pop, "pop pulse with the write to 0x20");
    @(negedge clk); we = 0;
  endtask
  task automatic rdchk(input logic [7:0] a, input logic [31:0] e);
    addr = a; #1 chk(rd == e, $sformatf("read %h = %h want %h", a, rd, e));
  endtask
  initial begin
    rst = 1; we = 0; addr = 0; wd = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst = 0;
    wr(8'h00, 32'h8000_0000);
    chk(!load, "no arm on start write");
    @(negedge clk); we = 1; addr = 8'h04; wd = 32'h10_0000;
    @(negedge clk); we = 0;
    chk(load && ct == 32'h10_0000, "arm one cycle after the total write, with the new value");
    @(negedge clk); chk(!load, "arm is a pulse");
    wr(8'h08, 32'd96);
    rdchk(8'h00, 32'h8000_0000);
    rdchk(8'h04, 32'h10_0000);
    rdchk(8'h08, 32'd96);
    chk(chl == 96 && cs == 32'h8000_0000, "outputs");
    rdchk(8'h0C, {14'd0, 1'b0, 1'b1, 16'd3});
    rdchk(8'h10, 32'd7);
    rdchk(8'h14, 32'h8000_1000);
    rdchk(8'h18, 32'd1500);
    rdchk(8'h1C, 32'h102);
    rdchk(8'h24, 32'd12345);
    wr(8'h20, 0);
    @(negedge clk); chk(!pop, "pop only during the write");
    wr(8'h0C, 32'hFFFF_FFFF);
    rdchk(8'h0C, {14'd0, 1'b0, 1'b1, 16'd3});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
