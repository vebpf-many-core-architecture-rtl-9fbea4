// tb_vebpf_core: self-checking test of one VeBPF core.
//
// Uploads several small eBPF programs into the program memory through the
// program bus handshake, writes a packet header through the data bus
// handshake, then runs each program by loading its start address into the
// PC during reset (the single-cycle rule switch) and releasing reset. Checks
// R0, Halt_out, Error_out and Ticks_out against hand-computed values: ALU,
// 64-bit immediate load, byte/half/word/double loads (little-endian), a
// counting loop, stack store and reload, a call answered by the testbench,
// R1 input preservation, and three error cases.
module tb_vebpf_core;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, reset_in, en_ip;
  logic [11:0] ip;
  logic [63:0] r1;
  logic [63:0] pdata, dword;
  logic [11:0] paddr;
  logic [10:0] daddr;
  logic pen, pack, den, dack;
  logic call_req, call_ack;
  logic [31:0] call_id;
  logic [63:0] call_result, r0, ticks;
  logic halt, err;

  vebpf_core #(.PGM_DEPTH(256), .DATA_DEPTH(256)) dut (
    .clk_in(clk), .rst, .reset_in, .ip_next_eBPF_rule_in(ip), .enable_new_eBPF_rule_in(en_ip),
    .R1_in(r1), .R2_in(64'd2), .R3_in(64'hDEAD_BEEF_0BAD_F00D), .R4_in(64'd4), .R5_in(64'd5),
    .VeBPF_pgm_data_in(pdata), .VeBPF_pgm_addr_in(paddr), .VeBPF_pgm_en_in(pen), .VeBPF_pgm_ack_out(pack),
    .VeBPF_data_word_in(dword), .VeBPF_data_addr_in(daddr), .VeBPF_data_en_in(den), .VeBPF_data_ack_out(dack),
    .call_req, .call_id, .call_ack, .call_result,
    .R0_out(r0), .Halt_out(halt), .Error_out(err), .Ticks_out(ticks)
  );

  function automatic logic [63:0] I(input logic [7:0] opc, input logic [3:0] dst, input logic [3:0] src,
                                    input logic [15:0] off, input logic [31:0] imm);
    return {imm, off, src, dst, opc};
  endfunction

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic pgm_write(input logic [11:0] a, input logic [63:0] w);
    paddr = a; pdata = w; pen = 1;
    do @(posedge clk); while (!pack);
    pen = 0;
    do @(posedge clk); while (pack);
  endtask

  task automatic data_write(input logic [10:0] a, input logic [63:0] w);
    daddr = a; dword = w; den = 1;
    do @(posedge clk); while (!dack);
    den = 0;
    do @(posedge clk); while (dack);
  endtask

  // run the program at `start`; returns the cycles to halt
  task automatic run(input logic [11:0] start, output int cyc);
    reset_in = 1; en_ip = 1; ip = start;
    @(posedge clk);
    en_ip = 0; reset_in = 0;
    cyc = 0;
    while (!halt && cyc < 2000) begin @(posedge clk); cyc++; end
    // call handler: answer any call with id*3
  endtask

  always @(posedge clk) begin
    call_ack    <= call_req && !call_ack;
    call_result <= 64'(call_id) * 3;
  end

  int cyc;
  logic [11:0] p;

  initial begin
    rst = 1; reset_in = 1; en_ip = 0; ip = 0; pen = 0; den = 0; r1 = 64'h1234;
    pdata = 0; paddr = 0; dword = 0; daddr = 0;
    repeat (3) @(posedge clk);
    rst = 0;

    // program A @0: r0 = 5; r0 += 7; exit   -> 12, 6 ticks
    pgm_write(0, I(8'hb7, 0, 0, 0, 5));
    pgm_write(1, I(8'h07, 0, 0, 0, 7));
    pgm_write(2, I(8'h95, 0, 0, 0, 0));
    // program B @4: lddw r2, 0x1122334455667788; r0 = r2; r0 >>= 32; exit
    pgm_write(4, I(8'h18, 2, 0, 0, 32'h55667788));
    pgm_write(5, I(8'h00, 0, 0, 0, 32'h11223344));
    pgm_write(6, I(8'hbf, 0, 2, 0, 0));
    pgm_write(7, I(8'h77, 0, 0, 0, 32));
    pgm_write(8, I(8'h95, 0, 0, 0, 0));
    // program C @10: r6 = 8; r0 = *(u8*)(r6+1); r7 = *(u16*)(r6+2); r0 += r7;
    //                r7 = *(u32*)(r6+0); r0 ^= r7; exit
    pgm_write(10, I(8'hb7, 6, 0, 0, 8));
    pgm_write(11, I(8'h71, 0, 6, 1, 0));
    pgm_write(12, I(8'h69, 7, 6, 2, 0));
    pgm_write(13, I(8'h0f, 0, 7, 0, 0));
    pgm_write(14, I(8'h61, 7, 6, 0, 0));
    pgm_write(15, I(8'haf, 0, 7, 0, 0));
    pgm_write(16, I(8'h95, 0, 0, 0, 0));
    // program D @20: r0 = 0; r2 = 10; loop: r0 += r2; r2 -= 1; if r2 != 0 goto loop; exit -> 55
    pgm_write(20, I(8'hb7, 0, 0, 0, 0));
    pgm_write(21, I(8'hb7, 2, 0, 0, 10));
    pgm_write(22, I(8'h0f, 0, 2, 0, 0));
    pgm_write(23, I(8'h17, 2, 0, 0, 1));
    pgm_write(24, I(8'h55, 2, 0, 16'hfffd, 0));
    pgm_write(25, I(8'h95, 0, 0, 0, 0));
    // program E @30: *(u64*)(r10-8) = r3; r0 = *(u64*)(r10-8); exit
    pgm_write(30, I(8'h7b, 10, 3, 16'hfff8, 0));
    pgm_write(31, I(8'h79, 0, 10, 16'hfff8, 0));
    pgm_write(32, I(8'h95, 0, 0, 0, 0));
    // program F @40: call 7; r0 += r1; exit  -> 21 + R1
    pgm_write(40, I(8'h85, 0, 0, 0, 7));
    pgm_write(41, I(8'h0f, 0, 1, 0, 0));
    pgm_write(42, I(8'h95, 0, 0, 0, 0));
    // program G @50: illegal opcode
    pgm_write(50, I(8'h00, 0, 0, 0, 0));
    // program H @52: r0 = *(u32*)(r10+0)  (out of range)
    pgm_write(52, I(8'h61, 0, 10, 0, 0));
    pgm_write(53, I(8'h95, 0, 0, 0, 0));
    // program J @56: be16 of 0x1234 -> 0x3412; signed jump: if (s64)-1 > 0 r0 = 1
    pgm_write(56, I(8'hb7, 0, 0, 0, 32'h1234));
    pgm_write(57, I(8'hdc, 0, 0, 0, 16));
    pgm_write(58, I(8'hb7, 3, 0, 0, 32'hffffffff));
    pgm_write(59, I(8'h65, 3, 0, 1, 0));     // jsgt r3, 0, +1 (not taken)
    pgm_write(60, I(8'h95, 0, 0, 0, 0));
    pgm_write(61, I(8'hb7, 0, 0, 0, 1));
    pgm_write(62, I(8'h95, 0, 0, 0, 0));

    // header bytes 8..15 = 00 11 22 33 44 55 66 77
    data_write(8, 64'h7766554433221100);

    run(0, cyc);
    chk(halt && !err && r0 == 12, $sformatf("A r0=%0d err=%0b", r0, err));
    chk(ticks == 6, $sformatf("A ticks=%0d (want 6: 2 cycles per instruction)", ticks));
    run(4, cyc);
    chk(r0 == 64'h11223344 && !err, $sformatf("B r0=%h", r0));
    chk(ticks == 3 + 2 + 2 + 2, $sformatf("B ticks=%0d", ticks));
    run(10, cyc);
    // u8 @9 = 0x11; u16 @10 = 0x3322; sum 0x3333; u32 @8 = 0x33221100; xor = 0x33222233
    chk(r0 == 64'h33222233 && !err, $sformatf("C r0=%h", r0));
    run(20, cyc);
    chk(r0 == 55 && !err, $sformatf("D r0=%0d", r0));
    chk(ticks == 4 + 10 * 6 + 2, $sformatf("D ticks=%0d", ticks));
    run(30, cyc);
    chk(r0 == 64'hDEAD_BEEF_0BAD_F00D && !err, $sformatf("E r0=%h", r0));
    run(40, cyc);
    chk(r0 == 21 + 64'h1234 && !err, $sformatf("F r0=%h", r0));
    run(50, cyc);
    chk(halt && err, "G illegal opcode must raise Error_out");
    run(52, cyc);
    chk(halt && err, "H out-of-range load must raise Error_out");
    run(56, cyc);
    chk(r0 == 64'h3412 && !err, $sformatf("J r0=%h", r0));
    // header must be kept across rule switches: rerun C
    run(10, cyc);
    chk(r0 == 64'h33222233, "C again");
    // while reset_in stays high the core must stay idle
    reset_in = 1; repeat (5) @(posedge clk);
    chk(!halt && ticks == 0, "idle in reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
