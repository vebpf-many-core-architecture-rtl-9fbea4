// tb_vebpf_decode: self-checking test of the eBPF instruction decoder.
//
// Feeds hand-encoded instructions and checks the decoded class, operation,
// source select, size, registers, offset, immediate, the lddw flag and the
// illegal flag for unsupported encodings (legacy packet loads, atomics,
// unknown ALU op, register numbers above R10, byte swap in ALU64, JMP32
// exit).
module tb_vebpf_decode;
  import vebpf_pkg::*;
  int checks = 0, failures = 0;
  logic [63:0] instr;
  decoded_t d;
  vebpf_decode dut (.instr, .d);

  function automatic logic [63:0] I(input logic [7:0] opc, input logic [3:0] dst, input logic [3:0] src,
                                    input logic [15:0] off, input logic [31:0] imm);
    return {imm, off, src, dst, opc};
  endfunction
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic ill(input logic [63:0] w, input logic exp, input string what);
    instr = w; #1;
    chk(d.illegal == exp, what);
  endtask

  initial begin
    instr = I(8'h0f, 3, 7, 16'h1234, 32'hCAFEBABE); #1;
    chk(d.cls == CLS_ALU64 && d.op == ALU_ADD && d.use_src && d.dst == 3 && d.src == 7 &&
        d.off == 16'h1234 && d.imm == 32'hCAFEBABE && !d.illegal && !d.is_lddw, "add64 reg");
    instr = I(8'h18, 1, 0, 0, 5); #1;
    chk(d.cls == CLS_LD && d.is_lddw && !d.illegal, "lddw");
    instr = I(8'h61, 2, 1, 4, 0); #1;
    chk(d.cls == CLS_LDX && d.size == 0 && !d.illegal, "ldxw");
    instr = I(8'h71, 2, 1, 4, 0); #1;
    chk(d.size == 2 && !d.illegal, "ldxb");
    instr = I(8'h7b, 10, 1, 16'hfff8, 0); #1;
    chk(d.cls == CLS_STX && d.size == 3 && !d.illegal, "stxdw");
    instr = I(8'h62, 10, 0, 16'hfffc, 7); #1;
    chk(d.cls == CLS_ST && d.size == 0 && !d.illegal, "stw");
    instr = I(8'h5d, 1, 2, 3, 0); #1;
    chk(d.cls == CLS_JMP && d.op == JMP_JNE && d.use_src && !d.illegal, "jne reg");
    instr = I(8'h95, 0, 0, 0, 0); #1;
    chk(d.op == JMP_EXIT && !d.illegal, "exit");
    instr = I(8'hdc, 0, 0, 0, 16); #1;
    chk(d.cls == CLS_ALU && d.op == ALU_END && d.use_src && !d.illegal, "be16");
    ill(I(8'h20, 0, 0, 0, 0), 1, "legacy ld abs");
    ill(I(8'h00, 0, 0, 0, 0), 1, "opcode 0");
    ill(I(8'hdb, 1, 2, 0, 0), 1, "atomic");
    ill(I(8'he7, 1, 0, 0, 0), 1, "alu op 0xe");
    ill(I(8'h07, 11, 0, 0, 0), 1, "dst R11");
    ill(I(8'h0f, 1, 12, 0, 0), 1, "src R12");
    ill(I(8'hd7, 1, 0, 0, 16), 1, "end in alu64");
    ill(I(8'h96, 0, 0, 0, 0), 1, "jmp32 exit");
    ill(I(8'h16, 1, 0, 2, 5), 0, "jmp32 jeq");
    ill(I(8'h85, 0, 0, 0, 1), 0, "call");
    ill(I(8'hc4, 1, 0, 0, 3), 0, "arsh32");
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
