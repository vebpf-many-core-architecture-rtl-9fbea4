// vebpf_decode: eBPF instruction decoder of the VeBPF core.
//
// Splits a 64-bit program word, laid out as eBPF stores it in little-endian
// order (opcode [7:0], dst [11:8], src [15:12], offset [31:16], imm [63:32]),
// into the fields of vebpf_pkg::decoded_t. It marks as illegal what this
// core does not execute: unknown ALU or jump operations, registers above R10,
// LD other than the 64-bit immediate load (lddw), LDX/ST/STX in a mode other
// than MEM, and END outside the 32-bit ALU class. The field layout is the
// eBPF one; which encodings count as illegal is this design's choice.
// Purely combinational.
module vebpf_decode
  import vebpf_pkg::*;
(
  input  logic [63:0] instr,
  output decoded_t    d
);

  logic [7:0] opc;
  logic [2:0] mode;

  always_comb begin
    opc       = instr[7:0];
    mode      = opc[7:5];
    d.cls     = opc[2:0];
    d.op      = opc[7:4];
    d.use_src = opc[3];
    d.size    = opc[4:3];
    d.dst     = instr[11:8];
    d.src     = instr[15:12];
    d.off     = instr[31:16];
    d.imm     = instr[63:32];
    d.is_lddw = (opc == 8'h18);
    d.illegal = 1'b0;
    case (d.cls)
      CLS_LD:  d.illegal = !d.is_lddw;
      CLS_LDX, CLS_ST, CLS_STX: d.illegal = (mode != 3'h3);
      CLS_ALU, CLS_ALU64: begin
        if (d.op > ALU_END) d.illegal = 1'b1;
        if (d.op == ALU_END && d.cls != CLS_ALU) d.illegal = 1'b1;
      end
      default: begin // JMP / JMP32
        if (d.op > JMP_JSLE) d.illegal = 1'b1;
        if (d.cls == CLS_JMP32 && (d.op == JMP_JA || d.op == JMP_CALL || d.op == JMP_EXIT))
          d.illegal = 1'b1;
      end
    endcase
    if (d.dst > 4'd10 || d.src > 4'd10) d.illegal = 1'b1;
  end

endmodule
