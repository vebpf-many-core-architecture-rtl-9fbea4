// vebpf_alu: combinational eBPF ALU of the VeBPF core.
//
// Computes one ALU or ALU64 operation of the eBPF instruction set on the
// destination operand a and the source operand b (register or sign-extended
// immediate, chosen by the core). With is64 low the operation is done on the
// low 32 bits and the result is zero-extended, as eBPF's ALU class requires.
// Shifts mask their amount to 6 (64-bit) or 5 (32-bit) bits. Division and
// modulo are unsigned; by zero, division gives 0 and modulo leaves a unchanged
// (the current eBPF rule). END (byte swap) converts the low b[6:0] bits
// (16, 32 or 64) to big-endian when swap_be is set, otherwise truncates them.
// The block diagram gives only the name "ALU"; the operation set is eBPF's.
// Purely combinational: the result is valid in the cycle the inputs are.
module vebpf_alu
  import vebpf_pkg::*;
(
  input  logic [3:0]  op,
  input  logic        is64,
  input  logic        swap_be,
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic [63:0] y
);

  logic [63:0] r64;
  logic [31:0] r32, a32, b32;

  function automatic logic [63:0] bswap(input logic [63:0] v, input logic [6:0] w);
    logic [63:0] s;
    s = '0;
    case (w)
      7'd16:   s = {48'd0, v[7:0], v[15:8]};
      7'd32:   s = {32'd0, v[7:0], v[15:8], v[23:16], v[31:24]};
      default: s = {v[7:0], v[15:8], v[23:16], v[31:24], v[39:32], v[47:40], v[55:48], v[63:56]};
    endcase
    return s;
  endfunction

  always_comb begin
    a32 = a[31:0];
    b32 = b[31:0];
    r64 = a;
    r32 = a32;
    case (op)
      ALU_ADD:  begin r64 = a + b;              r32 = a32 + b32; end
      ALU_SUB:  begin r64 = a - b;              r32 = a32 - b32; end
      ALU_MUL:  begin r64 = a * b;              r32 = a32 * b32; end
      ALU_DIV:  begin r64 = (b == 0) ? 64'd0 : a / b; r32 = (b32 == 0) ? 32'd0 : a32 / b32; end
      ALU_OR:   begin r64 = a | b;              r32 = a32 | b32; end
      ALU_AND:  begin r64 = a & b;              r32 = a32 & b32; end
      ALU_LSH:  begin r64 = a << b[5:0];        r32 = a32 << b32[4:0]; end
      ALU_RSH:  begin r64 = a >> b[5:0];        r32 = a32 >> b32[4:0]; end
      ALU_NEG:  begin r64 = -a;                 r32 = -a32; end
      ALU_MOD:  begin r64 = (b == 0) ? a : a % b; r32 = (b32 == 0) ? a32 : a32 % b32; end
      ALU_XOR:  begin r64 = a ^ b;              r32 = a32 ^ b32; end
      ALU_MOV:  begin r64 = b;                  r32 = b32; end
      ALU_ARSH: begin r64 = $unsigned($signed(a) >>> b[5:0]); r32 = $unsigned($signed(a32) >>> b32[4:0]); end
      ALU_END:  begin
        if (swap_be) r64 = bswap(a, b[6:0]);
        else case (b[6:0])
          7'd16:   r64 = {48'd0, a[15:0]};
          7'd32:   r64 = {32'd0, a[31:0]};
          default: r64 = a;
        endcase
        r32 = r64[31:0];
      end
      default:  begin r64 = a;                  r32 = a32; end
    endcase
    // END always works on the full width; other ops honour is64
    y = (is64 || op == ALU_END) ? r64 : {32'd0, r32};
  end

endmodule
