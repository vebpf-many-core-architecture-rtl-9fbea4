// vebpf_pkg: widths, eBPF opcode fields, decoded-instruction struct and the
// result codes shared by the VeBPF core and the many-core control modules.
//
// Widths printed on the block diagrams are used as they are: 64-bit program
// words with a 12-bit program address, 64-bit data words with an 11-bit data
// address, 12-bit rule counts, 8-bit core grant ids and 8-bit R0 results.
// The eBPF field layout and opcode values follow the eBPF instruction set.
// The four result codes (don't care / drop / store / error) are this design's
// own numbering; only their meaning comes from the architecture description.
package vebpf_pkg;

  localparam int unsigned PGM_AW  = 12;  // program memory address bits
  localparam int unsigned DATA_AW = 11;  // data memory address bits
  localparam int unsigned RULE_W  = 12;  // rule index / rule count bits
  localparam int unsigned GID_W   = 8;   // core grant id bits
  localparam int unsigned RES_W   = 8;   // forwarded R0 result bits

  // eBPF instruction classes (opcode[2:0])
  localparam logic [2:0] CLS_LD    = 3'h0;
  localparam logic [2:0] CLS_LDX   = 3'h1;
  localparam logic [2:0] CLS_ST    = 3'h2;
  localparam logic [2:0] CLS_STX   = 3'h3;
  localparam logic [2:0] CLS_ALU   = 3'h4;
  localparam logic [2:0] CLS_JMP   = 3'h5;
  localparam logic [2:0] CLS_JMP32 = 3'h6;
  localparam logic [2:0] CLS_ALU64 = 3'h7;

  // ALU operations (opcode[7:4])
  localparam logic [3:0] ALU_ADD = 4'h0, ALU_SUB = 4'h1, ALU_MUL = 4'h2, ALU_DIV = 4'h3,
                         ALU_OR  = 4'h4, ALU_AND = 4'h5, ALU_LSH = 4'h6, ALU_RSH = 4'h7,
                         ALU_NEG = 4'h8, ALU_MOD = 4'h9, ALU_XOR = 4'ha, ALU_MOV = 4'hb,
                         ALU_ARSH = 4'hc, ALU_END = 4'hd;

  // Jump operations (opcode[7:4])
  localparam logic [3:0] JMP_JA = 4'h0, JMP_JEQ = 4'h1, JMP_JGT = 4'h2, JMP_JGE = 4'h3,
                         JMP_JSET = 4'h4, JMP_JNE = 4'h5, JMP_JSGT = 4'h6, JMP_JSGE = 4'h7,
                         JMP_CALL = 4'h8, JMP_EXIT = 4'h9, JMP_JLT = 4'ha, JMP_JLE = 4'hb,
                         JMP_JSLT = 4'hc, JMP_JSLE = 4'hd;

  // Result codes carried in the low byte of R0
  localparam logic [RES_W-1:0] RES_DONT_CARE = 8'h00;
  localparam logic [RES_W-1:0] RES_DROP      = 8'h01;
  localparam logic [RES_W-1:0] RES_STORE     = 8'h02;
  localparam logic [RES_W-1:0] RES_ERROR     = 8'h03;

  typedef struct packed {
    logic [2:0]  cls;      // instruction class
    logic [3:0]  op;       // ALU or jump operation
    logic        use_src;  // source is register (1) or immediate (0)
    logic [1:0]  size;     // memory size: 0 W, 1 H, 2 B, 3 DW
    logic [3:0]  dst;
    logic [3:0]  src;
    logic [15:0] off;
    logic [31:0] imm;
    logic        is_lddw;  // two-slot 64-bit immediate load
    logic        illegal;  // encoding not supported
  } decoded_t;

  // number of bytes of an eBPF memory size field
  function automatic logic [3:0] size_bytes(input logic [1:0] sz);
    case (sz)
      2'd0: return 4'd4;
      2'd1: return 4'd2;
      2'd2: return 4'd1;
      default: return 4'd8;
    endcase
  endfunction

endpackage
