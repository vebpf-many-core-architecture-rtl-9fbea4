// tb_vebpf_alu: self-checking test of the combinational eBPF ALU.
//
// Directed vectors with hand-computed results for every operation in 64- and
// 32-bit form (wrap-around, zero-extension of 32-bit results, shift masking,
// arithmetic shift, divide and modulo by zero, byte swaps), then 2000 random
// vectors against a behavioural model written in the testbench. Being
// combinational, each result is checked 1 ns after the inputs change.
module tb_vebpf_alu;
  import vebpf_pkg::*;
  int checks = 0, failures = 0;
  logic [3:0] op; logic is64, be; logic [63:0] a, b, y;
  vebpf_alu dut (.op, .is64, .swap_be(be), .a, .b, .y);

  task automatic t(input logic [3:0] o, input logic w, input logic [63:0] x, input logic [63:0] z,
                   input logic [63:0] exp);
    op = o; is64 = w; be = 0; a = x; b = z; #1;
    checks++;
    if (y !== exp) begin failures++; $display("FAIL op=%h is64=%0b a=%h b=%h y=%h exp=%h", o, w, x, z, y, exp); end
  endtask

  function automatic logic [63:0] model(input logic [3:0] o, input logic w, input logic [63:0] x, input logic [63:0] z);
    logic [63:0] r;
    logic [31:0] x3, z3, r3;
    x3 = x[31:0]; z3 = z[31:0];
    if (w) begin
      case (o)
        0: r = x + z;  1: r = x - z;  2: r = x * z;
        3: r = z == 0 ? 0 : x / z;    4: r = x | z;  5: r = x & z;
        6: r = x << (z & 63);         7: r = x >> (z & 63);
        8: r = 0 - x;                 9: r = z == 0 ? x : x % z;
        10: r = x ^ z; 11: r = z;     12: r = 64'($signed(x) >>> (z & 63));
        default: r = x;
      endcase
      return r;
    end
    case (o)
      0: r3 = x3 + z3;  1: r3 = x3 - z3;  2: r3 = x3 * z3;
      3: r3 = z3 == 0 ? 0 : x3 / z3;      4: r3 = x3 | z3;  5: r3 = x3 & z3;
      6: r3 = x3 << (z3 & 31);            7: r3 = x3 >> (z3 & 31);
      8: r3 = 0 - x3;                     9: r3 = z3 == 0 ? x3 : x3 % z3;
      10: r3 = x3 ^ z3; 11: r3 = z3;      12: r3 = 32'($signed(x3) >>> (z3 & 31));
      default: r3 = x3;
    endcase
    return {32'd0, r3};
  endfunction

  initial begin
    t(ALU_ADD, 1, 64'hFFFF_FFFF_FFFF_FFFF, 1, 0);
    t(ALU_ADD, 0, 64'h1_FFFF_FFFF, 1, 0);
    t(ALU_SUB, 1, 0, 1, 64'hFFFF_FFFF_FFFF_FFFF);
    t(ALU_SUB, 0, 0, 1, 64'h0000_0000_FFFF_FFFF);
    t(ALU_MUL, 1, 64'h1_0000_0000, 3, 64'h3_0000_0000);
    t(ALU_DIV, 1, 100, 7, 14);
    t(ALU_DIV, 1, 100, 0, 0);
    t(ALU_MOD, 1, 100, 7, 2);
    t(ALU_MOD, 1, 100, 0, 100);
    t(ALU_OR, 1, 64'hF0, 64'h0F, 64'hFF);
    t(ALU_AND, 1, 64'hF0, 64'h3C, 64'h30);
    t(ALU_LSH, 1, 1, 65, 2);                 // amount masked to 6 bits
    t(ALU_LSH, 0, 1, 33, 2);                 // amount masked to 5 bits
    t(ALU_RSH, 1, 64'h8000_0000_0000_0000, 63, 1);
    t(ALU_ARSH, 1, 64'h8000_0000_0000_0000, 63, 64'hFFFF_FFFF_FFFF_FFFF);
    t(ALU_ARSH, 0, 64'h8000_0000, 4, 64'hF800_0000);
    t(ALU_NEG, 1, 1, 0, 64'hFFFF_FFFF_FFFF_FFFF);
    t(ALU_XOR, 1, 64'hFF, 64'h0F, 64'hF0);
    t(ALU_MOV, 0, 0, 64'hFFFF_FFFF_FFFF_FFFF, 64'hFFFF_FFFF);
    t(ALU_MOV, 1, 0, 64'h1234_5678_9ABC_DEF0, 64'h1234_5678_9ABC_DEF0);
    // byte order conversion
    op = ALU_END; is64 = 0; be = 1; a = 64'h1122334455667788;
    b = 16; #1; checks++; if (y !== 64'h8877) begin failures++; $display("FAIL be16 %h", y); end
    b = 32; #1; checks++; if (y !== 64'h88776655) begin failures++; $display("FAIL be32 %h", y); end
    b = 64; #1; checks++; if (y !== 64'h8877665544332211) begin failures++; $display("FAIL be64 %h", y); end
    be = 0;
    b = 16; #1; checks++; if (y !== 64'h7788) begin failures++; $display("FAIL le16 %h", y); end
    b = 32; #1; checks++; if (y !== 64'h55667788) begin failures++; $display("FAIL le32 %h", y); end
    // random vectors
    for (int i = 0; i < 2000; i++) begin
      logic [3:0] o; logic w; logic [63:0] x, z;
      o = 4'($urandom_range(0, 12)); w = 1'($urandom);
      x = {$urandom, $urandom}; z = {$urandom, $urandom};
      if ($urandom_range(0, 7) == 0) z = 0;
      if (o == ALU_LSH || o == ALU_RSH || o == ALU_ARSH) z = 64'($urandom_range(0, 80));
      t(o, w, x, z, model(o, w, x, z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
