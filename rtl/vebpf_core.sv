// vebpf_core: the VeBPF CPU core, an eBPF-ISA processing element.
//
// Harvard machine with a 64-bit wide program memory, an 8-bit wide data
// memory, eleven 64-bit registers, an eBPF decoder and ALU. Execution is
// multi-cycle and not pipelined:
//   FETCH  program memory read at PC (one cycle, synchronous memory)
//   EXEC   decode and execute; ALU ops and jumps finish here
//   LDDW   second slot of the 64-bit immediate load
//   MEMRD  LDX: one data byte per cycle, little-endian assembly
//   MEMWR  ST/STX: one data byte per cycle
//   CALL   waits for the custom PL call handler (call_req/call_ack)
//   HALT   after exit or an error
// An ALU instruction or a jump takes 2 cycles, lddw 3, a load 2+n+1 and a
// store 2+n for an n-byte access.
//
// Rule switching: while reset_in is high the core is idle and the PC follows
// the figure's three-input mux: ip_next_eBPF_rule_in when
// enable_new_eBPF_rule_in is high, else 0. Releasing reset_in starts
// execution at that PC in the next cycle, so a core is switched to another
// rule already in its program memory in a single cycle. R1-R5 load R1_in..R5_in
// during reset (they are input registers), R10 points to the top of data
// memory (stack), the other registers clear.
//
// Outputs: Halt_out is high in HALT with the result in R0_out; Error_out is
// high if an illegal instruction, a data-memory access out of range or a PC
// beyond the program memory stopped the core; Ticks_out counts cycles from
// reset release to the exit instruction, inclusive.
//
// Ports and widths are the architecture's (12-bit program and rule
// addresses, 11-bit data address, 64-bit words and registers, separate
// program and data buses with ACKs). The state machine, the timing, the
// eBPF opcode coverage (no legacy packet loads or atomics), the call
// handshake and the stack placement are this design's choices.
module vebpf_core
  import vebpf_pkg::*;
#(
  parameter int unsigned PGM_DEPTH  = 4096,
  parameter int unsigned DATA_DEPTH = 2048
) (
  input  logic        clk_in,
  input  logic        rst,          // power-on reset of the bus handshakes
  input  logic        reset_in,     // core reset: idle and re-programmable while high
  input  logic [11:0] ip_next_eBPF_rule_in,
  input  logic        enable_new_eBPF_rule_in,
  input  logic [63:0] R1_in,
  input  logic [63:0] R2_in,
  input  logic [63:0] R3_in,
  input  logic [63:0] R4_in,
  input  logic [63:0] R5_in,
  // program shared bus
  input  logic [63:0] VeBPF_pgm_data_in,
  input  logic [11:0] VeBPF_pgm_addr_in,
  input  logic        VeBPF_pgm_en_in,
  output logic        VeBPF_pgm_ack_out,
  // data shared bus
  input  logic [63:0] VeBPF_data_word_in,
  input  logic [10:0] VeBPF_data_addr_in,
  input  logic        VeBPF_data_en_in,
  output logic        VeBPF_data_ack_out,
  // custom PL call handler
  output logic        call_req,
  output logic [31:0] call_id,
  input  logic        call_ack,
  input  logic [63:0] call_result,
  // results
  output logic [63:0] R0_out,
  output logic        Halt_out,
  output logic        Error_out,
  output logic [63:0] Ticks_out
);

  typedef enum logic [2:0] {S_FETCH, S_EXEC, S_LDDW, S_MEMRD, S_MEMWR, S_CALL, S_HALT} state_t;
  state_t state;

  logic [11:0] pc;
  logic [63:0] ir;
  decoded_t    d;
  logic [63:0] pgm_rdata;
  logic [11:0] pgm_raddr;

  // ---------------- memories and loader
  vebpf_pgm_mem #(.DEPTH(PGM_DEPTH)) u_pgm (
    .clk(clk_in), .rst(rst),
    .VeBPF_pgm_data_in, .VeBPF_pgm_addr_in, .VeBPF_pgm_en_in, .VeBPF_pgm_ack_out,
    .rd_addr(pgm_raddr), .rd_data(pgm_rdata)
  );

  logic        ld_we;
  logic [10:0] ld_addr;
  logic [7:0]  ld_wdata;
  vebpf_pkt_loader u_loader (
    .clk(clk_in), .rst(rst), .reset_in,
    .VeBPF_data_word_in, .VeBPF_data_addr_in, .VeBPF_data_en_in, .VeBPF_data_ack_out,
    .mem_we(ld_we), .mem_addr(ld_addr), .mem_wdata(ld_wdata), .busy()
  );

  logic        core_we;
  logic [10:0] core_waddr, dm_raddr;
  logic [7:0]  core_wdata, dm_rdata;
  vebpf_data_mem #(.DEPTH(DATA_DEPTH)) u_dmem (
    .clk(clk_in),
    .we(ld_we | core_we), .waddr(ld_we ? ld_addr : core_waddr), .wdata(ld_we ? ld_wdata : core_wdata),
    .raddr(dm_raddr), .rdata(dm_rdata)
  );

  // ---------------- decode, registers, ALU
  logic [63:0] cur;
  assign cur = (state == S_EXEC) ? pgm_rdata : ir;
  vebpf_decode u_dec (.instr(cur), .d(d));

  logic [63:0] dval, sval, rf_wd;
  logic        rf_we;
  logic [3:0]  rf_wa;
  vebpf_regfile u_rf (
    .clk(clk_in), .reset_in,
    .r_in({R5_in, R4_in, R3_in, R2_in, R1_in}), .fp_init(64'(DATA_DEPTH)),
    .ra(d.dst), .rb(d.src), .da(dval), .db(sval),
    .we(rf_we), .wa(rf_wa), .wd(rf_wd), .r0(R0_out)
  );

  logic [63:0] imm_sx, opb, alu_y, off_sx;
  assign imm_sx = {{32{d.imm[31]}}, d.imm};
  assign off_sx = {{48{d.off[15]}}, d.off};
  assign opb    = d.use_src ? sval : imm_sx;

  vebpf_alu u_alu (
    .op(d.op), .is64(d.cls == CLS_ALU64), .swap_be(d.use_src),
    .a(dval), .b((d.op == ALU_END) ? imm_sx : opb), .y(alu_y)
  );

  // ---------------- branch condition
  logic        taken;
  logic [63:0] ca, cb;
  always_comb begin
    if (d.cls == CLS_JMP32) begin
      ca = {32'd0, dval[31:0]};
      cb = {32'd0, opb[31:0]};
    end else begin
      ca = dval;
      cb = opb;
    end
    case (d.op)
      JMP_JA:   taken = 1'b1;
      JMP_JEQ:  taken = ca == cb;
      JMP_JNE:  taken = ca != cb;
      JMP_JGT:  taken = ca > cb;
      JMP_JGE:  taken = ca >= cb;
      JMP_JLT:  taken = ca < cb;
      JMP_JLE:  taken = ca <= cb;
      JMP_JSET: taken = (ca & cb) != 0;
      JMP_JSGT: taken = (d.cls == CLS_JMP32) ? $signed(ca[31:0]) >  $signed(cb[31:0]) : $signed(ca) >  $signed(cb);
      JMP_JSGE: taken = (d.cls == CLS_JMP32) ? $signed(ca[31:0]) >= $signed(cb[31:0]) : $signed(ca) >= $signed(cb);
      JMP_JSLT: taken = (d.cls == CLS_JMP32) ? $signed(ca[31:0]) <  $signed(cb[31:0]) : $signed(ca) <  $signed(cb);
      JMP_JSLE: taken = (d.cls == CLS_JMP32) ? $signed(ca[31:0]) <= $signed(cb[31:0]) : $signed(ca) <= $signed(cb);
      default:  taken = 1'b0;
    endcase
  end

  // ---------------- memory access bookkeeping
  logic [63:0] maddr_c;     // address computed in EXEC
  logic [3:0]  nbytes_c;
  logic        mem_oob;
  assign maddr_c  = ((d.cls == CLS_LDX) ? sval : dval) + off_sx;
  assign nbytes_c = size_bytes(d.size);
  assign mem_oob  = (maddr_c >= 64'(DATA_DEPTH)) || (maddr_c + 64'(nbytes_c) > 64'(DATA_DEPTH));

  logic [10:0] maddr;
  logic [3:0]  nbytes, cnt;
  logic [63:0] mdata;       // store data / load accumulator
  logic [3:0]  mdst;

  assign dm_raddr   = maddr + 11'(cnt);
  assign core_we    = (state == S_MEMWR);
  assign core_waddr = maddr + 11'(cnt);
  assign core_wdata = mdata[8*cnt[2:0] +: 8];

  logic [11:0] pc_next, pc_jump;
  assign pc_next = pc + 12'd1;
  assign pc_jump = pc + 12'd1 + d.off[11:0];

  assign pgm_raddr = (state == S_EXEC) ? pc_next : pc;

  // register write port
  always_comb begin
    rf_we = 1'b0;
    rf_wa = d.dst;
    rf_wd = alu_y;
    case (state)
      S_EXEC:  rf_we = !d.illegal && (d.cls == CLS_ALU || d.cls == CLS_ALU64);
      S_LDDW:  begin rf_we = 1'b1; rf_wd = {pgm_rdata[63:32], ir[63:32]}; end
      S_MEMRD: begin rf_we = (cnt == nbytes); rf_wa = mdst;
                     rf_wd = mdata | (64'(dm_rdata) << (8 * (nbytes - 4'd1))); end
      S_CALL:  begin rf_we = call_ack; rf_wa = 4'd0; rf_wd = call_result; end
      default: ;
    endcase
  end

  assign call_req = (state == S_CALL);
  assign call_id  = ir[63:32];
  assign Halt_out = (state == S_HALT);

  always_ff @(posedge clk_in) begin
    if (reset_in) begin
      state     <= S_FETCH;
      pc        <= enable_new_eBPF_rule_in ? ip_next_eBPF_rule_in : 12'd0;
      Error_out <= 1'b0;
      Ticks_out <= '0;
      cnt       <= '0;
      ir        <= '0;
    end else begin
      if (state != S_HALT) Ticks_out <= Ticks_out + 64'd1;
      case (state)
        S_FETCH: begin
          if (32'(pc) >= PGM_DEPTH) begin
            Error_out <= 1'b1;
            state     <= S_HALT;
          end else state <= S_EXEC;
        end
        S_EXEC: begin
          ir    <= pgm_rdata;
          pc    <= pc_next;
          state <= S_FETCH;
          if (d.illegal) begin
            Error_out <= 1'b1;
            state     <= S_HALT;
          end else case (d.cls)
            CLS_LD: state <= S_LDDW;
            CLS_LDX, CLS_ST, CLS_STX: begin
              if (mem_oob) begin
                Error_out <= 1'b1;
                state     <= S_HALT;
              end else begin
                maddr  <= maddr_c[10:0];
                nbytes <= nbytes_c;
                cnt    <= '0;
                mdst   <= d.dst;
                mdata  <= (d.cls == CLS_LDX) ? 64'd0 : (d.cls == CLS_ST) ? imm_sx : sval;
                state  <= (d.cls == CLS_LDX) ? S_MEMRD : S_MEMWR;
              end
            end
            CLS_JMP, CLS_JMP32: begin
              if (d.op == JMP_EXIT) begin
                pc    <= pc;
                state <= S_HALT;
              end else if (d.op == JMP_CALL) begin
                state <= S_CALL;
              end else if (taken) begin
                pc <= pc_jump;
              end
            end
            default: ;
          endcase
        end
        S_LDDW: begin
          pc    <= pc + 12'd1;   // already advanced once in EXEC
          state <= S_FETCH;
        end
        S_MEMRD: begin
          cnt <= cnt + 4'd1;
          if (cnt != 0) mdata <= mdata | (64'(dm_rdata) << (8 * (cnt - 4'd1)));
          if (cnt == nbytes) begin
            pc    <= pc;
            state <= S_FETCH;
          end
        end
        S_MEMWR: begin
          cnt <= cnt + 4'd1;
          if (cnt == nbytes - 4'd1) state <= S_FETCH;
        end
        S_CALL: if (call_ack) state <= S_FETCH;
        default: ; // S_HALT: wait for reset
      endcase
    end
  end

endmodule
