// vebpf_regfile: the eleven 64-bit eBPF registers R0-R10 of a VeBPF core.
//
// Two combinational read ports (da, db) and one synchronous write port.
// While reset_in is high the core is idle: R1-R5 are loaded from the
// R1_in..R5_in inputs (the architecture keeps them as input registers that a
// reset does not clear), R0 and R6-R9 are cleared, and R10, the read-only
// frame pointer, is set to fp_init (the top of data memory in this design).
// Writes to R10 or to a register number above 10 are ignored. r0 mirrors R0
// for the core's R0_out port. Timing: a write lands at the next clock edge.
module vebpf_regfile #(
  parameter int unsigned NREGS = 11
) (
  input  logic              clk,
  input  logic              reset_in,
  input  logic [4:0][63:0]  r_in,      // index 0 = R1_in ... 4 = R5_in
  input  logic [63:0]       fp_init,
  input  logic [3:0]        ra,
  input  logic [3:0]        rb,
  output logic [63:0]       da,
  output logic [63:0]       db,
  input  logic              we,
  input  logic [3:0]        wa,
  input  logic [63:0]       wd,
  output logic [63:0]       r0
);

  logic [63:0] regs [NREGS];

  always_ff @(posedge clk) begin
    if (reset_in) begin
      for (int i = 0; i < NREGS; i++) begin
        if (i >= 1 && i <= 5)      regs[i] <= r_in[i-1];
        else if (i == NREGS - 1)   regs[i] <= fp_init;
        else                       regs[i] <= '0;
      end
    end else if (we && wa < 4'(NREGS - 1)) begin
      regs[wa] <= wd;
    end
  end

  assign da = (ra < 4'(NREGS)) ? regs[ra] : '0;
  assign db = (rb < 4'(NREGS)) ? regs[rb] : '0;
  assign r0 = regs[0];

endmodule
