// vebpf_instr_uploader: VeBPF Multi-core Multi-rule Instructions Uploader.
//
// When the parser reports the rule set complete (VeBPF_rules_available_flag,
// no Error_flag) the uploader drains the eBPF Rules FIFO into the program
// memories of all cores at once over the shared program bus: instruction k
// goes to address k. For each word it drives data, address and
// VeBPF_pgm_en, waits for the AND of all cores' ACKs, pops the word, drops
// the enable and waits until all ACKs have fallen (four-phase handshake).
// When the FIFO is empty All_eBPF_rules_uploaded_flag rises and stays high
// until VeBPF_rst_new_rules_flag starts a new rule set.
// Bus, ACK reduction and flag are the architecture's; the handshake detail
// is this design's.
module vebpf_instr_uploader #(
  parameter int unsigned N_VEBPF = 12
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               VeBPF_rules_available_flag,
  input  logic               VeBPF_rst_new_rules_flag,
  input  logic               Error_flag,
  output logic               fifo_rd,
  input  logic [63:0]        fifo_data,
  input  logic               fifo_empty,
  output logic [63:0]        VeBPF_pgm_data,
  output logic [11:0]        VeBPF_pgm_addr,
  output logic               VeBPF_pgm_en,
  input  logic [N_VEBPF-1:0] VeBPF_pgm_ack_out,
  output logic               All_eBPF_rules_uploaded_flag
);

  typedef enum logic [1:0] {IDLE, WRITE, WAITLOW, DONE} state_t;
  state_t state;

  assign VeBPF_pgm_en   = (state == WRITE) && !fifo_empty;
  assign VeBPF_pgm_data = fifo_data;
  assign fifo_rd        = VeBPF_pgm_en && (&VeBPF_pgm_ack_out);
  assign All_eBPF_rules_uploaded_flag = (state == DONE);

  always_ff @(posedge clk) begin
    if (rst || VeBPF_rst_new_rules_flag) begin
      state <= IDLE;
      VeBPF_pgm_addr <= '0;
    end else begin
      case (state)
        IDLE: if (VeBPF_rules_available_flag && !Error_flag) begin
          state <= WRITE;
          VeBPF_pgm_addr <= '0;
        end
        WRITE: begin
          if (fifo_empty) state <= DONE;
          else if (&VeBPF_pgm_ack_out) state <= WAITLOW;
        end
        WAITLOW: if (!(|VeBPF_pgm_ack_out)) begin
          VeBPF_pgm_addr <= VeBPF_pgm_addr + 12'd1;
          state <= WRITE;
        end
        default: ;
      endcase
    end
  end

endmodule
