// vebpf_uart_byte_rx: 8N1 UART byte receiver (helper of vebpf_uart_rx).
//
// The line idles high. A falling edge starts a frame; the start bit is
// checked half a bit later, then the eight data bits (LSB first) are sampled
// in the middle of each bit and the stop bit after them. byte_valid pulses for
// one cycle with the byte when the stop bit is high; frame_err pulses instead
// when it is low. The line is synchronised with two flip-flops.
// CLKS_PER_BIT = clock frequency / baud rate.
module vebpf_uart_byte_rx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rx,
  output logic       byte_valid,
  output logic [7:0] byte_data,
  output logic       frame_err
);

  typedef enum logic [1:0] {IDLE, START, DATA, STOP} state_t;
  state_t state;
  logic [1:0]  sync;
  logic [15:0] tick;
  logic [2:0]  bitn;
  logic        line;

  assign line = sync[1];

  always_ff @(posedge clk) begin
    if (rst) begin
      sync <= 2'b11;
      state <= IDLE;
      tick <= '0;
      bitn <= '0;
      byte_valid <= 1'b0;
      frame_err <= 1'b0;
      byte_data <= '0;
    end else begin
      sync <= {sync[0], rx};
      byte_valid <= 1'b0;
      frame_err <= 1'b0;
      case (state)
        IDLE: if (!line) begin
          state <= START;
          tick  <= '0;
        end
        START: if (32'(tick) == CLKS_PER_BIT / 2 - 1) begin
          tick  <= '0;
          bitn  <= '0;
          state <= line ? IDLE : DATA;
        end else tick <= tick + 16'd1;
        DATA: if (32'(tick) == CLKS_PER_BIT - 1) begin
          tick <= '0;
          byte_data <= {line, byte_data[7:1]};
          bitn <= bitn + 3'd1;
          if (bitn == 3'd7) state <= STOP;
        end else tick <= tick + 16'd1;
        default: if (32'(tick) == CLKS_PER_BIT - 1) begin
          tick  <= '0;
          state <= IDLE;
          if (line) byte_valid <= 1'b1;
          else      frame_err  <= 1'b1;
        end else tick <= tick + 16'd1;
      endcase
    end
  end

endmodule
