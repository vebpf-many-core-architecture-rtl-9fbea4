// vebpf_data_mem: 8-bit wide data memory of a VeBPF core.
//
// Holds the packet header written by the network packet loader and serves
// the core's byte-serial loads and stores (the eBPF stack lives at its top).
// One synchronous write port and one synchronous read port: rdata is the byte
// at raddr one cycle later. The 8-bit width and 11-bit address are the
// architecture's; the depth is a parameter because the architecture sizes it
// to the longest header of interest.
module vebpf_data_mem #(
  parameter int unsigned DEPTH = 2048
) (
  input  logic        clk,
  input  logic        we,
  input  logic [10:0] waddr,
  input  logic [7:0]  wdata,
  input  logic [10:0] raddr,
  output logic [7:0]  rdata
);

  localparam int unsigned AW = $clog2(DEPTH);
  logic [7:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr[AW-1:0]] <= wdata;
    rdata <= mem[raddr[AW-1:0]];
  end

endmodule
