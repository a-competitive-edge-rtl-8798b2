// bram_sdp -- simple dual-port block RAM: one write port, one registered read port.
//
// Used for the three on-chip buffers of each compute unit (x_buffer for the
// input block, w_buffer for the weight block, y_buffer for the output block),
// which the paper places in FPGA block RAM. The read port has an enable: the
// registered output holds its value while re is low, so a consumer can stall
// without losing a word.
//
// Timing: raddr presented with re=1 in cycle n gives rdata in cycle n+1. A
// read and a write to the same address in the same cycle return the old word
// (read-first), which the compute unit's schedule relies on not happening.
module bram_sdp #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
