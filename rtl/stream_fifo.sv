// stream_fifo -- synchronous first-word-fall-through FIFO.
//
// Carries input pixels, weights and output pixels between the memory-side
// blocks and the compute units, which is how the accelerator decouples its
// external memory traffic from computation. The paper names these FIFOs but
// not their depth or handshake; the valid/ready handshake and the depths used
// by the top are this design's choices.
//
// Interface: in_valid/in_ready/in_data is the write side (a word is taken in
// the cycle both are high); out_valid/out_ready/out_data is the read side,
// with out_data showing the oldest word whenever out_valid is high.
// Timing: a word written in cycle n can be read in cycle n+1. DEPTH may be any
// value of 2 or more.
module stream_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;

  wire push = in_valid  && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // Handshake rules: never write when full, never read when empty.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> count < ($clog2(DEPTH+1))'(DEPTH));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> count != '0);

endmodule
