// read_engine -- ordered external-memory read engine shared by the input and
// weight read blocks.
//
// An address generator hands it one request per word: a byte address and the
// compute unit (destination) the word is for, or a "zero" request for a padded
// pixel outside the feature map, which is answered with 0 and no memory access.
// Memory requests go out on an AXI4-Lite style read address channel (ar_*) and
// come back in order on the read data channel (r_*). A tag FIFO remembers, per
// request in flight, its destination and whether it is a zero, so words leave
// (out_*) in request order and zeros keep their place between memory words.
// Up to OUTST requests can be in flight, which lets the reads stream back to
// back. A word leaves only when its destination's FIFO can take it (dst_ready);
// otherwise the engine stalls and memory sees r_ready low.
//
// The paper says inputs and weights are read sequentially over AXI into
// on-chip FIFOs; the tag FIFO, the zero requests and the channel subset are
// this design's choices. Only single-beat reads are issued; the read response
// code is not checked.
//
// ar_addr is req_addr itself, not a copy: a request is accepted only in the
// cycle the address is taken (or for a zero request, never sent), so no
// register is needed. The tag FIFO's fill count is not used.
module read_engine
  import deconv_pkg::*;
#(
  parameter int N_DST = 16,
  parameter int OUTST = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // requests from the address generator
  input  logic                      req_valid,
  output logic                      req_ready,
  input  logic                      req_zero,
  input  addr_t                     req_addr,
  input  logic [$clog2(N_DST)-1:0]  req_dst,
  // AXI4-Lite style read channels
  output logic                      ar_valid,
  input  logic                      ar_ready,
  output addr_t                     ar_addr,
  input  logic                      r_valid,
  output logic                      r_ready,
  input  data_t                     r_data,
  // words to the destination FIFOs
  output logic                      out_valid,
  output data_t                     out_data,
  output logic [$clog2(N_DST)-1:0]  out_dst,
  input  logic [N_DST-1:0]          dst_ready,
  output logic                      idle,       // nothing in flight
  output logic                      evt_zero,   // a padding zero left this cycle
  output logic                      evt_stall   // a ready word waited for its FIFO
);
  localparam int DW = $clog2(N_DST);

  logic          tag_in_ready, tag_valid, tag_pop;
  logic [DW:0]   tag_head;
  logic [$clog2(OUTST+1)-1:0] tag_count;

  assign ar_valid  = req_valid && !req_zero && tag_in_ready;
  assign ar_addr   = req_addr;
  assign req_ready = tag_in_ready && (req_zero || ar_ready);

  stream_fifo #(.WIDTH(DW + 1), .DEPTH(OUTST)) u_tags (
    .clk, .rst_n,
    .in_valid (req_valid && req_ready),
    .in_ready (tag_in_ready),
    .in_data  ({req_zero, req_dst}),
    .out_valid(tag_valid),
    .out_ready(tag_pop),
    .out_data (tag_head),
    .count    (tag_count)
  );

  wire head_zero = tag_head[DW];
  assign out_dst   = tag_head[DW-1:0];
  assign out_valid = tag_valid && (head_zero || r_valid);
  assign out_data  = head_zero ? '0 : r_data;
  assign r_ready   = tag_valid && !head_zero && dst_ready[out_dst];
  assign tag_pop   = out_valid && dst_ready[out_dst];
  assign idle      = !tag_valid;
  assign evt_zero  = tag_pop && head_zero;
  assign evt_stall = out_valid && !dst_ready[out_dst];

  // AXI rule: an address, once offered, stays until it is taken.
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    ar_valid && !ar_ready |=> ar_valid && $stable(ar_addr));
  // No read data may arrive that was not asked for.
  a_r_expected: assert property (@(posedge clk) disable iff (!rst_n)
    r_valid && r_ready |-> tag_valid && !head_zero);

endmodule
