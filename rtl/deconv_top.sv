// deconv_top -- deconvolution accelerator: a SIMD array of compute units fed
// and drained by pipelined memory stages.
//
// The accelerator computes one deconvolution layer per start. It loops over the
// output space: the output feature map is cut into T_O x T_O tiles, which need
// no overlapping sums, so each tile is computed whole by one of N_CU identical
// compute units (spatial parallelism). Around the CU array four stages run as a
// pipeline (temporal parallelism): the offset cache precomputes the modulo
// arithmetic of the layer; the input read and weight read stages fetch input
// blocks and weight blocks from external memory, each over its own read port,
// and stream them into per-CU FIFOs; the CUs compute; and the output write
// stage streams finished tiles from per-CU FIFOs to external memory over a
// write port. The FIFOs decouple memory traffic from compute, so the next
// blocks are fetched while the CUs work.
//
// Structure, stage split, 16 CUs, the tile size T_O = 12 (the value chosen for
// the MNIST network; 24 was chosen for CelebA), 32-bit fixed point and zero
// skipping follow the paper. The largest kernel K_MAX, the FIFO depths, the
// AXI4-Lite style ports and the configuration struct are this design's
// choices. The three memory ports are the accelerator's masters; an AXI
// interconnect and the DDR controller (not part of this design) join them to
// memory.
//
// Interface: set cfg, pulse start; busy is high until done pulses. err with
// done flags a layer outside what the design runs (see offset_cache). cycles
// holds the cycle count of the last layer.
//
// The per-stage busy and event signals (ir_zero, ir_stall, wr_stall, cu_skip,
// cu_mac, ow_drop, ...) and the FIFOs' fill counts are left unconnected to any
// port on purpose: they are probe points for simulation and for performance
// counters a user may add, and lint reports them as unused.
module deconv_top
  import deconv_pkg::*;
#(
  parameter int N_CU   = 16,
  parameter int T_O    = 12,
  parameter int K_MAX  = 8,
  parameter int OUTST  = 16,
  parameter int XF_DEPTH = (T_O + K_MAX) * (T_O + K_MAX),  // one input block
  parameter int WF_DEPTH = K_MAX * K_MAX + 1,              // bias + one weight block
  parameter int YF_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  layer_cfg_t  cfg,
  output logic        busy,
  output logic        done,
  output logic        err,
  output logic [31:0] cycles,
  // input read port
  output logic        in_ar_valid,
  input  logic        in_ar_ready,
  output addr_t       in_ar_addr,
  input  logic        in_r_valid,
  output logic        in_r_ready,
  input  data_t       in_r_data,
  // weight read port
  output logic        wt_ar_valid,
  input  logic        wt_ar_ready,
  output addr_t       wt_ar_addr,
  input  logic        wt_r_valid,
  output logic        wt_r_ready,
  input  data_t       wt_r_data,
  // output write port
  output logic        out_aw_valid,
  input  logic        out_aw_ready,
  output addr_t       out_aw_addr,
  output logic        out_w_valid,
  input  logic        out_w_ready,
  output data_t       out_w_data,
  input  logic        out_b_valid,
  output logic        out_b_ready
);
  localparam int DW = $clog2(N_CU);

  layer_cfg_t cfg_q;
  logic oc_start, oc_done, cfg_ok, go, ir_done, wr_done, ow_done;
  logic ctrl_busy;

  // ---- layer constants from the offset cache ----
  kp_t        f_tab [K_MAX];
  logic [7:0] g_tab [K_MAX];
  logic [7:0] t_i, j_cnt, b_off;
  dim_t       n_th, n_tw;
  logic [31:0] n_tiles;

  layer_controller u_ctrl (
    .clk, .rst_n, .start, .cfg, .cfg_q,
    .oc_start, .oc_done, .cfg_ok,
    .go, .ir_done, .wr_done, .ow_done,
    .busy(ctrl_busy), .done, .err, .cycles
  );

  offset_cache #(.T_O(T_O), .K_MAX(K_MAX)) u_offsets (
    .clk, .rst_n, .start(oc_start),
    .k(cfg_q.k), .s(cfg_q.s), .p(cfg_q.p), .oh(cfg_q.oh), .ow(cfg_q.ow), .oc(cfg_q.oc),
    .done(oc_done), .cfg_ok, .f_tab, .g_tab, .t_i, .j_cnt, .b_off, .n_th, .n_tw, .n_tiles
  );

  // ---- input and weight read stages ----
  logic          ir_valid, wr_valid;
  data_t         ir_data, wr_data;
  logic [DW-1:0] ir_dst, wr_dst;
  logic [N_CU-1:0] xf_ready, wf_ready;
  logic ir_busy, wr_busy, ir_zero, ir_stall, wr_stall;

  input_read #(.N_CU(N_CU), .OUTST(OUTST)) u_input_read (
    .clk, .rst_n, .start(go), .cfg(cfg_q), .t_i, .j_cnt, .b_off, .n_th, .n_tw, .n_tiles,
    .ar_valid(in_ar_valid), .ar_ready(in_ar_ready), .ar_addr(in_ar_addr),
    .r_valid(in_r_valid), .r_ready(in_r_ready), .r_data(in_r_data),
    .out_valid(ir_valid), .out_data(ir_data), .out_dst(ir_dst), .dst_ready(xf_ready),
    .busy(ir_busy), .done(ir_done), .evt_zero(ir_zero), .evt_stall(ir_stall)
  );

  weight_read #(.N_CU(N_CU), .OUTST(OUTST)) u_weight_read (
    .clk, .rst_n, .start(go), .cfg(cfg_q), .n_th, .n_tw, .n_tiles,
    .ar_valid(wt_ar_valid), .ar_ready(wt_ar_ready), .ar_addr(wt_ar_addr),
    .r_valid(wt_r_valid), .r_ready(wt_r_ready), .r_data(wt_r_data),
    .out_valid(wr_valid), .out_data(wr_data), .out_dst(wr_dst), .dst_ready(wf_ready),
    .busy(wr_busy), .done(wr_done), .evt_stall(wr_stall)
  );

  // ---- CU array with its FIFOs ----
  logic [N_CU-1:0] yf_valid, yf_ready, cu_busy, cu_skip, cu_mac;
  data_t           yf_data [N_CU];

  for (genvar i = 0; i < N_CU; i++) begin : g_cu
    logic  x_valid, x_ready, w_valid, w_ready, y_valid, y_ready;
    data_t x_data, w_data, y_data;

    stream_fifo #(.WIDTH(DATA_W), .DEPTH(XF_DEPTH)) u_xf (
      .clk, .rst_n,
      .in_valid(ir_valid && ir_dst == DW'(i)), .in_ready(xf_ready[i]), .in_data(ir_data),
      .out_valid(x_valid), .out_ready(x_ready), .out_data(x_data), .count()
    );
    stream_fifo #(.WIDTH(DATA_W), .DEPTH(WF_DEPTH)) u_wf (
      .clk, .rst_n,
      .in_valid(wr_valid && wr_dst == DW'(i)), .in_ready(wf_ready[i]), .in_data(wr_data),
      .out_valid(w_valid), .out_ready(w_ready), .out_data(w_data), .count()
    );
    compute_unit #(.T_O(T_O), .K_MAX(K_MAX)) u_cu (
      .clk, .rst_n,
      .n_ic(cfg_q.ic), .k(cfg_q.k), .s(cfg_q.s), .zero_skip(cfg_q.zero_skip),
      .t_i, .j_cnt, .f_tab, .g_tab,
      .x_valid, .x_ready, .x_data,
      .w_valid, .w_ready, .w_data,
      .y_valid, .y_ready, .y_data,
      .busy(cu_busy[i]), .evt_skip(cu_skip[i]), .evt_mac(cu_mac[i])
    );
    stream_fifo #(.WIDTH(DATA_W), .DEPTH(YF_DEPTH)) u_yf (
      .clk, .rst_n,
      .in_valid(y_valid), .in_ready(y_ready), .in_data(y_data),
      .out_valid(yf_valid[i]), .out_ready(yf_ready[i]), .out_data(yf_data[i]), .count()
    );
  end

  // ---- output write stage ----
  logic ow_busy, ow_drop;

  output_write #(.N_CU(N_CU), .T_O(T_O)) u_output_write (
    .clk, .rst_n, .start(go), .cfg(cfg_q), .n_th, .n_tw,
    .in_valid(yf_valid), .in_ready(yf_ready), .in_data(yf_data),
    .aw_valid(out_aw_valid), .aw_ready(out_aw_ready), .aw_addr(out_aw_addr),
    .w_valid(out_w_valid), .w_ready(out_w_ready), .w_data(out_w_data),
    .b_valid(out_b_valid), .b_ready(out_b_ready),
    .busy(ow_busy), .done(ow_done), .evt_drop(ow_drop)
  );

  assign busy = ctrl_busy;

endmodule
