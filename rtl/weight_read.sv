// weight_read -- weight read stage: streams bias and weights to the compute units.
//
// Tiles are grouped and assigned to CUs as in the input read stage (tile t on
// CU t mod N_CU). For each group this block first sends every CU of the group
// the bias of its tile's output channel (the value its output block starts
// from), then, input channel by input channel, each CU its K x K weight block
// w[oc][ic][.][.], row by row. Words go through the shared ordered read engine into the CU's weight
// FIFO. Reading weights in a block of its own, concurrently with the input
// reads, follows the paper; bias handling and the memory layout (bias word oc
// after b_base, weight word ((oc*IC+ic)*K+kh)*K+kw after w_base) are this
// design's choices.
//
// Interface: pulse start with cfg and the tile counts valid and held for the
// layer. One request per cycle at most; done pulses once the last word has
// left.
module weight_read
  import deconv_pkg::*;
#(
  parameter int N_CU  = 16,
  parameter int OUTST = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  layer_cfg_t               cfg,
  input  dim_t                     n_th,
  input  dim_t                     n_tw,
  input  logic [31:0]              n_tiles,
  output logic                     ar_valid,
  input  logic                     ar_ready,
  output addr_t                    ar_addr,
  input  logic                     r_valid,
  output logic                     r_ready,
  input  data_t                    r_data,
  output logic                     out_valid,
  output data_t                    out_data,
  output logic [$clog2(N_CU)-1:0]  out_dst,
  input  logic [N_CU-1:0]          dst_ready,
  output logic                     busy,
  output logic                     done,
  output logic                     evt_stall
);
  localparam int DW = $clog2(N_CU);

  logic       gen;
  logic       bias_phase;          // sending the biases of the group
  tile_pos_t  grp;                 // first tile of the current group
  tile_pos_t  cur;                 // tile of the CU being served
  logic [31:0] tiles_left;
  logic [DW:0] grp_n;              // tiles in the current group (<= N_CU)
  dim_t       ic;
  kp_t        kh, kw;
  logic [DW-1:0] dst;              // CU index inside the group

  dim_t oc;
  assign oc = cur.oc;

  logic [ADDR_W-1:0] word;
  addr_t             addr;
  always_comb begin
    word = ((ADDR_W'(oc) * ADDR_W'(cfg.ic) + ADDR_W'(ic)) * ADDR_W'(cfg.k) + ADDR_W'(kh)) * ADDR_W'(cfg.k)
           + ADDR_W'(kw);
    addr = bias_phase ? word_addr(cfg.b_base, ADDR_W'(oc)) : word_addr(cfg.w_base, word);
  end

  logic req_ready, eng_idle, evt_zero_unused;

  read_engine #(.N_DST(N_CU), .OUTST(OUTST)) u_eng (
    .clk, .rst_n,
    .req_valid (gen),
    .req_ready (req_ready),
    .req_zero  (1'b0),
    .req_addr  (addr),
    .req_dst   (dst),
    .ar_valid, .ar_ready, .ar_addr,
    .r_valid, .r_ready, .r_data,
    .out_valid, .out_data, .out_dst, .dst_ready,
    .idle      (eng_idle),
    .evt_zero  (evt_zero_unused),
    .evt_stall
  );

  // Loops: group of N_CU tiles -> (biases: CU of the group) then
  // input channel -> CU of the group -> kh -> kw.
  wire last_kw = (kw + 1'b1 == cfg.k);
  wire last_kh = (kh + 1'b1 == cfg.k);
  wire last_j  = ((DW+1)'(dst) + 1'b1 == grp_n);
  wire last_ic = (ic + 1'b1 == cfg.ic);

  function automatic logic [DW:0] group_size(logic [31:0] left);
    return (left >= 32'(N_CU)) ? (DW+1)'(N_CU) : (DW+1)'(left);
  endfunction

  logic draining;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gen <= 1'b0; draining <= 1'b0; done <= 1'b0; bias_phase <= 1'b1;
      grp <= '0; cur <= '0; tiles_left <= '0; grp_n <= '0;
      ic <= '0; kh <= '0; kw <= '0; dst <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        gen <= (n_tiles != 0) && (cfg.ic != 0) && (cfg.k != 0);
        draining <= 1'b1; bias_phase <= 1'b1;
        grp <= '0; cur <= '0;
        tiles_left <= n_tiles;
        grp_n <= group_size(n_tiles);
        ic <= '0; kh <= '0; kw <= '0; dst <= '0;
      end else if (gen && req_ready) begin
        if (bias_phase) begin
          dst <= dst + 1'b1;
          cur <= next_tile(cur, n_th, n_tw);
          if (last_j) begin
            dst <= '0; cur <= grp; bias_phase <= 1'b0;
          end
        end else begin
          kw <= kw + 1'b1;
          if (last_kw) begin
            kw <= '0; kh <= kh + 1'b1;
            if (last_kh) begin
              kh  <= '0;
              dst <= dst + 1'b1;
              cur <= next_tile(cur, n_th, n_tw);
              if (last_j) begin
                dst <= '0; cur <= grp; ic <= ic + 1'b1;
                if (last_ic) begin
                  ic         <= '0;
                  bias_phase <= 1'b1;
                  grp        <= next_tile(cur, n_th, n_tw);
                  cur        <= next_tile(cur, n_th, n_tw);
                  tiles_left <= tiles_left - 32'(grp_n);
                  grp_n      <= group_size(tiles_left - 32'(grp_n));
                  if (tiles_left == 32'(grp_n)) gen <= 1'b0;
                end
              end
            end
          end
        end
      end else if (draining && !gen && eng_idle) begin
        draining <= 1'b0;
        done     <= 1'b1;
      end
    end
  end
  assign busy = draining;
endmodule
