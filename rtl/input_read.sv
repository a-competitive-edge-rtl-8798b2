// input_read -- input read stage: fetches the input block of every output tile.
//
// Output tiles are handed to the compute units in turn: tile t (ordered by
// output channel, tile row, tile column) goes to CU t mod N_CU, so the tiles
// form groups of N_CU worked on together. For each group, input channel by
// input channel, and for each CU of the group, this block walks the T_I x T_I
// input block that CU's tile needs, row by row, and requests each pixel from
// external memory through the read engine, which delivers the words in order
// to that CU's input FIFO.
// Pixels of the block outside the input feature map (the padding border and
// the ragged edge) are sent as zeros without a memory access.
//
// The block of output tile row th starts at input row th*T_O/S - B, with
// B = floor((K-1-P)/S) from the offset cache, and is T_I = T_O/S + ceil(K/S)
// rows high; likewise for columns. Reading the block's addresses sequentially
// and caching it on chip, so the compute units' irregular accesses stay in
// BRAM, follows the paper; the tile order, the CU assignment and the memory
// layout (word (ic*IH+ih)*IW+iw after in_base) are this design's choices.
//
// Interface: pulse start with cfg and the offset-cache outputs valid and held
// for the whole layer. One request is issued per cycle when memory and the
// in-flight limit allow. done pulses once the last word has left.
//
// Only the input-side fields of cfg are used here; lint reports the others as
// unused.
module input_read
  import deconv_pkg::*;
#(
  parameter int N_CU  = 16,
  parameter int OUTST = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  layer_cfg_t               cfg,
  input  logic [7:0]               t_i,
  input  logic [7:0]               j_cnt,
  input  logic [7:0]               b_off,
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
  output logic                     evt_zero,
  output logic                     evt_stall
);
  localparam int DW = $clog2(N_CU);

  logic       gen;                 // address generator running
  tile_pos_t  grp;                 // first tile of the current group
  tile_pos_t  cur;                 // tile of the CU being served
  logic [31:0] tiles_left;         // tiles not yet finished, this group included
  logic [DW:0] grp_n;              // tiles in the current group (<= N_CU)
  dim_t       ic;
  logic [7:0] r, c;
  logic [DW-1:0] dst;              // CU index inside the group

  dim_t th, tw;
  assign th = cur.th;
  assign tw = cur.tw;

  // Global input coordinates of the current block pixel (signed).
  logic signed [DIM_W+9:0] ih, iw;
  logic                    zero;
  logic [ADDR_W-1:0]       word;
  always_comb begin
    ih   = $signed({1'b0, 20'(th) * 20'(j_cnt)}) - $signed({13'd0, b_off}) + $signed({14'd0, r});
    iw   = $signed({1'b0, 20'(tw) * 20'(j_cnt)}) - $signed({13'd0, b_off}) + $signed({14'd0, c});
    zero = (ih < 0) || (iw < 0) || (ih >= $signed({10'd0, cfg.ih})) || (iw >= $signed({10'd0, cfg.iw}));
    word = (ADDR_W'(ic) * ADDR_W'(cfg.ih) + ADDR_W'(ih[DIM_W-1:0])) * ADDR_W'(cfg.iw) + ADDR_W'(iw[DIM_W-1:0]);
  end

  logic req_ready, eng_idle;

  read_engine #(.N_DST(N_CU), .OUTST(OUTST)) u_eng (
    .clk, .rst_n,
    .req_valid (gen),
    .req_ready (req_ready),
    .req_zero  (zero),
    .req_addr  (word_addr(cfg.in_base, word)),
    .req_dst   (dst),
    .ar_valid, .ar_ready, .ar_addr,
    .r_valid, .r_ready, .r_data,
    .out_valid, .out_data, .out_dst, .dst_ready,
    .idle      (eng_idle),
    .evt_zero, .evt_stall
  );

  // Nested loops: group of N_CU tiles -> input channel -> CU of the group ->
  // block row -> block column. Serving all CUs of a group one channel at a
  // time keeps each CU's FIFO at most about one block ahead of it.
  wire last_c  = (c + 1'b1 == t_i);
  wire last_r  = (r + 1'b1 == t_i);
  wire last_j  = ((DW+1)'(dst) + 1'b1 == grp_n);
  wire last_ic = (ic + 1'b1 == cfg.ic);

  function automatic logic [DW:0] group_size(logic [31:0] left);
    return (left >= 32'(N_CU)) ? (DW+1)'(N_CU) : (DW+1)'(left);
  endfunction

  logic draining;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gen <= 1'b0; draining <= 1'b0; done <= 1'b0;
      grp <= '0; cur <= '0; tiles_left <= '0; grp_n <= '0;
      ic <= '0; r <= '0; c <= '0; dst <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        gen <= (n_tiles != 0) && (cfg.ic != 0) && (t_i != 0);
        draining <= 1'b1;
        grp <= '0; cur <= '0;
        tiles_left <= n_tiles;
        grp_n <= group_size(n_tiles);
        ic <= '0; r <= '0; c <= '0; dst <= '0;
      end else if (gen && req_ready) begin
        c <= c + 1'b1;
        if (last_c) begin
          c <= '0; r <= r + 1'b1;
          if (last_r) begin
            r   <= '0;
            dst <= dst + 1'b1;
            cur <= next_tile(cur, n_th, n_tw);
            if (last_j) begin
              dst <= '0;
              ic  <= ic + 1'b1;
              cur <= grp;
              if (last_ic) begin
                // group finished: the next group starts after its last tile
                ic         <= '0;
                grp        <= next_tile(cur, n_th, n_tw);
                cur        <= next_tile(cur, n_th, n_tw);
                tiles_left <= tiles_left - 32'(grp_n);
                grp_n      <= group_size(tiles_left - 32'(grp_n));
                if (tiles_left == 32'(grp_n)) gen <= 1'b0;
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
