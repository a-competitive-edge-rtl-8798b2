// output_write -- output write stage: writes finished output tiles to memory.
//
// Tiles finish in the CUs in the order they were handed out (tile t on
// CU t mod N_CU), so this block visits the CUs' output FIFOs in that same order
// and takes each tile's T_O x T_O words, row by row. Pixels inside the output
// feature map are written to external memory exactly once, over an AXI4-Lite
// style write channel (aw_*, w_*, b_*); pixels of a tile that hang over the
// map's edge are dropped. Because the algorithm loops over the output space,
// no output pixel is ever read back and accumulated in memory: each write is
// final, which is the paper's "one-shot write" of each output block.
//
// The one-cycle-per-word schedule, the write-response counting and the memory
// layout (word (oc*OH+oh)*OW+ow after out_base) are this design's choices.
//
// Interface: pulse start with cfg and the tile counts valid and held for the
// layer. aw and w of a word are offered together and each is held until
// taken; many writes may await their b response. done pulses when every word
// has been taken and every write answered.
//
// b_ready is tied high: the stage can always take a write response, because
// it only counts them. Only the layer-shape and out_base fields of cfg are
// used here, so lint reports the other bits of the struct as unused.
module output_write
  import deconv_pkg::*;
#(
  parameter int N_CU = 16,
  parameter int T_O  = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  layer_cfg_t       cfg,
  input  dim_t             n_th,
  input  dim_t             n_tw,
  // output FIFOs of the CUs
  input  logic [N_CU-1:0]  in_valid,
  output logic [N_CU-1:0]  in_ready,
  input  data_t            in_data [N_CU],
  // AXI4-Lite style write channels
  output logic             aw_valid,
  input  logic             aw_ready,
  output addr_t            aw_addr,
  output logic             w_valid,
  input  logic             w_ready,
  output data_t            w_data,
  input  logic             b_valid,
  output logic             b_ready,
  output logic             busy,
  output logic             done,
  output logic             evt_drop      // a pixel outside the map was dropped
);
  localparam int DW = $clog2(N_CU);

  logic          gen, running;
  dim_t          oc, th, tw;
  logic [7:0]    r, c;
  logic [DW-1:0] src;

  // pending write
  logic          pend, aw_sent, w_sent;
  addr_t         pend_addr;
  data_t         pend_data;
  logic [15:0]   outstanding;

  dim_t oh_g, ow_g;
  logic in_map;
  logic [ADDR_W-1:0] word;
  always_comb begin
    oh_g   = dim_t'(int'(th) * T_O + int'(r));
    ow_g   = dim_t'(int'(tw) * T_O + int'(c));
    in_map = (int'(th) * T_O + int'(r) < int'(cfg.oh)) && (int'(tw) * T_O + int'(c) < int'(cfg.ow));
    word   = (ADDR_W'(oc) * ADDR_W'(cfg.oh) + ADDR_W'(oh_g)) * ADDR_W'(cfg.ow) + ADDR_W'(ow_g);
  end

  assign aw_valid = pend && !aw_sent;
  assign w_valid  = pend && !w_sent;
  assign aw_addr  = pend_addr;
  assign w_data   = pend_data;
  assign b_ready  = 1'b1;

  wire aw_fire  = aw_valid && aw_ready;
  wire w_fire   = w_valid && w_ready;
  wire pend_end = pend && (aw_sent || aw_ready) && (w_sent || w_ready);
  wire can_take = !pend || pend_end;
  wire take     = gen && can_take && in_valid[src];

  always_comb begin
    in_ready      = '0;
    in_ready[src] = gen && can_take;
  end

  assign evt_drop = take && !in_map;
  assign busy     = running;

  wire last_c  = (int'(c) + 1 == T_O);
  wire last_r  = (int'(r) + 1 == T_O);
  wire last_tw = (tw + 1'b1 == n_tw);
  wire last_th = (th + 1'b1 == n_th);
  wire last_oc = (oc + 1'b1 == cfg.oc);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gen <= 1'b0; running <= 1'b0; done <= 1'b0;
      oc <= '0; th <= '0; tw <= '0; r <= '0; c <= '0; src <= '0;
      pend <= 1'b0; aw_sent <= 1'b0; w_sent <= 1'b0; pend_addr <= '0; pend_data <= '0;
      outstanding <= '0;
    end else begin
      done <= 1'b0;
      outstanding <= outstanding + 16'(aw_fire) - 16'(b_valid && b_ready);

      if (aw_fire) aw_sent <= 1'b1;
      if (w_fire)  w_sent  <= 1'b1;
      if (pend_end) begin
        pend <= 1'b0; aw_sent <= 1'b0; w_sent <= 1'b0;
      end

      if (start) begin
        gen     <= (cfg.oc != 0) && (n_th != 0) && (n_tw != 0);
        running <= 1'b1;
        oc <= '0; th <= '0; tw <= '0; r <= '0; c <= '0; src <= '0;
      end else if (take) begin
        if (in_map) begin
          pend      <= 1'b1;
          aw_sent   <= 1'b0;
          w_sent    <= 1'b0;
          pend_addr <= word_addr(cfg.out_base, word);
          pend_data <= in_data[src];
        end
        c <= c + 1'b1;
        if (last_c) begin
          c <= '0; r <= r + 1'b1;
          if (last_r) begin
            r   <= '0;
            src <= (int'(src) == N_CU - 1) ? '0 : src + 1'b1;
            tw  <= tw + 1'b1;
            if (last_tw) begin
              tw <= '0; th <= th + 1'b1;
              if (last_th) begin
                th <= '0; oc <= oc + 1'b1;
                if (last_oc) gen <= 1'b0;
              end
            end
          end
        end
      end else if (running && !gen && !pend && outstanding == 0) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    aw_valid && !aw_ready |=> aw_valid && $stable(aw_addr));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    w_valid && !w_ready |=> w_valid && $stable(w_data));

endmodule
