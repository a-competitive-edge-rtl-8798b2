// compute_unit -- one compute unit (CU): runs the reverse-looping deconvolution
// kernel on one T_O x T_O output tile.
//
// A CU takes a tile's bias from its weight FIFO and sets every pixel of its
// output block y (y_buffer) to it. Then, for each input channel, it copies the
// T_I x T_I input block from its input FIFO into x_buffer and the K x K weight
// block into w_buffer (concurrently, and concurrently with the bias fill), and
// walks the weight space: for each tap (kh, kw) it reads w, and for every
// output step (jh, jw) < (T_O/S)^2 accumulates
//   y[S*jh + f[kh]][S*jw + f[kw]] += w * x[jh + g[kh]][jw + g[kw]]
// which is the inner loop of the kernel with o = o_hat + f and the division
// (o + P - k)/S replaced by the cached local index base g (see offset_cache).
// After the last input channel the y block is streamed out row by row.
//
// The datapath follows the CU drawing of the paper: x_buffer and w_buffer feed
// a multiplier, a test w != 0 drives a multiplexer that passes the product or
// 0, and an adder accumulates into y_buffer. Zero-skipping: with zero_skip set,
// a tap whose weight is 0 skips its whole output loop (2 cycles instead of
// 2 + (T_O/S)^2); with it clear the loop runs and the multiplexer adds 0.
// The loop order (weight space outermost, as the paper reorders it), the
// two-stage MAC pipeline, one MAC per cycle, and the single-buffered
// x/w buffers are this design's choices.
//
// Timing per tile: 1 cycle for the bias, then per input channel
// max(T_I^2, K^2, T_O^2 on the first channel) load cycles when the FIFOs keep
// up, K^2 taps of 2 + (T_O/S)^2 cycles (2 when skipped) and 1 flush cycle,
// then T_O^2 output cycles when the output side keeps up.
// MAC pipeline: cycle A reads x and y; cycle B multiplies, adds and writes y.
// Two consecutive MACs never share a y address inside one tap loop, and taps
// are separated by two cycles, so no read-after-write forwarding is needed.
module compute_unit
  import deconv_pkg::*;
#(
  parameter int T_O   = 12,
  parameter int K_MAX = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  // layer constants, held for the whole layer
  input  dim_t       n_ic,
  input  kp_t        k,
  input  kp_t        s,
  input  logic       zero_skip,
  input  logic [7:0] t_i,
  input  logic [7:0] j_cnt,
  input  kp_t        f_tab [K_MAX],
  input  logic [7:0] g_tab [K_MAX],
  // input block stream
  input  logic       x_valid,
  output logic       x_ready,
  input  data_t      x_data,
  // bias and weight stream
  input  logic       w_valid,
  output logic       w_ready,
  input  data_t      w_data,
  // output block stream
  output logic       y_valid,
  input  logic       y_ready,
  output data_t      y_data,
  // status and event pulses
  output logic       busy,
  output logic       evt_skip,
  output logic       evt_mac
);
  localparam int T_I_MAX = T_O + K_MAX;        // input block side at S = 1
  localparam int XD = T_I_MAX * T_I_MAX;
  localparam int WD = K_MAX * K_MAX;
  localparam int YD = T_O * T_O;
  localparam int XA = $clog2(XD);
  localparam int WA = $clog2(WD);
  localparam int YA = $clog2(YD);
  localparam int KI = $clog2(K_MAX);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_WREAD, S_WCHK, S_MAC, S_FLUSH, S_DRAIN} state_t;
  state_t state;

  data_t      bias;
  dim_t       ic;
  logic       first_ic;
  // load counters
  logic [7:0] xr, xc;
  kp_t        lh, lw;
  logic [YA:0] yi;
  logic       x_done, w_done, y_done;
  // compute counters
  kp_t        kh, kw;
  logic [7:0] jh, jw;
  data_t      w_reg;
  // drain
  logic [YA:0] dr;
  logic       have_y;

  // buffers
  logic          x_we, w_we, y_we, x_re, w_re, y_re;
  logic [XA-1:0] x_waddr, x_raddr;
  logic [WA-1:0] w_waddr, w_raddr;
  logic [YA-1:0] y_waddr, y_raddr;
  data_t         x_wdata, w_wdata, y_wdata, x_rdata, w_rdata, y_rdata;

  bram_sdp #(.WIDTH(DATA_W), .DEPTH(XD)) u_x_buffer (.clk, .we(x_we), .waddr(x_waddr), .wdata(x_wdata),
                                                     .re(x_re), .raddr(x_raddr), .rdata(x_rdata));
  bram_sdp #(.WIDTH(DATA_W), .DEPTH(WD)) u_w_buffer (.clk, .we(w_we), .waddr(w_waddr), .wdata(w_wdata),
                                                     .re(w_re), .raddr(w_raddr), .rdata(w_rdata));
  bram_sdp #(.WIDTH(DATA_W), .DEPTH(YD)) u_y_buffer (.clk, .we(y_we), .waddr(y_waddr), .wdata(y_wdata),
                                                     .re(y_re), .raddr(y_raddr), .rdata(y_rdata));

  // ---- pipeline stage B: multiply, select, accumulate ----
  logic          s1_valid;
  logic [YA-1:0] s1_yaddr;
  data_t         prod, addend;
  always_comb begin
    prod   = fx_mul(w_reg, x_rdata);
    addend = (w_reg != '0) ? prod : '0;      // the w != 0 multiplexer
  end

  // ---- stage A addresses for the current output step ----
  wire [KI-1:0] khi = kh[KI-1:0];
  wire [KI-1:0] kwi = kw[KI-1:0];
  logic [7:0] oh_l, ow_l, ih_l, iw_l;
  always_comb begin
    oh_l = 8'(s) * jh + 8'(f_tab[khi]);
    ow_l = 8'(s) * jw + 8'(f_tab[kwi]);
    ih_l = jh + g_tab[khi];
    iw_l = jw + g_tab[kwi];
  end

  wire last_tap = (kw + 1'b1 == k) && (kh + 1'b1 == k);
  wire last_jw  = (jw + 1'b1 == j_cnt);
  wire last_jh  = (jh + 1'b1 == j_cnt);
  wire [YA:0] y_total = (YA+1)'(YD);

  wire x_fire = x_valid && x_ready;
  wire w_fire = w_valid && w_ready;
  wire y_fire = y_valid && y_ready;

  assign x_ready = (state == S_LOAD) && !x_done;
  assign w_ready = (state == S_IDLE) || ((state == S_LOAD) && !w_done);
  assign y_valid = have_y;
  assign y_data  = y_rdata;
  assign busy    = (state != S_IDLE);

  // ---- buffer port control ----
  always_comb begin
    x_we    = x_fire;
    x_waddr = XA'(int'(xr) * T_I_MAX + int'(xc));
    x_wdata = x_data;
    w_we    = (state == S_LOAD) && w_fire;
    w_waddr = WA'(int'(lh) * K_MAX + int'(lw));
    w_wdata = w_data;

    x_re    = (state == S_MAC);
    x_raddr = XA'(int'(ih_l) * T_I_MAX + int'(iw_l));
    w_re    = (state == S_WREAD);
    w_raddr = WA'(int'(kh) * K_MAX + int'(kw));

    // y write: stage B of the MAC pipeline, or the bias fill
    if (s1_valid) begin
      y_we    = 1'b1;
      y_waddr = s1_yaddr;
      y_wdata = y_rdata + addend;
    end else begin
      y_we    = (state == S_LOAD) && first_ic && !y_done;
      y_waddr = yi[YA-1:0];
      y_wdata = bias;
    end
    // y read: stage A of the MAC pipeline, or the output stream
    if (state == S_DRAIN) begin
      y_re    = (!have_y || y_ready) && (dr != y_total);
      y_raddr = dr[YA-1:0];
    end else begin
      y_re    = (state == S_MAC);
      y_raddr = YA'(int'(oh_l) * T_O + int'(ow_l));
    end
  end

  assign evt_mac  = (state == S_MAC);
  assign evt_skip = (state == S_WCHK) && zero_skip && (w_rdata == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      bias <= '0; ic <= '0; first_ic <= 1'b0;
      xr <= '0; xc <= '0; lh <= '0; lw <= '0; yi <= '0;
      x_done <= 1'b0; w_done <= 1'b0; y_done <= 1'b0;
      kh <= '0; kw <= '0; jh <= '0; jw <= '0; w_reg <= '0;
      dr <= '0; have_y <= 1'b0;
      s1_valid <= 1'b0; s1_yaddr <= '0;
    end else begin
      s1_valid <= (state == S_MAC);
      s1_yaddr <= YA'(int'(oh_l) * T_O + int'(ow_l));

      unique case (state)
        S_IDLE: if (w_fire) begin
          bias     <= w_data;
          ic       <= '0;
          first_ic <= 1'b1;
          xr <= '0; xc <= '0; lh <= '0; lw <= '0; yi <= '0;
          x_done <= 1'b0; w_done <= 1'b0; y_done <= 1'b0;
          state <= S_LOAD;
        end

        S_LOAD: begin
          if (x_fire) begin
            xc <= xc + 1'b1;
            if (xc + 1'b1 == t_i) begin
              xc <= '0; xr <= xr + 1'b1;
              if (xr + 1'b1 == t_i) x_done <= 1'b1;
            end
          end
          if (w_fire) begin
            lw <= lw + 1'b1;
            if (lw + 1'b1 == k) begin
              lw <= '0; lh <= lh + 1'b1;
              if (lh + 1'b1 == k) w_done <= 1'b1;
            end
          end
          if (first_ic && !y_done) begin
            yi <= yi + 1'b1;
            if (yi + 1'b1 == y_total) y_done <= 1'b1;
          end
          if (x_done && w_done && (y_done || !first_ic)) begin
            kh <= '0; kw <= '0;
            state <= S_WREAD;
          end
        end

        S_WREAD: state <= S_WCHK;

        S_WCHK: begin
          w_reg <= w_rdata;
          jh <= '0; jw <= '0;
          if (zero_skip && w_rdata == '0) begin
            // zero-skipping: no output loop for this tap
            kw <= kw + 1'b1;
            if (kw + 1'b1 == k) begin kw <= '0; kh <= kh + 1'b1; end
            state <= last_tap ? S_FLUSH : S_WREAD;
          end else begin
            state <= S_MAC;
          end
        end

        S_MAC: begin
          jw <= jw + 1'b1;
          if (last_jw) begin
            jw <= '0; jh <= jh + 1'b1;
            if (last_jh) begin
              jh <= '0;
              kw <= kw + 1'b1;
              if (kw + 1'b1 == k) begin kw <= '0; kh <= kh + 1'b1; end
              state <= last_tap ? S_FLUSH : S_WREAD;
            end
          end
        end

        S_FLUSH: begin
          first_ic <= 1'b0;
          if (ic + 1'b1 == n_ic) begin
            dr <= '0; have_y <= 1'b0;
            state <= S_DRAIN;
          end else begin
            ic <= ic + 1'b1;
            xr <= '0; xc <= '0; lh <= '0; lw <= '0;
            x_done <= 1'b0; w_done <= 1'b0;
            state <= S_LOAD;
          end
        end

        S_DRAIN: begin
          if (y_re) begin
            dr     <= dr + 1'b1;
            have_y <= 1'b1;
          end else if (y_fire) begin
            have_y <= 1'b0;
          end
          if (dr == y_total && (!have_y || y_fire)) begin
            have_y <= 1'b0;
            state  <= S_IDLE;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // The stage-A and stage-B writes must never meet a read of the same word in
  // the same cycle (the schedule above guarantees it).
  a_no_raw: assert property (@(posedge clk) disable iff (!rst_n)
    (s1_valid && state == S_MAC) |-> (y_raddr != s1_yaddr));

endmodule
