// offset_cache -- precomputes the modulo arithmetic of a layer ("cache modulo
// arithmetic" stage).
//
// Looping over the output space, the input pixel feeding output o through
// kernel tap k is i = (o + P - k + f[k]) / S, with the stride-hole-skipping
// offset f[k] = mod(S - mod(P - k, S), S). f depends only on k, so it is
// computed once per layer for k = 0..K-1 (two modulo operations per tap, 2K in
// all) and cached; the compute units then need no modulo hardware. That part
// follows the paper. Beyond it this block caches, per tap, the local input
// index g[k] = (f[k] + P - k)/S + B, with B = floor((K-1-P)/S), so that a
// compute unit finds the input of its j-th output step as j + g[k] without a
// divider (a choice of this design). It also derives the tile geometry: the
// input block size T_I = T_O/S + ceil(K/S) (the paper's equation for the
// input tile size), the output steps per tile J = T_O/S, the number of tiles.
//
// Interface: pulse start with the layer fields valid; the fields are latched.
// One tap is computed per cycle; done pulses K+3 cycles after start and the
// outputs then hold until the next start. cfg_ok is low for layers this design
// does not run: S = 0, K = 0, K > K_MAX, P > K-1, or T_O not a multiple of S.
module offset_cache
  import deconv_pkg::*;
#(
  parameter int T_O   = 12,   // output tile side T_OH = T_OW
  parameter int K_MAX = 8     // largest kernel size held
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  kp_t        k,
  input  kp_t        s,
  input  kp_t        p,
  input  dim_t       oh,
  input  dim_t       ow,
  input  dim_t       oc,
  output logic       done,
  output logic       cfg_ok,
  output kp_t        f_tab [K_MAX],   // stride-hole-skipping offsets f[k]
  output logic [7:0] g_tab [K_MAX],   // local input index base per tap
  output logic [7:0] t_i,             // input block side T_I
  output logic [7:0] j_cnt,           // output steps per tile side, T_O/S
  output logic [7:0] b_off,           // B = floor((K-1-P)/S)
  output dim_t       n_th,            // tiles along the output height
  output dim_t       n_tw,            // tiles along the output width
  output logic [31:0] n_tiles         // tiles in the layer (all output channels)
);
  typedef enum logic [1:0] {S_IDLE, S_GEOM, S_TAPS, S_COUNT} state_t;
  state_t state;

  kp_t  k_q, s_q, p_q;
  dim_t oh_q, ow_q, oc_q;
  logic [7:0] bias_q;       // B = floor((K-1-P)/S)
  logic [KP_W-1:0] kc;      // tap being computed

  // Two modulo operations for tap kc (the 2K of the paper); the first works on
  // P - kc made non-negative by adding a multiple of S.
  logic [7:0] m1, f_k, g_k;
  always_comb begin
    m1  = 8'(({4'd0, p_q} + 8'(s_q) * 8'd16 - {4'd0, kc}) % {4'd0, s_q});
    f_k = 8'(({4'd0, s_q} - m1) % {4'd0, s_q});
    g_k = 8'((f_k + {4'd0, p_q} + 8'(s_q) * bias_q - {4'd0, kc}) / {4'd0, s_q});
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      cfg_ok  <= 1'b0;
      k_q <= '0; s_q <= '0; p_q <= '0;
      oh_q <= '0; ow_q <= '0; oc_q <= '0;
      bias_q  <= '0;
      kc      <= '0;
      t_i     <= '0;
      j_cnt   <= '0;
      n_th    <= '0;
      n_tw    <= '0;
      n_tiles <= '0;
      for (int i = 0; i < K_MAX; i++) begin
        f_tab[i] <= '0;
        g_tab[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          k_q <= k; s_q <= s; p_q <= p;
          oh_q <= oh; ow_q <= ow; oc_q <= oc;
          state <= S_GEOM;
        end
        S_GEOM: begin
          cfg_ok <= (s_q != 0) && (k_q != 0) && (int'(k_q) <= K_MAX) &&
                    (p_q < k_q) && (s_q != 0 && (T_O % int'(s_q)) == 0);
          if (s_q != 0 && k_q > p_q) begin
            bias_q <= 8'((int'(k_q) - 1 - int'(p_q)) / int'(s_q));
            j_cnt  <= 8'(T_O / int'(s_q));
            t_i    <= 8'(T_O / int'(s_q) + (int'(k_q) + int'(s_q) - 1) / int'(s_q));
          end else begin
            bias_q <= '0;
            j_cnt  <= '0;
            t_i    <= '0;
          end
          n_th  <= dim_t'((int'(oh_q) + T_O - 1) / T_O);
          n_tw  <= dim_t'((int'(ow_q) + T_O - 1) / T_O);
          kc    <= '0;
          state <= (s_q != 0) ? S_TAPS : S_COUNT;
        end
        S_TAPS: begin
          if (int'(kc) < K_MAX) begin
            f_tab[kc[$clog2(K_MAX)-1:0]] <= kp_t'(f_k);
            g_tab[kc[$clog2(K_MAX)-1:0]] <= g_k;
          end
          kc <= kc + 1'b1;
          if (kc + 1'b1 >= k_q || int'(kc) + 1 >= K_MAX) state <= S_COUNT;
        end
        S_COUNT: begin
          n_tiles <= 32'(oc_q) * 32'(n_th) * 32'(n_tw);
          done    <= 1'b1;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
  assign b_off = bias_q;
endmodule
