// tb_offset_cache -- checks the cached modulo arithmetic for every legal
// (K, S, P) with K <= 8, S <= 4, P < K and T_O a multiple of S, and that
// illegal ones are flagged.
//
// Expected values are found independently: f[k] is the smallest o >= 0 with
// (o + P - k) divisible by S (found by search, which is what the modulo
// formula is for); the block's first input index is the smallest input index
// any output of tile 0 depends on (found by search), and g[k] must equal the
// input index of o = f[k] minus it. T_I must cover every input the tile uses.
// Also checks done arrives K+3 cycles after start, and the tile counts.
module tb_offset_cache;
  import deconv_pkg::*;
  localparam int T_O = 12, K_MAX = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done, cfg_ok;
  kp_t k = 0, s = 0, p = 0;
  dim_t oh = 0, ow = 0, oc = 0;
  kp_t f_tab [K_MAX];
  logic [7:0] g_tab [K_MAX];
  logic [7:0] t_i, j_cnt, b_off;
  dim_t n_th, n_tw;
  logic [31:0] n_tiles;

  offset_cache #(.T_O(T_O), .K_MAX(K_MAX)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fdiv(int a, int b);   // floor division
    return (a >= 0) ? a / b : -((-a + b - 1) / b);
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int kk = 1; kk <= 9; kk++)
      for (int ss = 1; ss <= 5; ss++)
        for (int pp = 0; pp <= 3; pp++) begin
          int lat, imin, imax, ohh;
          bit legal;
          legal = (kk <= K_MAX) && (pp < kk) && (T_O % ss == 0);
          ohh = 5 + $urandom % 40;
          k = kp_t'(kk); s = kp_t'(ss); p = kp_t'(pp); oh = dim_t'(ohh); ow = dim_t'(ohh + 3); oc = 3;
          @(negedge clk); start = 1; @(negedge clk); start = 0;
          lat = 1;
          while (!done) begin @(negedge clk); lat++; end
          check(cfg_ok == legal, $sformatf("cfg_ok=%0b for k=%0d s=%0d p=%0d", cfg_ok, kk, ss, pp));
          check(n_th == dim_t'((ohh + T_O - 1) / T_O) && n_tw == dim_t'((ohh + 3 + T_O - 1) / T_O), "tile counts");
          check(n_tiles == 32'(3 * ((ohh + T_O - 1) / T_O) * ((ohh + 3 + T_O - 1) / T_O)), "n_tiles");
          if (legal) begin
            check(lat == kk + 3, $sformatf("latency %0d for k=%0d", lat, kk));
            check(int'(j_cnt) == T_O / ss, "j_cnt");
            check(int'(t_i) == T_O / ss + (kk + ss - 1) / ss, "t_i is ceil(T_O/S)+ceil(K/S)");
            // first and last input index used by output tile 0
            imin = 1 << 20; imax = -(1 << 20);
            for (int o = 0; o < T_O; o++)
              for (int kx = 0; kx < kk; kx++)
                if (((o + pp - kx) % ss + ss) % ss == 0) begin
                  int i;
                  i = fdiv(o + pp - kx, ss);
                  if (i < imin) imin = i;
                  if (i > imax) imax = i;
                end
            check(int'(b_off) == -imin, $sformatf("b_off %0d, first input %0d", b_off, imin));
            check(imax - imin + 1 <= int'(t_i), "input block too small");
            for (int kx = 0; kx < kk; kx++) begin
              int fo;
              fo = 0;
              while (((fo + pp - kx) % ss + ss) % ss != 0) fo++;
              check(int'(f_tab[kx]) == fo, $sformatf("f[%0d]=%0d expected %0d (k=%0d s=%0d p=%0d)", kx, f_tab[kx], fo, kk, ss, pp));
              check(int'(g_tab[kx]) == fdiv(fo + pp - kx, ss) - imin,
                    $sformatf("g[%0d]=%0d expected %0d", kx, g_tab[kx], fdiv(fo + pp - kx, ss) - imin));
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
