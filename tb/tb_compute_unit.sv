// tb_compute_unit -- checks one compute unit on whole output tiles.
//
// For several layer shapes a random input map, weights (some pruned to zero)
// and bias are made; the tile's input blocks are cut out of the map at an
// origin found independently (smallest input index the tile depends on), and
// the tap tables are found by search. The CU's output stream is compared with
// the input-space reference restricted to the tile, bit for bit. With the
// output always accepted, the tile's cycle count must equal
//   1 + sum over channels [ max(T_I^2, K^2, T_O^2 on the first) + 1
//       + sum over taps (2 + (T_O/S)^2, or 2 if skipped) + 1 ] + T_O^2 + 1.
module tb_compute_unit;
  import deconv_pkg::*;
  import deconv_ref_pkg::*;
  localparam int T_O = 6, K_MAX = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  dim_t n_ic;
  kp_t k, s;
  logic zero_skip;
  logic [7:0] t_i, j_cnt;
  kp_t f_tab [K_MAX];
  logic [7:0] g_tab [K_MAX];
  logic x_valid, x_ready, w_valid, w_ready, y_valid, y_ready;
  data_t x_data, w_data, y_data;
  logic busy, evt_skip, evt_mac;

  compute_unit #(.T_O(T_O), .K_MAX(K_MAX)) dut (.*);

  data_t xq[$], wq[$], yq[$];
  assign x_valid = xq.size() > 0;
  assign x_data  = x_valid ? xq[0] : '0;
  assign w_valid = wq.size() > 0;
  assign w_data  = w_valid ? wq[0] : '0;
  logic y_rnd = 0;
  always @(negedge clk) y_ready <= !y_rnd || ($urandom % 3 != 0);
  int skips = 0, busy_cycles = 0;
  logic x_took = 0, w_took = 0;
  always @(negedge clk) begin
    if (x_took) void'(xq.pop_front());
    if (w_took) void'(wq.pop_front());
  end
  always @(posedge clk) if (rst_n) begin
    x_took <= x_valid && x_ready;
    w_took <= w_valid && w_ready;
    if (y_valid && y_ready) yq.push_back(y_data);
    skips += evt_skip;
    if (busy || (w_valid && w_ready)) busy_cycles++;
  end

  int checks = 0, failures = 0;
  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fdiv(int a, int b);
    return (a >= 0) ? a / b : -((-a + b - 1) / b);
  endfunction

  task automatic run(int ic_n, int ih_n, int kk, int ss, int pp, int th, int tw, int zpct, bit zs, bit rnd);
    int oh_n, ti, jj, imin0, expect_cyc;
    data_t x[], w[], b[], y[];
    oh_n = (ih_n - 1) * ss + kk - 2 * pp;
    ti = T_O / ss + (kk + ss - 1) / ss;
    jj = T_O / ss;
    x = new[ic_n * ih_n * ih_n]; w = new[ic_n * kk * kk]; b = new[1];
    foreach (x[i]) x[i] = rand_fx(0);
    foreach (w[i]) w[i] = rand_fx(zpct);
    b[0] = rand_fx(0);
    deconv_ref(x, w, b, ic_n, 1, ih_n, ih_n, oh_n, oh_n, kk, ss, pp, y);
    imin0 = 1 << 20;
    for (int o = 0; o < T_O; o++)
      for (int kx = 0; kx < kk; kx++)
        if (((o + pp - kx) % ss + ss) % ss == 0 && fdiv(o + pp - kx, ss) < imin0) imin0 = fdiv(o + pp - kx, ss);
    for (int kx = 0; kx < kk; kx++) begin
      int fo;
      fo = 0;
      while (((fo + pp - kx) % ss + ss) % ss != 0) fo++;
      f_tab[kx] = kp_t'(fo);
      g_tab[kx] = 8'(fdiv(fo + pp - kx, ss) - imin0);
    end
    n_ic = dim_t'(ic_n); k = kp_t'(kk); s = kp_t'(ss); zero_skip = zs; t_i = 8'(ti); j_cnt = 8'(jj);
    y_rnd = rnd;
    // streams: bias, then per channel the weight block; input blocks
    expect_cyc = 1 + T_O * T_O + 1;
    wq.push_back(b[0]);
    for (int ic = 0; ic < ic_n; ic++) begin
      int ld;
      for (int i = 0; i < kk * kk; i++) wq.push_back(w[ic * kk * kk + i]);
      for (int r = 0; r < ti; r++)
        for (int c = 0; c < ti; c++) begin
          int ih, iw;
          ih = th * jj + imin0 + r;
          iw = tw * jj + imin0 + c;
          xq.push_back((ih < 0 || iw < 0 || ih >= ih_n || iw >= ih_n) ? '0 : x[(ic * ih_n + ih) * ih_n + iw]);
        end
      ld = ti * ti;
      if (kk * kk > ld) ld = kk * kk;
      if (ic == 0 && T_O * T_O > ld) ld = T_O * T_O;
      expect_cyc += ld + 2;
      for (int i = 0; i < kk * kk; i++)
        expect_cyc += 2 + ((zs && w[ic * kk * kk + i] == 0) ? 0 : jj * jj);
    end
    yq.delete();
    busy_cycles = 0;
    wait (yq.size() == T_O * T_O);
    @(negedge clk);
    while (busy) @(negedge clk);
    for (int r = 0; r < T_O; r++)
      for (int c = 0; c < T_O; c++) begin
        int oh, ow;
        oh = th * T_O + r; ow = tw * T_O + c;
        if (oh < oh_n && ow < oh_n) begin
          checks++;
          if (yq[r * T_O + c] != y[oh * oh_n + ow]) begin
            failures++;
            $display("FAIL: k=%0d s=%0d p=%0d tile (%0d,%0d) y[%0d][%0d] = %h, expected %h",
                     kk, ss, pp, th, tw, r, c, yq[r * T_O + c], y[oh * oh_n + ow]);
          end
        end
      end
    if (!rnd) begin
      checks++;
      if (busy_cycles != expect_cyc) begin
        failures++;
        $display("FAIL: k=%0d s=%0d tile took %0d cycles, expected %0d", kk, ss, busy_cycles, expect_cyc);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3, 7, 4, 2, 1, 0, 0, 0, 1'b1, 1'b0);    // corner tile with padding
    run(3, 7, 4, 2, 1, 1, 2, 30, 1'b1, 1'b0);   // inner tile, pruned weights, skipping
    run(2, 4, 3, 3, 0, 1, 0, 30, 1'b0, 1'b0);   // stride 3, no skipping
    run(2, 5, 5, 1, 2, 0, 1, 20, 1'b1, 1'b1);   // stride 1, output back-pressure
    run(1, 3, 6, 2, 0, 0, 0, 0, 1'b1, 1'b0);    // K = 6
    checks++;
    if (skips == 0) begin failures++; $display("FAIL: no tap skipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
