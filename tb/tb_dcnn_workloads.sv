// tb_dcnn_workloads -- runs whole generator networks through the accelerator at
// its default parameters (16 CUs, T_O = 12), layer after layer, the way a host
// would: each layer's output map in memory is the next layer's input map.
//
// Networks (feature-map sizes as published for the two WGAN generators; the
// kernel size, stride and padding of each layer are not published and are
// chosen here as the smallest kernel that yields each size):
//   MNIST : 1x1x10 -> 4x4x32 (K4 S1) -> 12x12x32 (K3 S3) -> 28x28x1 (K6 S2)
//   CelebA: 1x1x128 -> 3x3x128 (K3 S1) -> 5x5x128 (K3 S1) -> 9x9x64 (K3 S2 P1)
//           -> 21x21x32 (K5 S2) -> 45x45x3 (K5 S2)
// No activation function is applied between layers (the accelerator computes
// the deconvolutions only). Every output word of every layer is compared with
// the input-space reference model. MNIST is also run with 10% to 70% of its
// weights pruned to zero (by random choice, not by magnitude) and zero skipping
// on; each run must be faster than the dense one and no slower than the one
// with less pruning, and the speed-ups are reported.
module tb_dcnn_workloads;
  import deconv_pkg::*;
  import deconv_ref_pkg::*;

  localparam int WORDS = 1 << 19;
  localparam int IN_A = 0, IN_B = 1 << 16, W_BASE = 1 << 17, B_BASE = (1 << 19) - 1024;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done, err, stall_en = 0;
  logic [31:0] cycles;
  layer_cfg_t cfg;
  logic in_ar_valid, in_ar_ready, in_r_valid, in_r_ready;
  logic wt_ar_valid, wt_ar_ready, wt_r_valid, wt_r_ready;
  logic out_aw_valid, out_aw_ready, out_w_valid, out_w_ready, out_b_valid, out_b_ready;
  addr_t in_ar_addr, wt_ar_addr, out_aw_addr;
  data_t in_r_data, wt_r_data, out_w_data;

  deconv_top dut (.*);

  ddr_model #(.WORDS(WORDS)) u_ddr (
    .clk, .stall_en,
    .ar0_valid(in_ar_valid), .ar0_ready(in_ar_ready), .ar0_addr(in_ar_addr),
    .r0_valid(in_r_valid), .r0_ready(in_r_ready), .r0_data(in_r_data),
    .ar1_valid(wt_ar_valid), .ar1_ready(wt_ar_ready), .ar1_addr(wt_ar_addr),
    .r1_valid(wt_r_valid), .r1_ready(wt_r_ready), .r1_data(wt_r_data),
    .aw_valid(out_aw_valid), .aw_ready(out_aw_ready), .aw_addr(out_aw_addr),
    .w_valid(out_w_valid), .w_ready(out_w_ready), .w_data(out_w_data),
    .b_valid(out_b_valid), .b_ready(out_b_ready)
  );

  int checks = 0, failures = 0;
  longint n_skip = 0;
  always @(posedge clk) if (rst_n) n_skip += $countones(dut.cu_skip);

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int c, h, k, s, p; } layer_t;   // output channels and size, kernel

  // Runs a network whose input (c0 channels of h0 x h0) is already at IN_A.
  // Returns the total cycle count.
  task automatic run_net(string name, int c0, int h0, layer_t net[], int prune_pct, bit zskip,
                         output longint total);
    int ic, ih, src, dst, nw, bad;
    data_t x[], w[], b[], y[];
    total = 0;
    ic = c0; ih = h0; src = IN_A; dst = IN_B;
    x = new[ic * ih * ih];
    foreach (x[i]) x[i] = u_ddr.mem[src + i];
    foreach (net[l]) begin
      nw = net[l].c * ic * net[l].k * net[l].k;
      w = new[nw]; b = new[net[l].c];
      foreach (w[i]) begin
        w[i] = rand_fx(prune_pct) >>> 2;
        u_ddr.mem[W_BASE + i] = w[i];
      end
      foreach (b[i]) begin
        b[i] = rand_fx(0) >>> 2;
        u_ddr.mem[B_BASE + i] = b[i];
      end
      deconv_ref(x, w, b, ic, net[l].c, ih, ih, net[l].h, net[l].h, net[l].k, net[l].s, net[l].p, y);
      cfg = '{ic: dim_t'(ic), oc: dim_t'(net[l].c), ih: dim_t'(ih), iw: dim_t'(ih),
              oh: dim_t'(net[l].h), ow: dim_t'(net[l].h), k: kp_t'(net[l].k), s: kp_t'(net[l].s),
              p: kp_t'(net[l].p), zero_skip: zskip, in_base: 32'(src * 4), w_base: 32'(W_BASE * 4),
              b_base: 32'(B_BASE * 4), out_base: 32'(dst * 4)};
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) @(posedge clk);
      @(negedge clk);
      checks++;
      if (err) begin failures++; $display("FAIL: %s L%0d rejected", name, l + 1); end
      bad = 0;
      foreach (y[i]) begin
        checks++;
        if (u_ddr.mem[dst + i] != y[i]) begin
          failures++; bad++;
          if (bad < 5) $display("FAIL: %s L%0d out[%0d] = %h, expected %h", name, l + 1, i, u_ddr.mem[dst + i], y[i]);
        end
      end
      $display("%s L%0d: %0dx%0dx%0d -> %0dx%0dx%0d (K%0d S%0d P%0d), pruned %0d%%: %0d cycles, %0d MACs/cycle x1000",
               name, l + 1, ih, ih, ic, net[l].h, net[l].h, net[l].c, net[l].k, net[l].s, net[l].p,
               prune_pct, cycles, longint'(nw) * ih * ih * 1000 / longint'(cycles));
      total += cycles;
      // next layer reads this output
      x = y; ic = net[l].c; ih = net[l].h;
      src = dst; dst = (dst == IN_A) ? IN_B : IN_A;
    end
    // leave the network input where it was for a rerun
  endtask

  initial begin
    layer_t mnist[], celeba[];
    data_t z[];
    longint t_dense, t_sparse, t_prev, t_c;
    mnist  = new[3];
    mnist[0] = '{c: 32, h: 4,  k: 4, s: 1, p: 0};
    mnist[1] = '{c: 32, h: 12, k: 3, s: 3, p: 0};
    mnist[2] = '{c: 1,  h: 28, k: 6, s: 2, p: 0};
    cfg = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;

    // latent vector, 1x1x10
    z = new[10];
    foreach (z[i]) z[i] = rand_fx(0);
    foreach (z[i]) u_ddr.mem[IN_A + i] = z[i];
    run_net("MNIST", 10, 1, mnist, 0, 1'b1, t_dense);
    // pruning sweep, 10% to 70% of the weights set to zero, zero skipping on
    for (int pct = 10; pct <= 70; pct += 10) begin
      n_skip = 0;
      foreach (z[i]) u_ddr.mem[IN_A + i] = z[i];
      run_net("MNIST", 10, 1, mnist, pct, 1'b1, t_sparse);
      $display("MNIST: dense %0d cycles, %0d%% pruned %0d cycles, speed-up x1000 = %0d (%0d taps skipped)",
               t_dense, pct, t_sparse, t_dense * 1000 / t_sparse, n_skip);
      checks++;
      if (!(t_sparse < t_dense && n_skip > 0)) begin
        failures++; $display("FAIL: no speed-up from pruning %0d%%", pct);
      end
      checks++;
      if (pct > 10 && t_sparse > t_prev) begin
        failures++; $display("FAIL: more pruning ran slower (%0d%%)", pct);
      end
      t_prev = t_sparse;
    end

    begin
      celeba = new[5];
      celeba[0] = '{c: 128, h: 3,  k: 3, s: 1, p: 0};
      celeba[1] = '{c: 128, h: 5,  k: 3, s: 1, p: 0};
      celeba[2] = '{c: 64,  h: 9,  k: 3, s: 2, p: 1};
      celeba[3] = '{c: 32,  h: 21, k: 5, s: 2, p: 0};
      celeba[4] = '{c: 3,   h: 45, k: 5, s: 2, p: 0};
      z = new[128];
      foreach (z[i]) z[i] = rand_fx(0);
      foreach (z[i]) u_ddr.mem[IN_A + i] = z[i];
      run_net("CelebA", 128, 1, celeba, 0, 1'b1, t_c);
      $display("CelebA: %0d cycles", t_c);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
