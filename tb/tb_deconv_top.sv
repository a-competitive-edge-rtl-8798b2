// tb_deconv_top -- end-to-end test of the deconvolution accelerator.
//
// Runs several layers through deconv_top at its default parameters (16 CUs,
// T_O = 12) against the behavioural memory with random back-pressure, and
// compares every output word with the input-space reference model. The layers
// are chosen to make each mechanism happen: stride 1, 2 and 3, padding, tiles
// hanging over the map edge (dropped pixels), more tiles than CUs, zero-weight
// skipping on and off (the two must give equal outputs, the skipping run in
// fewer cycles), read stalls on full CU FIFOs, and a rejected configuration.
// It also checks that each output word is written exactly once and that the
// cycle counter matches the observed layer time.
module tb_deconv_top;
  import deconv_pkg::*;
  import deconv_ref_pkg::*;

  localparam int WORDS = 1 << 16;
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
  // mechanism counters
  longint n_skip = 0, n_mac = 0, n_zero = 0, n_ir_stall = 0, n_wr_stall = 0, n_drop = 0;
  longint n_reuse = 0, n_err = 0, n_noskip_zero = 0;
  always @(posedge clk) if (rst_n) begin
    n_skip     += $countones(dut.cu_skip);
    n_mac      += $countones(dut.cu_mac);
    n_zero     += dut.ir_zero;
    n_ir_stall += dut.ir_stall;
    n_wr_stall += dut.wr_stall;
    n_drop     += dut.ow_drop;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Run one layer and compare; returns the measured cycles.
  task automatic run_layer(int ic, int oc, int ih, int k, int s, int p, int zero_pct,
                           bit zskip, int seed_rep, output int meas);
    int oh, nin, nw, nout;
    data_t x[], w[], b[], y[];
    longint t0, t1;
    int w_before;
    oh   = (ih - 1) * s + k - 2 * p;
    nin  = ic * ih * ih;
    nw   = oc * ic * k * k;
    nout = oc * oh * oh;
    x = new[nin]; w = new[nw]; b = new[oc];
    // same data when seed_rep repeats a run
    if (seed_rep == 0) begin
      for (int i = 0; i < nin; i++) x[i] = rand_fx(0);
      for (int i = 0; i < nw; i++)  w[i] = rand_fx(zero_pct);
      for (int i = 0; i < oc; i++)  b[i] = rand_fx(0);
      for (int i = 0; i < nin; i++) u_ddr.mem[1024 + i] = x[i];
      for (int i = 0; i < nw; i++)  u_ddr.mem[16384 + i] = w[i];
      for (int i = 0; i < oc; i++)  u_ddr.mem[512 + i] = b[i];
    end else begin
      for (int i = 0; i < nin; i++) x[i] = u_ddr.mem[1024 + i];
      for (int i = 0; i < nw; i++)  w[i] = u_ddr.mem[16384 + i];
      for (int i = 0; i < oc; i++)  b[i] = u_ddr.mem[512 + i];
    end
    for (int i = 0; i < nout; i++) u_ddr.mem[40960 + i] = 32'hDEADBEEF;
    deconv_ref(x, w, b, ic, oc, ih, ih, oh, oh, k, s, p, y);

    cfg = '{ic: dim_t'(ic), oc: dim_t'(oc), ih: dim_t'(ih), iw: dim_t'(ih), oh: dim_t'(oh), ow: dim_t'(oh),
            k: kp_t'(k), s: kp_t'(s), p: kp_t'(p), zero_skip: zskip,
            in_base: 32'(1024 * 4), w_base: 32'(16384 * 4), b_base: 32'(512 * 4), out_base: 32'(40960 * 4)};
    w_before = u_ddr.writes;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time / 10;
    while (!done) @(posedge clk);
    t1 = $time / 10;
    @(negedge clk);
    meas = int'(t1 - t0) + 1;
    check(!err, $sformatf("err flag on a valid layer k=%0d s=%0d p=%0d", k, s, p));
    for (int i = 0; i < nout; i++) begin
      check(u_ddr.mem[40960 + i] == y[i],
            $sformatf("layer k=%0d s=%0d: out[%0d] = %h, expected %h", k, s, i, u_ddr.mem[40960 + i], y[i]));
    end
    check(int'(u_ddr.writes) - w_before == nout,
          $sformatf("writes %0d, expected %0d (one per output pixel)", int'(u_ddr.writes) - w_before, nout));
    check(u_ddr.bad_addr == 0, "access outside memory");
    check(int'(cycles) == meas, $sformatf("cycle counter %0d, measured %0d", cycles, meas));
    if (oc * ((oh + 11) / 12) * ((oh + 11) / 12) > 16) n_reuse++;
    $display("layer ic=%0d oc=%0d %0dx%0d -> %0dx%0d k=%0d s=%0d p=%0d zero_skip=%0d: %0d cycles",
             ic, oc, ih, ih, oh, oh, k, s, p, zskip, meas);
  endtask

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c_skip, c_noskip, c_tmp;
    longint skip_before;
    cfg = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // stride 3, no padding (MNIST layer-2 shape, fewer channels)
    stall_en = 1;
    run_layer(4, 3, 4, 3, 3, 0, 0, 1'b1, 0, c_tmp);
    // stride 2, padding 1, 20 tiles on 16 CUs, edge tiles dropped
    run_layer(3, 5, 7, 4, 2, 1, 0, 1'b1, 0, c_tmp);
    // stride 1, K = 3 (CelebA layer-2 shape, fewer channels)
    run_layer(5, 4, 3, 3, 1, 0, 0, 1'b1, 0, c_tmp);
    // zero skipping on and off on the same pruned layer, without stalls
    stall_en = 0;
    skip_before = n_skip;
    run_layer(4, 2, 6, 6, 2, 0, 60, 1'b0, 0, c_noskip);
    check(n_skip == skip_before, "taps skipped with zero_skip off");
    run_layer(4, 2, 6, 6, 2, 0, 60, 1'b1, 1, c_skip);
    check(n_skip > skip_before, "no tap skipped with zero_skip on");
    check(c_skip < c_noskip, $sformatf("zero skipping not faster: %0d vs %0d cycles", c_skip, c_noskip));

    // rejected configuration: padding not below K
    cfg.k = 3; cfg.s = 2; cfg.p = 3; cfg.ic = 1; cfg.oc = 1; cfg.ih = 2; cfg.iw = 2; cfg.oh = 2; cfg.ow = 2;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    check(err, "bad configuration not flagged");
    if (err) n_err++;

    // every mechanism must have happened
    check(n_skip > 0,     "zero-skip never happened");
    check(n_zero > 0,     "padding zero never inserted");
    check(n_ir_stall > 0, "input read never stalled on a full CU FIFO");
    check(n_drop > 0,     "no edge pixel dropped");
    check(n_reuse > 0,    "no layer with more tiles than CUs");
    check(n_err > 0,      "no configuration rejected");
    $display("mechanisms: macs=%0d skipped_taps=%0d pad_zeros=%0d input_stalls=%0d weight_stalls=%0d dropped=%0d reuse_layers=%0d rejected=%0d",
             n_mac, n_skip, n_zero, n_ir_stall, n_wr_stall, n_drop, n_reuse, n_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
