// tb_input_read -- checks the input read stage on two layers with 4 CUs and
// T_O = 6: every CU must receive, per tile and input channel, exactly the
// T_I x T_I input block the tile depends on, in row order, with zeros where
// the block leaves the feature map. The block origin is found independently,
// as the smallest input index any output of the tile depends on.
module tb_input_read;
  import deconv_pkg::*;
  localparam int N_CU = 4, T_O = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  layer_cfg_t cfg;
  logic [7:0] t_i, j_cnt, b_off;
  dim_t n_th, n_tw;
  logic [31:0] n_tiles;
  logic ar_valid, ar_ready, r_valid, r_ready;
  addr_t ar_addr;
  data_t r_data;
  logic out_valid;
  data_t out_data;
  logic [1:0] out_dst;
  logic [N_CU-1:0] dst_ready;
  logic busy, done, evt_zero, evt_stall;
  logic stall_en = 1;

  input_read #(.N_CU(N_CU), .OUTST(8)) dut (.*);

  logic u0, u1, u2, u3, u4;
  data_t u5;
  ddr_model #(.WORDS(4096), .LAT(3)) u_ddr (
    .clk, .stall_en,
    .ar0_valid(ar_valid), .ar0_ready(ar_ready), .ar0_addr(ar_addr),
    .r0_valid(r_valid), .r0_ready(r_ready), .r0_data(r_data),
    .ar1_valid(1'b0), .ar1_ready(u0), .ar1_addr('0), .r1_valid(u1), .r1_ready(1'b0), .r1_data(u5),
    .aw_valid(1'b0), .aw_ready(u2), .aw_addr('0), .w_valid(1'b0), .w_ready(u3), .w_data('0),
    .b_valid(u4), .b_ready(1'b1)
  );

  int checks = 0, failures = 0, zeros = 0;
  data_t got [N_CU][$];
  always @(posedge clk) begin
    if (out_valid && dst_ready[out_dst]) got[out_dst].push_back(out_data);
    zeros += evt_zero;
  end
  always @(negedge clk) dst_ready <= N_CU'($urandom | $urandom);

  function automatic int fdiv(int a, int b);
    return (a >= 0) ? a / b : -((-a + b - 1) / b);
  endfunction

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int ic_n, int oc_n, int ih_n, int k, int s, int p);
    int oh_n, nth, ti, imin0, t, base;
    oh_n = (ih_n - 1) * s + k - 2 * p;
    nth  = (oh_n + T_O - 1) / T_O;
    ti   = T_O / s + (k + s - 1) / s;
    // first input of tile 0 (tile th starts th*T_O/S later)
    imin0 = 1 << 20;
    for (int o = 0; o < T_O; o++)
      for (int kx = 0; kx < k; kx++)
        if (((o + p - kx) % s + s) % s == 0 && fdiv(o + p - kx, s) < imin0) imin0 = fdiv(o + p - kx, s);
    base = 100;
    for (int i = 0; i < ic_n * ih_n * ih_n; i++) u_ddr.mem[base + i] = data_t'($urandom | 1);
    cfg = '0;
    cfg.ic = dim_t'(ic_n); cfg.oc = dim_t'(oc_n); cfg.ih = dim_t'(ih_n); cfg.iw = dim_t'(ih_n);
    cfg.oh = dim_t'(oh_n); cfg.ow = dim_t'(oh_n); cfg.k = kp_t'(k); cfg.s = kp_t'(s); cfg.p = kp_t'(p);
    cfg.in_base = addr_t'(base * 4);
    t_i = 8'(ti); j_cnt = 8'(T_O / s); b_off = 8'(-imin0); n_th = dim_t'(nth); n_tw = dim_t'(nth);
    n_tiles = 32'(oc_n * nth * nth);
    for (int d = 0; d < N_CU; d++) got[d].delete();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    t = 0;
    for (int oc = 0; oc < oc_n; oc++)
      for (int th = 0; th < nth; th++)
        for (int tw = 0; tw < nth; tw++) begin
          for (int ic = 0; ic < ic_n; ic++)
            for (int r = 0; r < ti; r++)
              for (int c = 0; c < ti; c++) begin
                int ih, iw;
                data_t e, g;
                ih = th * T_O / s + imin0 + r;
                iw = tw * T_O / s + imin0 + c;
                e = (ih < 0 || iw < 0 || ih >= ih_n || iw >= ih_n) ? '0 : u_ddr.mem[base + (ic * ih_n + ih) * ih_n + iw];
                checks++;
                if (got[t % N_CU].size() == 0) begin
                  failures++; $display("FAIL: CU %0d short of words", t % N_CU);
                end else begin
                  g = got[t % N_CU].pop_front();
                  if (g != e) begin
                    failures++;
                    $display("FAIL: tile %0d ic %0d (%0d,%0d) got %h expected %h", t, ic, r, c, g, e);
                  end
                end
              end
          t++;
        end
    for (int d = 0; d < N_CU; d++) begin
      checks++;
      if (got[d].size() != 0) begin failures++; $display("FAIL: CU %0d got extra words", d); end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(2, 3, 4, 4, 2, 1);   // 7x7 -> 8x8... tiles overhang, padding
    run(3, 1, 5, 3, 3, 0);   // stride 3
    run(2, 2, 4, 3, 1, 1);   // stride 1, padding 1
    checks++;
    if (zeros == 0) begin failures++; $display("FAIL: no padding zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
