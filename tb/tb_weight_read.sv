// tb_weight_read -- checks the weight read stage with 4 CUs and T_O = 6: each
// CU must receive, per tile assigned to it, the bias of the tile's output
// channel followed by the K x K weights of every input channel in order.
module tb_weight_read;
  import deconv_pkg::*;
  localparam int N_CU = 4, T_O = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  layer_cfg_t cfg;
  dim_t n_th, n_tw;
  logic [31:0] n_tiles;
  logic ar_valid, ar_ready, r_valid, r_ready;
  addr_t ar_addr;
  data_t r_data;
  logic out_valid;
  data_t out_data;
  logic [1:0] out_dst;
  logic [N_CU-1:0] dst_ready;
  logic busy, done, evt_stall;
  logic stall_en = 1;

  weight_read #(.N_CU(N_CU), .OUTST(8)) dut (.*);

  logic u0, u1, u2, u3, u4;
  data_t u5;
  ddr_model #(.WORDS(4096), .LAT(3)) u_ddr (
    .clk, .stall_en,
    .ar0_valid(1'b0), .ar0_ready(u0), .ar0_addr('0), .r0_valid(u1), .r0_ready(1'b0), .r0_data(u5),
    .ar1_valid(ar_valid), .ar1_ready(ar_ready), .ar1_addr(ar_addr),
    .r1_valid(r_valid), .r1_ready(r_ready), .r1_data(r_data),
    .aw_valid(1'b0), .aw_ready(u2), .aw_addr('0), .w_valid(1'b0), .w_ready(u3), .w_data('0),
    .b_valid(u4), .b_ready(1'b1)
  );

  int checks = 0, failures = 0;
  data_t got [N_CU][$];
  always @(posedge clk) if (out_valid && dst_ready[out_dst]) got[out_dst].push_back(out_data);
  always @(negedge clk) dst_ready <= N_CU'($urandom | $urandom);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_word(int cu, data_t e, string what);
    data_t g;
    checks++;
    if (got[cu].size() == 0) begin failures++; $display("FAIL: CU %0d missing %s", cu, what); return; end
    g = got[cu].pop_front();
    if (g != e) begin failures++; $display("FAIL: CU %0d %s = %h, expected %h", cu, what, g, e); end
  endtask

  task automatic run(int ic_n, int oc_n, int k, int nth);
    int t;
    for (int i = 0; i < 64; i++) u_ddr.mem[8 + i] = data_t'($urandom);           // biases
    for (int i = 0; i < oc_n * ic_n * k * k; i++) u_ddr.mem[200 + i] = data_t'($urandom);
    cfg = '0;
    cfg.ic = dim_t'(ic_n); cfg.oc = dim_t'(oc_n); cfg.k = kp_t'(k);
    cfg.b_base = 32'(8 * 4); cfg.w_base = 32'(200 * 4);
    n_th = dim_t'(nth); n_tw = dim_t'(nth);
    n_tiles = 32'(oc_n * nth * nth);
    for (int d = 0; d < N_CU; d++) got[d].delete();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    t = 0;
    for (int oc = 0; oc < oc_n; oc++)
      for (int tt = 0; tt < nth * nth; tt++) begin
        expect_word(t % N_CU, u_ddr.mem[8 + oc], "bias");
        for (int ic = 0; ic < ic_n; ic++)
          for (int i = 0; i < k * k; i++)
            expect_word(t % N_CU, u_ddr.mem[200 + (oc * ic_n + ic) * k * k + i], "weight");
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
    run(3, 2, 3, 2);
    run(2, 5, 4, 1);
    run(1, 3, 5, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
