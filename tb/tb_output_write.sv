// tb_output_write -- checks the output write stage with 4 CUs and T_O = 4 on a
// layer of 3 x 6 x 7 outputs (12 tiles, edge tiles overhanging). Each CU's
// output FIFO is fed the words of the tiles assigned to it, tagged with tile
// and position; after the layer every output word in memory must hold the
// right tag, every in-map pixel must have been written once, overhanging
// pixels dropped, and all FIFOs drained. Memory back-pressure is random.
module tb_output_write;
  import deconv_pkg::*;
  localparam int N_CU = 4, T_O = 4;
  localparam int OC = 3, OH = 6, OW = 7, BASE = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  layer_cfg_t cfg;
  dim_t n_th, n_tw;
  logic [N_CU-1:0] in_valid, in_ready;
  data_t in_data [N_CU];
  logic aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  addr_t aw_addr;
  data_t w_data;
  logic busy, done, evt_drop;
  logic stall_en = 1;

  output_write #(.N_CU(N_CU), .T_O(T_O)) dut (.*);

  logic u0, u1, u2, u3;
  data_t u4, u5;
  ddr_model #(.WORDS(1024), .LAT(2)) u_ddr (
    .clk, .stall_en,
    .ar0_valid(1'b0), .ar0_ready(u0), .ar0_addr('0), .r0_valid(u1), .r0_ready(1'b0), .r0_data(u4),
    .ar1_valid(1'b0), .ar1_ready(u2), .ar1_addr('0), .r1_valid(u3), .r1_ready(1'b0), .r1_data(u5),
    .aw_valid, .aw_ready, .aw_addr, .w_valid, .w_ready, .w_data, .b_valid, .b_ready
  );

  data_t q [N_CU][$];
  logic [N_CU-1:0] took = '0;
  for (genvar i = 0; i < N_CU; i++) begin : g_src
    assign in_valid[i] = q[i].size() > 0;
    assign in_data[i]  = (q[i].size() > 0) ? q[i][0] : '0;
  end
  int drops = 0;
  always @(posedge clk) begin
    took  <= in_valid & in_ready;
    drops += evt_drop;
  end
  always @(negedge clk)
    for (int i = 0; i < N_CU; i++) if (took[i]) void'(q[i].pop_front());

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, nth, ntw;
    nth = (OH + T_O - 1) / T_O; ntw = (OW + T_O - 1) / T_O;
    for (int i = 0; i < 1024; i++) u_ddr.mem[i] = 32'hDEAD0000;
    t = 0;
    for (int oc = 0; oc < OC; oc++)
      for (int tt = 0; tt < nth * ntw; tt++) begin
        for (int i = 0; i < T_O * T_O; i++) q[t % N_CU].push_back(data_t'(t * 1000 + i));
        t++;
      end
    cfg = '0;
    cfg.oc = OC; cfg.oh = OH; cfg.ow = OW; cfg.out_base = 32'(BASE * 4);
    n_th = dim_t'(nth); n_tw = dim_t'(ntw);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    for (int oc = 0; oc < OC; oc++)
      for (int oh = 0; oh < OH; oh++)
        for (int ow = 0; ow < OW; ow++) begin
          int tile;
          data_t e;
          tile = (oc * nth + oh / T_O) * ntw + ow / T_O;
          e = data_t'(tile * 1000 + (oh % T_O) * T_O + ow % T_O);
          checks++;
          if (u_ddr.mem[BASE + (oc * OH + oh) * OW + ow] != e) begin
            failures++;
            $display("FAIL: out[%0d][%0d][%0d] = %h, expected %h", oc, oh, ow,
                     u_ddr.mem[BASE + (oc * OH + oh) * OW + ow], e);
          end
        end
    checks++;
    if (u_ddr.writes != OC * OH * OW || drops != t * T_O * T_O - OC * OH * OW || u_ddr.bad_addr != 0) begin
      failures++;
      $display("FAIL: writes %0d drops %0d", u_ddr.writes, drops);
    end
    checks++;
    if (u_ddr.mem[BASE - 1] != 32'hDEAD0000 || u_ddr.mem[BASE + OC * OH * OW] != 32'hDEAD0000) begin
      failures++;
      $display("FAIL: write outside the output map");
    end
    for (int i = 0; i < N_CU; i++) begin
      checks++;
      if (q[i].size() != 0) begin failures++; $display("FAIL: CU %0d FIFO not drained", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
