// tb_read_engine -- checks the ordered read engine: random memory and zero
// requests for random destinations, random memory latency and back-pressure,
// random destination FIFO readiness. Every delivered word must arrive in
// request order with the right data (the memory word, or 0 for a zero
// request) and destination. A second phase without stalls checks that reads
// stream at one word per cycle.
module tb_read_engine;
  import deconv_pkg::*;
  localparam int N_DST = 4, OUTST = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, req_zero = 0;
  addr_t req_addr = 0;
  logic [1:0] req_dst = 0;
  logic ar_valid, ar_ready, r_valid, r_ready;
  addr_t ar_addr;
  data_t r_data;
  logic out_valid;
  data_t out_data;
  logic [1:0] out_dst;
  logic [N_DST-1:0] dst_ready = '1;
  logic idle, evt_zero, evt_stall;
  logic stall_en = 1;

  read_engine #(.N_DST(N_DST), .OUTST(OUTST)) dut (.*);

  logic u0, u1, u2, u3, u4;
  data_t u5;
  ddr_model #(.WORDS(1024), .LAT(2)) u_ddr (
    .clk, .stall_en,
    .ar0_valid(ar_valid), .ar0_ready(ar_ready), .ar0_addr(ar_addr),
    .r0_valid(r_valid), .r0_ready(r_ready), .r0_data(r_data),
    .ar1_valid(1'b0), .ar1_ready(u0), .ar1_addr('0), .r1_valid(u1), .r1_ready(1'b0), .r1_data(u5),
    .aw_valid(1'b0), .aw_ready(u2), .aw_addr('0), .w_valid(1'b0), .w_ready(u3), .w_data('0),
    .b_valid(u4), .b_ready(1'b1)
  );

  int checks = 0, failures = 0;
  typedef struct { data_t d; logic [1:0] dst; } exp_t;
  exp_t q[$];
  int got = 0, zeros = 0, stalls = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready)
      q.push_back('{d: req_zero ? '0 : u_ddr.mem[req_addr >> 2], dst: req_dst});
    if (out_valid && dst_ready[out_dst]) begin
      exp_t e;
      e = q.pop_front();
      checks++;
      got++;
      if (out_data != e.d || out_dst != e.dst) begin
        failures++;
        $display("FAIL: word %0d = %h to %0d, expected %h to %0d", got, out_data, out_dst, e.d, e.dst);
      end
    end
    zeros  += evt_zero;
    stalls += evt_stall;
  end

  task automatic drive(int n, bit rnd);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      req_valid = 1;
      req_zero  = rnd && ($urandom % 10 < 3);
      req_addr  = addr_t'(($urandom % 1024) * 4);
      req_dst   = 2'($urandom);
      if (rnd) dst_ready = N_DST'($urandom | $urandom);
      @(posedge clk);
      while (!req_ready) begin
        @(negedge clk);
        if (rnd) dst_ready = N_DST'($urandom | $urandom);
        @(posedge clk);
      end
    end
    @(negedge clk);
    req_valid = 0;
  endtask

  initial begin
    int t0, n;
    for (int i = 0; i < 1024; i++) u_ddr.mem[i] = data_t'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    drive(3000, 1);
    dst_ready = '1;
    while (!idle) @(negedge clk);
    // streaming rate without stalls
    stall_en = 0;
    repeat (4) @(negedge clk);
    n = got;
    t0 = int'($time / 10);
    drive(500, 0);
    while (!idle) @(negedge clk);
    checks++;
    if (int'($time / 10) - t0 > 500 + 12) begin
      failures++;
      $display("FAIL: 500 reads took %0d cycles", int'($time / 10) - t0);
    end
    checks++;
    if (got - n != 500 || q.size() != 0 || zeros == 0 || stalls == 0) begin
      failures++;
      $display("FAIL: got %0d, left %0d, zeros %0d, stalls %0d", got - n, q.size(), zeros, stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
