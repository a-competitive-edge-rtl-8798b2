// tb_stream_fifo -- checks stream_fifo against a queue model: random pushes
// and pops at a depth that is not a power of two, order of words, the full and
// empty flags, the count, and same-cycle push and pop.
module tb_stream_fifo;
  localparam int W = 16, D = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = 0, out_data;
  logic [$clog2(D+1)-1:0] count;

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pushes = 0, pops = 0, fulls = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // compare flags and head with the model
      checks++;
      if (in_ready != (q.size() < D) || out_valid != (q.size() > 0) || int'(count) != q.size()) begin
        failures++;
        $display("FAIL flags at %0d: ready=%0b valid=%0b count=%0d model=%0d", cyc, in_ready, out_valid, count, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (out_data != q[0]) begin failures++; $display("FAIL data %h expected %h", out_data, q[0]); end
      end
      if (q.size() == D) fulls++;
      // bias towards filling in the first half, draining in the second
      in_valid  = ($urandom % 100) < (cyc < 2000 ? 70 : 35);
      out_ready = ($urandom % 100) < (cyc < 2000 ? 35 : 70);
      in_data   = W'($urandom);
      @(posedge clk);
      #1;
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model update on the clock edge
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) void'(q.pop_front());
    if (in_valid && in_ready) q.push_back(in_data);
  end
endmodule
