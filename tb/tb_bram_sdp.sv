// tb_bram_sdp -- checks bram_sdp: random writes and reads against an array
// model, one-cycle read latency, output held while re is low, and read-first
// behaviour when the same word is read and written in one cycle.
module tb_bram_sdp;
  localparam int W = 32, D = 24, A = $clog2(D);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [A-1:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;

  bram_sdp #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] model [D];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] expect_rd, held;
    // fill
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = A'(i); wdata = W'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    // random reads and writes
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      re = 1; raddr = A'($urandom % D);
      we = $urandom % 2; waddr = ($urandom % 4 == 0) ? raddr : A'($urandom % D); wdata = W'($urandom);
      expect_rd = model[raddr];                // read-first: the old word
      if (we) model[waddr] = wdata;
      @(negedge clk);
      check(rdata == expect_rd, $sformatf("read %0d gave %h, expected %h", raddr, rdata, expect_rd));
      we = 0; re = 0;
      held = rdata;
      raddr = A'($urandom % D);
      @(negedge clk);
      check(rdata == held, "output changed with re low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
