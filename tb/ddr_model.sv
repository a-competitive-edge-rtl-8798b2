// ddr_model -- behavioural model of external memory behind the accelerator's
// three AXI4-Lite style master ports (two read, one write).
//
// A word array of WORDS 32-bit words at byte address 4*n. Reads are accepted
// on ar_* and answered in order on r_* after LAT cycles or more; writes need
// both aw_* and w_* and are answered on b_*. With stall_en set, ready and
// valid signals are withheld at random, so the design sees back-pressure and
// gaps. Testbenches load and inspect `mem` directly. Not synthesizable.
module ddr_model
  import deconv_pkg::*;
#(
  parameter int WORDS = 65536,
  parameter int LAT   = 4
) (
  input  logic  clk,
  input  logic  stall_en,
  // read port 0
  input  logic  ar0_valid,
  output logic  ar0_ready,
  input  addr_t ar0_addr,
  output logic  r0_valid,
  input  logic  r0_ready,
  output data_t r0_data,
  // read port 1
  input  logic  ar1_valid,
  output logic  ar1_ready,
  input  addr_t ar1_addr,
  output logic  r1_valid,
  input  logic  r1_ready,
  output data_t r1_data,
  // write port
  input  logic  aw_valid,
  output logic  aw_ready,
  input  addr_t aw_addr,
  input  logic  w_valid,
  output logic  w_ready,
  input  data_t w_data,
  output logic  b_valid,
  input  logic  b_ready
);
  data_t mem [WORDS];
  int unsigned writes = 0;
  int unsigned bad_addr = 0;

  // in-flight reads: {data, cycle when it may be returned}
  data_t       q0_d[$], q1_d[$];
  longint      q0_t[$], q1_t[$];
  longint      now = 0;
  int          b_pend = 0;
  logic        aw_got = 1'b0, w_got = 1'b0;
  logic        r0_taken = 1'b0, r1_taken = 1'b0;
  addr_t       aw_hold;
  data_t       w_hold;

  function automatic data_t rd(addr_t a);
    if ((a >> 2) >= WORDS) begin
      bad_addr++;
      return '0;
    end
    return mem[a >> 2];
  endfunction

  initial begin
    ar0_ready = 0; ar1_ready = 0; r0_valid = 0; r1_valid = 0; r0_data = 0; r1_data = 0;
    aw_ready = 0; w_ready = 0; b_valid = 0;
  end

  always @(posedge clk) begin
    now <= now + 1;
    // read port 0
    if (ar0_valid && ar0_ready) begin q0_d.push_back(rd(ar0_addr)); q0_t.push_back(now + LAT); end
    if (r0_valid && r0_ready) begin void'(q0_d.pop_front()); void'(q0_t.pop_front()); r0_taken = 1'b1; end
    // read port 1
    if (ar1_valid && ar1_ready) begin q1_d.push_back(rd(ar1_addr)); q1_t.push_back(now + LAT); end
    if (r1_valid && r1_ready) begin void'(q1_d.pop_front()); void'(q1_t.pop_front()); r1_taken = 1'b1; end
    // write port
    if (aw_valid && aw_ready) begin aw_got = 1'b1; aw_hold = aw_addr; end
    if (w_valid && w_ready)   begin w_got  = 1'b1; w_hold  = w_data;  end
    if (aw_got && w_got) begin
      if ((aw_hold >> 2) < WORDS) mem[aw_hold >> 2] <= w_hold; else bad_addr++;
      writes++;
      b_pend++;
      aw_got = 1'b0; w_got = 1'b0;
    end
    if (b_valid && b_ready) b_pend--;
  end

  // drive outputs after the edge
  always @(negedge clk) begin
    ar0_ready <= !(stall_en && ($urandom % 4 == 0));
    ar1_ready <= !(stall_en && ($urandom % 4 == 0));
    if (!r0_valid || r0_taken) begin
      if (q0_d.size() > 0 && q0_t[0] <= now && !(stall_en && ($urandom % 3 == 0))) begin
        r0_valid <= 1'b1; r0_data <= q0_d[0];
      end else begin
        r0_valid <= 1'b0;
      end
    end
    r0_taken = 1'b0;
    if (!r1_valid || r1_taken) begin
      if (q1_d.size() > 0 && q1_t[0] <= now && !(stall_en && ($urandom % 3 == 0))) begin
        r1_valid <= 1'b1; r1_data <= q1_d[0];
      end else begin
        r1_valid <= 1'b0;
      end
    end
    r1_taken = 1'b0;
    aw_ready <= !aw_got && !(stall_en && ($urandom % 3 == 0));
    w_ready  <= !w_got  && !(stall_en && ($urandom % 3 == 0));
    b_valid  <= (b_pend > 0) && !(stall_en && ($urandom % 2 == 0));
  end
endmodule
