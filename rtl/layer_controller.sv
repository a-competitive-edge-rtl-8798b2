// layer_controller -- sequences one deconvolution layer through the accelerator.
//
// The accelerator runs a network one layer at a time, the host reconfiguring
// it between layers. On start the controller latches the layer configuration
// (held on cfg_q for all stages until the next start), runs the offset cache
// ("cache modulo arithmetic", the first stage), and then launches the three
// pipelined stages together with one go pulse: input read, weight read and
// output write. The compute units need no start; they run as data arrives.
// The layer is done when all three stages have reported done. A cycle counter
// counts the cycles of each layer from start to done and holds the result, the
// hardware counter that layer timing is measured with.
//
// Which stages report done, the error exit for layers the offset cache
// rejects, and the counter width are this design's choices.
//
// Interface: start is a one-cycle pulse, ignored while busy. done pulses for
// one cycle at the end; err is valid with it and held until the next start.
module layer_controller
  import deconv_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  layer_cfg_t  cfg,
  output layer_cfg_t  cfg_q,
  // offset cache
  output logic        oc_start,
  input  logic        oc_done,
  input  logic        cfg_ok,
  // pipelined stages
  output logic        go,
  input  logic        ir_done,
  input  logic        wr_done,
  input  logic        ow_done,
  // status
  output logic        busy,
  output logic        done,
  output logic        err,
  output logic [31:0] cycles
);
  typedef enum logic [1:0] {S_IDLE, S_PRE, S_RUN} state_t;
  state_t state;
  logic ir_f, wr_f, ow_f;
  logic [31:0] cnt;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cfg_q <= '0;
      oc_start <= 1'b0; go <= 1'b0; done <= 1'b0; err <= 1'b0;
      ir_f <= 1'b0; wr_f <= 1'b0; ow_f <= 1'b0;
      cnt <= '0; cycles <= '0;
    end else begin
      oc_start <= 1'b0;
      go       <= 1'b0;
      done     <= 1'b0;
      if (state != S_IDLE) cnt <= cnt + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          cfg_q    <= cfg;
          oc_start <= 1'b1;
          err      <= 1'b0;
          cnt      <= 32'd1;
          state    <= S_PRE;
        end
        S_PRE: if (oc_done) begin
          if (cfg_ok) begin
            go   <= 1'b1;
            ir_f <= 1'b0; wr_f <= 1'b0; ow_f <= 1'b0;
            state <= S_RUN;
          end else begin
            err    <= 1'b1;
            done   <= 1'b1;
            cycles <= cnt + 1'b1;
            state  <= S_IDLE;
          end
        end
        S_RUN: begin
          if (ir_done) ir_f <= 1'b1;
          if (wr_done) wr_f <= 1'b1;
          if (ow_done) ow_f <= 1'b1;
          if ((ir_f || ir_done) && (wr_f || wr_done) && (ow_f || ow_done)) begin
            done   <= 1'b1;
            cycles <= cnt + 1'b1;
            state  <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
