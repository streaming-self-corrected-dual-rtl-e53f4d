// ifg_trigger: edge trigger that finds interferograms in the complex stream.
//
// Every valid sample gets a running index t_now (a free-running sample counter that is the
// time base of the whole pipeline). The trigger compares the cheap magnitude |I| + |Q| with a
// programmable threshold. When armed and the magnitude reaches the threshold, it emits a one-
// clock pulse `trig` with `t_approx`, the index of that sample (the approximate arrival time),
// and disarms for `holdoff` samples so one interferogram gives one trigger. The paper says only
// "an edge trigger detects interferograms ... and their approximate occurrence time"; the
// L1 magnitude, the threshold and the hold-off are this design's choices.
//
// Timing: trig/t_approx appear one clock after the sample that crossed the threshold.
module ifg_trigger
  import dcs_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  cplx_t                    din,
  input  logic                     din_valid,
  input  logic [DATA_W:0]          threshold,  // on |I| + |Q|
  input  logic [TIME_INT-1:0]      holdoff,    // samples before re-arming
  output logic                     trig,
  output logic [TIME_INT-1:0]      t_approx,
  output logic [TIME_INT-1:0]      t_now       // index of the next valid sample
);
  logic [TIME_INT-1:0] hold_cnt;
  logic [DATA_W:0]     mag;

  always_comb begin
    logic [DATA_W-1:0] ar, ai;
    ar  = din.re[DATA_W-1] ? DATA_W'(-din.re) : DATA_W'(din.re);
    ai  = din.im[DATA_W-1] ? DATA_W'(-din.im) : DATA_W'(din.im);
    mag = {1'b0, ar} + {1'b0, ai};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      t_now    <= '0;
      hold_cnt <= '0;
      trig     <= 1'b0;
      t_approx <= '0;
    end else begin
      trig <= 1'b0;
      if (din_valid) begin
        t_now <= t_now + 1'b1;
        if (hold_cnt != 0) begin
          hold_cnt <= hold_cnt - 1'b1;
        end else if (mag >= threshold) begin
          trig     <= 1'b1;
          t_approx <= t_now;
          hold_cnt <= holdoff;
        end
      end
    end
  end

endmodule
