// tb_dcs_top_65khz: the whole pipeline, every parameter at its default, at the fastest
// interferogram rate the design is meant for: 65 kHz detuning, i.e. an interferogram every
// 4726 samples (307.2 MSa/s / 65 kHz), only ~390 clocks more than the 4335 clocks one analysis
// takes. Every interferogram must still be analysed, within 15 us of its trigger; rec_len is
// 4490 (95 % of the period) and records are averaged in fours. Nine interferograms in a row are
// left out (a gap longer than the 125 us FIFO) to force a resynchronisation. Noise-free
// stimulus, as in tb_dcs_top_full. All stimulus and checks are in dcs_bench.
module tb_dcs_top_65khz;
  timeunit 1ns; timeprecision 100ps;
  import dcs_pkg::*;
  logic clk, rst;
  logic signed [13:0] adc_data [16];
  logic [31:0] nco_freq, n_avg, avg_count;
  logic [DATA_W:0] trig_threshold;
  logic [TIME_INT-1:0] trig_holdoff;
  logic [15:0] rec_len;
  cplx_t corr;
  logic corr_valid, corr_first, avg_valid, avg_last, meas_valid, trig, fifo_overflow, resync_drop, grid_late;
  logic signed [39:0] avg_re, avg_im;
  ifg_result_t meas;
  logic [15:0] fifo_count;

  dcs_top u_dut (
    .clk, .rst, .adc_data, .nco_freq, .trig_threshold, .trig_holdoff, .rec_len, .n_avg,
    .corr, .corr_valid, .corr_first, .avg_re, .avg_im, .avg_valid, .avg_last, .avg_count,
    .meas, .meas_valid, .trig, .fifo_count, .fifo_overflow, .resync_drop, .grid_late);

  dcs_bench #(.P(4726), .NI(26), .GAP(8), .NGAP(9), .REC(4490), .N_AVG(4), .SIGMA(20.0), .LAT_MAX(4608), .NOISE(0)) u_bench (
    .clk, .rst, .adc_data, .nco_freq, .trig_threshold, .trig_holdoff, .rec_len, .n_avg,
    .corr, .corr_valid, .corr_first, .avg_re, .avg_im, .avg_valid, .avg_last,
    .meas, .meas_valid, .trig, .fifo_skip(u_dut.fifo_skip), .resync_drop, .grid_late);

  initial begin
    #700000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", u_bench.checks, u_bench.failures + 1);
    $finish;
  end
endmodule
