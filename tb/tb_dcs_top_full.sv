// tb_dcs_top_full: end-to-end run of the pipeline with every parameter at its default
// (4 us ring buffer, 2048-point FFT, 125 us FIFO) and the operating point of a 20 kHz
// detuning: interferograms every 15360 samples (50 us at 307.2 MSa/s), rec_len 14592 (95 % of
// the fabric rate), averages of 2. Each period varies randomly by up to +-700 samples (4.6 %),
// close to the +-5 % detuning change that the 95 % output rate is meant to absorb. The bursts
// keep a fixed width while the grid step follows the period, so neighbouring records, resampled
// with steps up to 9 % apart, differ in shape by up to ~9 % of the peak; the record comparison
// allows 15 % here (an uncorrected phase slip of a third of a turn gives ~170 %). The analysis
// must deliver each result within 4608 clocks (15 us) of its trigger. Ten interferogram slots,
// three of them left out to force a resynchronisation. The stimulus is noise-free here: over the 2458-sample analysis window even
// +-2 LSB of converter noise moves the first-moment arrival time by 0.3 to 0.7 sample, beyond
// the 0.3-sample tolerance of the timing check. All stimulus and checks are in dcs_bench.
module tb_dcs_top_full;
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

  dcs_bench #(.P(15360), .NI(10), .GAP(5), .REC(14592), .N_AVG(2), .SIGMA(20.0), .LAT_MAX(4608), .NOISE(0), .PJIT(700), .SIM_TOL(0.15)) u_bench (
    .clk, .rst, .adc_data, .nco_freq, .trig_threshold, .trig_holdoff, .rec_len, .n_avg,
    .corr, .corr_valid, .corr_first, .avg_re, .avg_im, .avg_valid, .avg_last,
    .meas, .meas_valid, .trig, .fifo_skip(u_dut.fifo_skip), .resync_drop, .grid_late);

  initial begin
    #800000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", u_bench.checks, u_bench.failures + 1);
    $finish;
  end
endmodule
