// tb_dcs_top: end-to-end run of the whole pipeline at reduced sizes (4 us ring buffer -> 64
// samples, FFT 128 points, FIFO 1024 samples, interferogram period 400 samples, rec_len 380,
// averages of 3). All stimulus and checks are in dcs_bench.
module tb_dcs_top;
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
  logic [10:0] fifo_count;

  dcs_top #(.RING_DEPTH(64), .PRE(60), .WIN(128), .FFT_N(128), .FIFO_DEPTH(1024), .AVG_DEPTH(512)) u_dut (
    .clk, .rst, .adc_data, .nco_freq, .trig_threshold, .trig_holdoff, .rec_len, .n_avg,
    .corr, .corr_valid, .corr_first, .avg_re, .avg_im, .avg_valid, .avg_last, .avg_count,
    .meas, .meas_valid, .trig, .fifo_count, .fifo_overflow, .resync_drop, .grid_late);

  dcs_bench #(.P(400), .NI(14), .GAP(7), .REC(380), .N_AVG(3), .SIGMA(6.0), .LAT_MAX(600)) u_bench (
    .clk, .rst, .adc_data, .nco_freq, .trig_threshold, .trig_holdoff, .rec_len, .n_avg,
    .corr, .corr_valid, .corr_first, .avg_re, .avg_im, .avg_valid, .avg_last,
    .meas, .meas_valid, .trig, .fifo_skip(u_dut.fifo_skip), .resync_drop, .grid_late);

  initial begin
    #40000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", u_bench.checks, u_bench.failures + 1);
    $finish;
  end
endmodule
