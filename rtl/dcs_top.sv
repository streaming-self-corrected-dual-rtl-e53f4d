// dcs_top: streaming self-correction pipeline of a dual-comb spectrometer.
//
// Data path (one clock = one 307.2 MHz fabric cycle):
//   16 real ADC samples -> nco_mixer -> decimator (average of 8, 2 real samples/clk)
//   -> hilbert_mixer (analytic signal, -fs/4 shift, drop every 2nd: 1 complex sample/clk)
//   -> sample_fifo (125 us) -> phase_resampler -> coherent_averager -> averaged records out.
// Measurement path, concurrent with it:
//   complex stream -> ifg_trigger (threshold) -> ifg_analysis, which reads the stream through
//   ring_buffer (4 us look-back) and returns arrival time, carrier frequency and phase of each
//   interferogram plus their changes; the results go out as a stream and steer the resampler.
// This follows the block diagram and text of the streaming self-corrected dual-comb
// spectrometer design; the converter, the DMA engines and the host processor are outside: the
// converter's samples come in on adc_data, the two DMA streams (averaged records, measured
// quantities) and the corrected stream leave as ports, and the host's settings come in as
// plain configuration inputs (this design's choice; they would be memory-mapped registers).
//
// Latency: a corrected sample leaves about one interferogram period plus ~14 us after it
// entered (it waits in the FIFO for the next interferogram's analysis); averaged sums leave
// during the last record of each average.
module dcs_top
  import dcs_pkg::*;
#(
  parameter int unsigned SAMPLES_PER_CLK = 16,
  parameter int unsigned ADC_W           = 14,
  parameter int unsigned DECIM           = 8,
  parameter int unsigned HILBERT_TAPS    = 51,
  parameter int unsigned RING_DEPTH      = 1229,            // 4 us
  parameter int unsigned PRE             = RING_DEPTH - 4,  // window samples before trigger
  parameter int unsigned WIN             = 2 * RING_DEPTH,  // 4 us before + 4 us after
  parameter int unsigned FFT_N           = 2048,
  parameter int unsigned FIFO_DEPTH      = 38400,           // 125 us
  parameter int unsigned AVG_DEPTH       = 16384,
  parameter int unsigned ACC_W           = 40
) (
  input  logic                       clk,
  input  logic                       rst,
  // converter samples, element 0 oldest
  input  logic signed [ADC_W-1:0]    adc_data [SAMPLES_PER_CLK],
  // settings from the host
  input  logic [31:0]                nco_freq,        // turns per ADC sample x 2^32
  input  logic [DATA_W:0]            trig_threshold,  // on |I| + |Q|
  input  logic [TIME_INT-1:0]        trig_holdoff,    // samples
  input  logic [15:0]                rec_len,         // output samples per interferogram
  input  logic [31:0]                n_avg,           // records per average
  // corrected stream
  output cplx_t                      corr,
  output logic                       corr_valid,
  output logic                       corr_first,
  // averaged records (to DMA)
  output logic signed [ACC_W-1:0]    avg_re,
  output logic signed [ACC_W-1:0]    avg_im,
  output logic                       avg_valid,
  output logic                       avg_last,
  output logic [31:0]                avg_count,
  // measured quantities (to DMA)
  output ifg_result_t                meas,
  output logic                       meas_valid,
  // status
  output logic                       trig,
  output logic [$clog2(FIFO_DEPTH+2)-1:0] fifo_count,
  output logic                       fifo_overflow,
  output logic                       resync_drop,
  output logic                       grid_late
);
  localparam int unsigned NDEC = SAMPLES_PER_CLK / DECIM;

  logic signed [15:0] mixed [SAMPLES_PER_CLK];
  logic signed [15:0] dec   [NDEC];
  cplx_t              z;
  logic               z_valid;

  nco_mixer #(.SAMPLES_PER_CLK(SAMPLES_PER_CLK), .ADC_W(ADC_W)) u_mix (
    .clk, .rst, .freq_word(nco_freq), .din(adc_data), .dout(mixed));

  decimator #(.SAMPLES_PER_CLK(SAMPLES_PER_CLK), .DECIM(DECIM), .W(16)) u_dec (
    .clk, .din(mixed), .dout(dec));

  hilbert_mixer #(.TAPS(HILBERT_TAPS), .W(16)) u_hil (
    .clk, .rst, .din(dec), .dout(z), .dout_valid(z_valid));

  // ---------------- measurement path ----------------
  logic [TIME_INT-1:0] t_approx, t_now_unused;
  cplx_t               dly;
  logic                dly_valid, ana_busy_unused;

  ifg_trigger u_trig (
    .clk, .rst, .din(z), .din_valid(z_valid), .threshold(trig_threshold),
    .holdoff(trig_holdoff), .trig(trig), .t_approx(t_approx), .t_now(t_now_unused));

  ring_buffer #(.DEPTH(RING_DEPTH)) u_ring (
    .clk, .rst, .din(z), .din_valid(z_valid), .dout(dly), .dout_valid(dly_valid));

  ifg_analysis #(.PRE(PRE), .WIN(WIN), .FFT_N(FFT_N)) u_ana (
    .clk, .rst, .trig, .t_approx, .dly, .dly_valid,
    .res(meas), .res_valid(meas_valid), .busy(ana_busy_unused));

  // ---------------- corrected data path ----------------
  cplx_t fifo_dout;
  logic  fifo_valid, fifo_pop, fifo_skip;
  logic [$clog2(FIFO_DEPTH+2)-1:0] fifo_skip_n;

  sample_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .din(z), .push(z_valid), .pop(fifo_pop), .skip(fifo_skip), .skip_n(fifo_skip_n), .dout(fifo_dout),
    .dout_valid(fifo_valid), .count(fifo_count), .overflow(fifo_overflow));

  phase_resampler #(.FIFO_DEPTH(FIFO_DEPTH)) u_res (
    .clk, .rst, .res(meas), .res_valid(meas_valid), .rec_len(rec_len),
    .fifo_dout, .fifo_valid, .fifo_count, .fifo_pop, .fifo_skip, .fifo_skip_n,
    .dout(corr), .dout_valid(corr_valid), .dout_first(corr_first),
    .drop(resync_drop), .late(grid_late));

  coherent_averager #(.DEPTH(AVG_DEPTH), .ACC_W(ACC_W)) u_avg (
    .clk, .rst, .din(corr), .din_valid(corr_valid), .din_first(corr_first),
    .rec_len(rec_len), .n_avg(n_avg),
    .dout_re(avg_re), .dout_im(avg_im), .dout_valid(avg_valid), .dout_last(avg_last),
    .n_done(avg_count));

endmodule
