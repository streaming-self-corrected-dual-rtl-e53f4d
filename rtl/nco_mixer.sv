// nco_mixer: digital mixer at the converter input.
//
// Each fabric clock brings SAMPLES_PER_CLK consecutive real ADC samples (16 in the paper,
// the 4.9152 GSa/s converter read at 307.2 MHz). A numerically controlled oscillator keeps a
// PHASE_W-bit phase accumulator; sample k of a clock word sees the phase acc + k*freq_word,
// whose top LUT_BITS bits address a cosine table. Each sample is multiplied by that cosine,
// moving the band of interest (the paper allows carriers up to 2.3 GHz) towards the band the
// following average-by-8 and Hilbert stages keep. The paper says only that a digital mixer
// selects the frequency region; the real-valued cosine mixer, table size and word widths are
// this design's choice.
//
// Interface: din[k] is sample k of the word (k = 0 oldest). dout[k] = din[k]*cos >>> 13,
// a signed 16-bit value. Timing: one register stage, one clock of latency, one word per clock.
module nco_mixer #(
  parameter int unsigned SAMPLES_PER_CLK = 16,
  parameter int unsigned ADC_W           = 14,
  parameter int unsigned PHASE_W         = 32,
  parameter int unsigned LUT_BITS        = 10,
  parameter int unsigned OUT_W           = 16
) (
  input  logic                            clk,
  input  logic                            rst,
  input  logic [PHASE_W-1:0]              freq_word,  // phase step per ADC sample
  input  logic signed [ADC_W-1:0]         din  [SAMPLES_PER_CLK],
  output logic signed [OUT_W-1:0]         dout [SAMPLES_PER_CLK]
);
  typedef logic signed [15:0] tab_t [2**LUT_BITS];

  function automatic tab_t gen_cos();
    tab_t t;
    for (int i = 0; i < 2**LUT_BITS; i++)
      t[i] = 16'($rtoi($floor(32767.0 * $cos(2.0 * 3.14159265358979 * i / (2.0 ** LUT_BITS)) + 0.5)));
    return t;
  endfunction

  localparam tab_t COS_TAB = gen_cos();
  localparam int unsigned SHIFT = ADC_W + 15 - OUT_W;

  logic [PHASE_W-1:0] acc;

  always_ff @(posedge clk) begin
    if (rst) acc <= '0;
    else     acc <= acc + PHASE_W'(SAMPLES_PER_CLK) * freq_word;
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < SAMPLES_PER_CLK; k++) begin
      logic [PHASE_W-1:0]     ph;
      logic signed [ADC_W+15:0] prod;
      ph      = acc + PHASE_W'(k) * freq_word;
      prod    = din[k] * COS_TAB[ph[PHASE_W-1 -: LUT_BITS]];
      dout[k] <= OUT_W'(prod >>> SHIFT);
    end
  end

endmodule
