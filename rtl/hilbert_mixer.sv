// hilbert_mixer: analytic signal, fs/4 down-shift and decimation by two.
//
// Input: two real samples per clock (614.4 MSa/s), din[0] older than din[1]. A TAPS-long
// FIR Hilbert transformer (51 taps by default, taken from the paper's "51st-order" filter,
// Hamming-windowed ideal response h[n] = 2/(pi*n) for odd n, 0 for even n) gives the
// quadrature part Q; the in-phase part I is the input delayed by the filter's group delay
// (TAPS-1)/2. z = I + jQ has (almost) no negative-frequency content, so it can be multiplied
// by exp(-j*pi*n/2) (a shift by -fs/4 = -153.6 MHz) and every second sample dropped without
// aliasing. Only the kept (even) samples are computed: for them exp(-j*pi*n/2) is +1 or -1
// alternately, so the mixer is a sign flip. Output: one complex sample per clock
// (307.2 MSa/s), the rate the rest of the pipeline runs at.
//
// The paper gives the filter order, the fs/4 mixing and the decimation; the window, the
// 16-bit Q1.15 coefficients and the saturation to 16 bits are this design's choices.
// Timing: output sample m corresponds to input sample 2m - (TAPS-1)/2 + 1 of the stream;
// latency is two clocks after the last needed input; dout_valid rises once the tap history
// is full after reset.
module hilbert_mixer
  import dcs_pkg::*;
#(
  parameter int unsigned TAPS   = 51,
  parameter int unsigned W      = 16,
  parameter int unsigned COEF_W = 16
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [W-1:0] din [2],
  output cplx_t               dout,
  output logic                dout_valid
);
  localparam int unsigned D  = (TAPS - 1) / 2;
  localparam int unsigned AW = W + COEF_W + $clog2(TAPS) + 1;

  typedef logic signed [COEF_W-1:0] coef_t [TAPS];

  // coef[k] multiplies x[c + D - k], i.e. coef[k] = h[k - D] (index k = 0 is the newest).
  function automatic coef_t gen_coef();
    coef_t c;
    for (int k = 0; k < TAPS; k++) begin
      int  n;
      real h, w;
      n = k - D;
      if (n % 2 == 0) h = 0.0;
      else            h = 2.0 / (3.14159265358979 * n);
      w = 0.54 + 0.46 * $cos(3.14159265358979 * n / (D + 1.0));
      c[k] = COEF_W'($rtoi($floor(h * w * (2.0 ** (COEF_W - 1)) + 0.5)));
    end
    return c;
  endfunction

  localparam coef_t COEF = gen_coef();

  logic signed [W-1:0] hist [TAPS+1];   // hist[0] newest real sample
  logic [$clog2(TAPS+4)-1:0] fill;
  logic                      flip;

  always_ff @(posedge clk) begin
    hist[0] <= din[1];
    hist[1] <= din[0];
    for (int k = 2; k <= TAPS; k++) hist[k] <= hist[k-2];
  end

  function automatic logic signed [W-1:0] sat(input logic signed [AW-1:0] v);
    if (v > AW'(2**(W-1) - 1))       return W'(2**(W-1) - 1);
    else if (v < -AW'(2**(W-1) - 1)) return W'(-(2**(W-1) - 1));
    else                             return W'(v);
  endfunction

  always_ff @(posedge clk) begin
    logic signed [AW-1:0] q;
    logic signed [W-1:0]  i_s, q_s;
    q = '0;
    for (int k = 0; k < TAPS; k++)
      if (COEF[k] != 0) q = q + AW'(hist[k]) * AW'(COEF[k]);
    q_s = sat(q >>> (COEF_W - 1));
    i_s = hist[D];
    dout.re <= flip ? -i_s : i_s;
    dout.im <= flip ? -q_s : q_s;
    if (rst) begin
      flip       <= 1'b0;
      fill       <= '0;
      dout_valid <= 1'b0;
    end else begin
      flip <= ~flip;
      if (fill < ($clog2(TAPS+4))'(TAPS/2 + 2)) fill <= fill + 1'b1;
      dout_valid <= (fill >= ($clog2(TAPS+4))'(TAPS/2 + 1));
    end
  end

endmodule
