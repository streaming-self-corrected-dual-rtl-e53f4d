// fft_r2sdf: streaming N-point radix-2 FFT (decimation in frequency, single-path delay
// feedback), used by the interferogram analysis to find the carrier frequency and phase.
//
// log2(N) fft_sdf_stage instances in a chain with delays N/2, N/4, ..., 1. Samples enter one
// per clock, every clock, with `start` on the first sample of a frame; the frame's N outputs
// leave one per clock in bit-reversed bin order (output number i holds bin bitrev(i)), with
// out_start on the first. Each stage halves its results, so dout = DFT(din)/N. The paper only
// says the frequency is found "via a fast Fourier transform"; the architecture, size (N = 2048
// by default) and widths are this design's choices.
//
// Timing: out_start follows start by N - 1 + log2(N) clocks. The input must hold one frame for
// N clocks before the next start; a new start before the previous frame has left corrupts it.
module fft_r2sdf #(
  parameter int unsigned N  = 2048,
  parameter int unsigned W  = 24,
  parameter int unsigned TW = 18
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                start,
  input  logic signed [W-1:0] din_re,
  input  logic signed [W-1:0] din_im,
  output logic                out_start,
  output logic signed [W-1:0] dout_re,
  output logic signed [W-1:0] dout_im
);
  localparam int unsigned L = $clog2(N);

  logic                st [L+1];
  logic signed [W-1:0] re [L+1];
  logic signed [W-1:0] im [L+1];

  assign st[0] = start;
  assign re[0] = din_re;
  assign im[0] = din_im;

  for (genvar s = 0; s < L; s++) begin : g_stage
    fft_sdf_stage #(.D(N >> (s + 1)), .W(W), .TW(TW)) u_stage (
      .clk, .rst,
      .start(st[s]), .din_re(re[s]), .din_im(im[s]),
      .out_start(st[s+1]), .dout_re(re[s+1]), .dout_im(im[s+1])
    );
  end

  assign out_start = st[L];
  assign dout_re   = re[L];
  assign dout_im   = im[L];

endmodule
