// fft_sdf_stage: one radix-2 single-path delay-feedback (SDF) stage of a streaming
// decimation-in-frequency FFT.
//
// The stage handles blocks of 2*D consecutive samples. During the first D samples of a block
// the input goes into a D-deep delay line and the stage outputs what the delay line returns:
// the differences of the previous block, multiplied by the twiddle factor exp(-j*2*pi*c/(2D))
// (c = position in the half-block). During the second D samples the stage pairs each input b
// with the sample a that entered D clocks earlier, outputs (a+b)/2 and stores (a-b)/2 in the
// delay line. The halving keeps the word width fixed (the full FFT is scaled by 1/N).
//
// Interface/timing: one sample per clock, every clock. `start` marks the first sample of a
// frame and resets the block counter. out_start marks the first output sample of that frame,
// D+1 clocks later; outputs are registered.
module fft_sdf_stage #(
  parameter int unsigned D  = 1024,  // half block length
  parameter int unsigned W  = 24,    // data width
  parameter int unsigned TW = 18     // twiddle width, 1.0 = 2^(TW-2)
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
  localparam int unsigned CW  = $clog2(2 * D);
  localparam int unsigned AW  = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned ONE = 2 ** (TW - 2);

  typedef logic signed [TW-1:0] tw_t [D];

  function automatic tw_t gen_tw(input bit imag);
    tw_t t;
    for (int c = 0; c < D; c++) begin
      real a;
      a = 2.0 * 3.14159265358979 * c / (2.0 * D);
      if (imag) t[c] = TW'($rtoi($floor(-$sin(a) * ONE + 0.5)));
      else      t[c] = TW'($rtoi($floor( $cos(a) * ONE + 0.5)));
    end
    return t;
  endfunction

  localparam tw_t TW_RE = gen_tw(1'b0);
  localparam tw_t TW_IM = gen_tw(1'b1);

  logic signed [W-1:0] dl_re [D];
  logic signed [W-1:0] dl_im [D];
  logic [AW-1:0]       ptr;
  logic [CW-1:0]       cnt;
  logic                pending;
  logic [CW-1:0]       cnt_now;

  assign cnt_now = start ? '0 : cnt;

  always_ff @(posedge clk) begin
    logic signed [W-1:0]    a_re, a_im;
    logic signed [W:0]      s_re, s_im, d_re, d_im;
    logic signed [W+TW-1:0] p_re, p_im;
    logic [AW-1:0]          ti;
    a_re = dl_re[ptr];
    a_im = dl_im[ptr];
    ti   = AW'(cnt_now);
    if (cnt_now < CW'(D)) begin
      dl_re[ptr] <= din_re;
      dl_im[ptr] <= din_im;
      p_re = (W+TW)'(a_re) * (W+TW)'(TW_RE[ti]) - (W+TW)'(a_im) * (W+TW)'(TW_IM[ti]);
      p_im = (W+TW)'(a_re) * (W+TW)'(TW_IM[ti]) + (W+TW)'(a_im) * (W+TW)'(TW_RE[ti]);
      dout_re <= W'((p_re + (W+TW)'(ONE / 2)) >>> (TW - 2));
      dout_im <= W'((p_im + (W+TW)'(ONE / 2)) >>> (TW - 2));
    end else begin
      s_re = (W+1)'(a_re) + (W+1)'(din_re);
      s_im = (W+1)'(a_im) + (W+1)'(din_im);
      d_re = (W+1)'(a_re) - (W+1)'(din_re);
      d_im = (W+1)'(a_im) - (W+1)'(din_im);
      dl_re[ptr] <= W'(d_re >>> 1);
      dl_im[ptr] <= W'(d_im >>> 1);
      dout_re    <= W'(s_re >>> 1);
      dout_im    <= W'(s_im >>> 1);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt       <= '0;
      ptr       <= '0;
      pending   <= 1'b0;
      out_start <= 1'b0;
    end else begin
      cnt       <= cnt_now + 1'b1;
      ptr       <= (ptr == AW'(D - 1)) ? '0 : ptr + 1'b1;
      out_start <= (pending || start) && (cnt_now == CW'(D));
      if (start)                      pending <= 1'b1;
      else if (cnt_now == CW'(D))     pending <= 1'b0;
    end
  end

endmodule
