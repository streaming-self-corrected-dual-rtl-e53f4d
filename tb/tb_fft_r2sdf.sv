// tb_fft_r2sdf: 64-point FFT against a direct DFT computed here in real arithmetic.
// Three frames (a single tone on a bin, a tone between bins, random data) are streamed with
// gaps between them. Outputs arrive in bit-reversed order; output i must match
// DFT(x)[bitrev(i)] / N within 0.2 % of full scale plus 4 LSB. out_start must follow start by
// N - 1 + log2(N) clocks.
module tb_fft_r2sdf;
  timeunit 1ns; timeprecision 100ps;
  localparam int N = 64, L = 6, W = 24;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst = 1;
  logic start, out_start;
  logic signed [W-1:0] din_re, din_im, dout_re, dout_im;
  int checks = 0, failures = 0;
  real xr [3][N], xi [3][N];
  int  t_start [3], frame_out = 0;

  fft_r2sdf #(.N(N), .W(W)) dut (.clk, .rst, .start, .din_re, .din_im, .out_start, .dout_re, .dout_im);
  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic real absr(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic int bitrev(int v);
    int r = 0;
    for (int b = 0; b < L; b++) if (v & (1 << b)) r |= 1 << (L - 1 - b);
    return r;
  endfunction

  // checker
  initial begin
    for (int f = 0; f < 3; f++) begin
      do begin @(posedge clk); #0.1; end while (!out_start);
      checks++;
      if (cyc - t_start[f] != N - 1 + L) begin
        failures++;
        $display("frame %0d latency %0d", f, cyc - t_start[f]);
      end
      for (int i = 0; i < N; i++) begin
        int k;
        real er, ei, tol;
        if (i > 0) begin @(posedge clk); #0.1; end
        k = bitrev(i);
        er = 0; ei = 0;
        for (int n = 0; n < N; n++) begin
          er += xr[f][n] * $cos(2*PI*k*n/N) + xi[f][n] * $sin(2*PI*k*n/N);
          ei += xi[f][n] * $cos(2*PI*k*n/N) - xr[f][n] * $sin(2*PI*k*n/N);
        end
        er /= N; ei /= N;
        tol = 0.002 * 2.0**20 + 4;
        checks++;
        if (absr(real'(dout_re) - er) > tol || absr(real'(dout_im) - ei) > tol) begin
          failures++;
          if (failures < 10) $display("frame %0d out %0d bin %0d got %0d %0d exp %f %f", f, i, k, dout_re, dout_im, er, ei);
        end
      end
      frame_out++;
    end
  end

  initial begin
    start = 0; din_re = 0; din_im = 0;
    for (int n = 0; n < N; n++) begin
      xr[0][n] = $rtoi(2.0**20 * 0.9 * $cos(2*PI*5*n/N));
      xi[0][n] = $rtoi(2.0**20 * 0.9 * $sin(2*PI*5*n/N));
      xr[1][n] = $rtoi(2.0**20 * 0.7 * $cos(2*PI*11.3*n/N + 1.0));
      xi[1][n] = $rtoi(2.0**20 * 0.3 * $sin(2*PI*-7.6*n/N));
      xr[2][n] = real'($urandom_range(0, 2**21)) - 2.0**20;
      xi[2][n] = real'($urandom_range(0, 2**21)) - 2.0**20;
    end
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (5) @(negedge clk);
    for (int f = 0; f < 3; f++) begin
      for (int n = 0; n < N; n++) begin
        start  = (n == 0);
        if (n == 0) t_start[f] = cyc;
        din_re = W'($rtoi(xr[f][n]));
        din_im = W'($rtoi(xi[f][n]));
        @(negedge clk);
      end
      start = 0;
      din_re = 0; din_im = 0;
      repeat (N + 10 + f * 7) @(negedge clk);
    end
    repeat (3 * N) @(negedge clk);
    checks++;
    if (frame_out != 3) begin
      failures++;
      $display("frames out %0d", frame_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
