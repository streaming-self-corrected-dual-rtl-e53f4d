// tb_ifg_analysis: synthetic complex interferograms with known arrival time, carrier
// frequency and carrier phase.
// x[i] = A * exp(-((i - tc)/sigma)^2 / 2) * exp(j*(2*pi*f*(i - tc) + 2*pi*phi)), sigma = 6,
// FFT_N = WIN = 128, PRE = 60, the stream delayed by a 64-deep ring_buffer as in the full
// design. The trigger is raised by the bench at round(tc) - 4. Checks per interferogram:
// t_center within 0.15 sample of tc, f_bin = round(f*N), phi within 0.01 turn, dt_center and
// dphi against the differences of the true values, and the result arriving within the
// expected number of clocks after the trigger.
module tb_ifg_analysis;
  timeunit 1ns; timeprecision 100ps;
  import dcs_pkg::*;
  localparam int PRE = 60, WIN = 128, N = 128, RD = 64;
  localparam real PI = 3.14159265358979;
  localparam int NI = 6;
  logic clk = 0, rst = 1;
  cplx_t z, dly;
  logic z_valid, dly_valid, trig, busy, res_valid;
  logic [31:0] t_approx;
  ifg_result_t res;
  int checks = 0, failures = 0;
  real tc [NI], fq [NI], ph [NI];
  int  t_trig [NI];
  int  cyc = 0, n_res = 0;

  ring_buffer #(.DEPTH(RD)) u_ring (.clk, .rst, .din(z), .din_valid(z_valid), .dout(dly), .dout_valid(dly_valid));
  ifg_analysis #(.PRE(PRE), .WIN(WIN), .FFT_N(N)) dut (.clk, .rst, .trig, .t_approx, .dly, .dly_valid,
    .res, .res_valid, .busy);

  always #1 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real wrap(real v);
    return v - $floor(v + 0.5);
  endfunction
  function automatic real absr(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  always @(posedge clk) if (!rst && res_valid) begin
    int  n;
    real t_meas, ph_meas, e;
    n = n_res;
    t_meas  = real'(res.t_center) / 256.0;
    ph_meas = real'(res.phi) / 65536.0;
    checks += 4;
    if (absr(t_meas - tc[n]) > 0.15) begin failures++; $display("ifg %0d t %f exp %f", n, t_meas, tc[n]); end
    if (int'(res.f_bin) != $rtoi($floor(fq[n] * N + 0.5))) begin failures++; $display("ifg %0d bin %0d exp %f", n, res.f_bin, fq[n]*N); end
    e = wrap(ph_meas - ph[n]);
    if (absr(e) > 0.01) begin failures++; $display("ifg %0d phi %f exp %f", n, ph_meas, ph[n]); end
    if (cyc - t_trig[n] > (RD - PRE) + WIN + N + 7 + 2 * 18 + 64) begin
      failures++; $display("ifg %0d latency %0d", n, cyc - t_trig[n]);
    end
    if (n > 0) begin
      checks += 2;
      if (absr(real'(res.dt_center) / 256.0 - (tc[n] - tc[n-1])) > 0.25) begin
        failures++; $display("ifg %0d dt %f", n, real'(res.dt_center) / 256.0);
      end
      if (absr(wrap(real'(res.dphi) / 65536.0 - (ph[n] - ph[n-1]))) > 0.015) begin
        failures++; $display("ifg %0d dphi %f", n, real'(res.dphi) / 65536.0);
      end
    end
    n_res++;
  end

  initial begin
    int nxt;
    for (int n = 0; n < NI; n++) begin
      tc[n] = 300.0 + 400.0 * n + real'($urandom_range(0, 1000)) / 1000.0 * 3.0;
      fq[n] = (n == 2) ? -13.0 / N : (n == 4 ? 10.4 / N : 10.0 / N);
      ph[n] = wrap(0.37 * n * n + 0.1);
    end
    z = '0; z_valid = 0; trig = 0; t_approx = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    nxt = 0;
    for (int i = 0; i < 400 * NI + 600; i++) begin
      real re, im;
      re = 0; im = 0;
      for (int n = 0; n < NI; n++) begin
        real d, a;
        d = i - tc[n];
        if (d > -60 && d < 60) begin
          a = 10000.0 * $exp(-(d / 6.0) * (d / 6.0) / 2.0);
          re += a * $cos(2 * PI * (fq[n] * d + ph[n]));
          im += a * $sin(2 * PI * (fq[n] * d + ph[n]));
        end
      end
      z.re = 16'($rtoi(re)); z.im = 16'($rtoi(im));
      z_valid = 1;
      trig = 0;
      // the trigger for sample s is raised in the clock after s entered the stream
      if (nxt < NI && i == $rtoi($floor(tc[nxt] + 0.5)) - 3) begin
        trig = 1; t_approx = 32'(i - 1); t_trig[nxt] = cyc; nxt++;
      end
      @(negedge clk);
    end
    checks++;
    if (n_res != NI) begin failures++; $display("results %0d", n_res); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
