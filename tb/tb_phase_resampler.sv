// tb_phase_resampler: resampling and phase correction of a known stream.
// The stream is x[i] = 10000*exp(j*2*pi*i/200), pushed one sample per clock through a
// 512-deep sample_fifo. Analysis results (arrival time t_n with a fractional part, phase phi_n)
// are injected 40 samples after each t_n; the periods alternate above and below 100 samples
// (detuning up to +-5 %) and rec_len = 95. For every grid point j of the segment between t_n and
// t_n+1 the bench computes t = t_n + j*dt/95 and phi = phi_n + j*dphi/95 from the same
// fixed-point inputs and expects x(t)*exp(-j*2*pi*phi) within 8 LSB (linear interpolation of a
// 200-sample period costs ~1.2 LSB); dout_first must mark j = 48. After six interferograms the
// results stop long enough for the FIFO to fill: the unit must drop and resynchronise, then
// resume with the following interferograms. `late` must never rise.
module tb_phase_resampler;
  timeunit 1ns; timeprecision 100ps;
  import dcs_pkg::*;
  localparam int M = 95, DEPTH = 512, NI = 9;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst = 1;
  cplx_t z, fifo_dout, dout;
  logic fifo_skip;
  logic [$clog2(DEPTH+2)-1:0] fifo_skip_n;
  logic push, fifo_valid, fifo_pop, dout_valid, dout_first, drop, late, ovf;
  logic [$clog2(DEPTH+2)-1:0] fifo_count;
  ifg_result_t res;
  logic res_valid;
  int checks = 0, failures = 0, n_drop = 0, n_late = 0, n_out = 0, n_first = 0;
  real tq [NI], pq [NI];   // quantised t (samples) and phi (turns)
  real exp_t[$], exp_p[$];
  bit  exp_f[$];

  sample_fifo #(.DEPTH(DEPTH)) u_fifo (.clk, .rst, .din(z), .push, .pop(fifo_pop), .skip(fifo_skip), .skip_n(fifo_skip_n), .dout(fifo_dout),
    .dout_valid(fifo_valid), .count(fifo_count), .overflow(ovf));
  phase_resampler #(.FIFO_DEPTH(DEPTH)) dut (.clk, .rst, .res, .res_valid, .rec_len(16'(M)),
    .fifo_dout, .fifo_valid, .fifo_count, .fifo_pop, .fifo_skip, .fifo_skip_n, .dout, .dout_valid, .dout_first, .drop, .late);

  always #1 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  always @(posedge clk) if (!rst) begin
    if (drop) n_drop++;
    if (late) n_late++;
    if (dout_valid) begin
      checks++;
      if (exp_t.size() == 0) begin
        failures++;
        if (failures < 10) $display("unexpected output %0d", n_out);
      end else begin
        real t, p, er, ei;
        bit  f;
        t = exp_t.pop_front(); p = exp_p.pop_front(); f = exp_f.pop_front();
        er = 10000.0 * $cos(2 * PI * (t / 200.0 - p));
        ei = 10000.0 * $sin(2 * PI * (t / 200.0 - p));
        if (absr(real'(dout.re) - er) > 8.0 || absr(real'(dout.im) - ei) > 8.0 || dout_first != f) begin
          failures++;
          if (failures < 10) $display("out %0d t %f got %0d %0d f%0d exp %f %f f%0d", n_out, t, dout.re, dout.im, dout_first, er, ei, f);
        end
      end
      if (dout_first) n_first++;
      n_out++;
    end
  end

  task automatic add_segment(int a, int b);
    real dt, dp, st, sp;
    dt = tq[b] - tq[a];
    dp = pq[b] - pq[a];
    dp = dp - $floor(dp + 0.5);
    st = $floor(dt * 2.0**24 / M) / 2.0**24;
    sp = $floor(absr(dp) * 2.0**32 / M) / 2.0**32;
    if (dp < 0) sp = -sp;
    for (int j = 0; j < M; j++) begin
      exp_t.push_back(tq[a] + j * st);
      exp_p.push_back(pq[a] + j * sp);
      exp_f.push_back(j == M - M / 2);
    end
  endtask

  initial begin
    real t;
    int  per [NI] = '{0, 100, 104, 96, 103, 97, 900, 101, 99};
    int  k;
    t = 150.0;
    for (int n = 0; n < NI; n++) begin
      t += per[n];
      tq[n] = $floor((t + real'($urandom_range(0, 255)) / 256.0) * 256.0) / 256.0;
      pq[n] = $floor((0.21 * n * n - 0.3 * n) * 65536.0) / 65536.0;
      pq[n] = pq[n] - $floor(pq[n] + 0.5);
    end
    for (int n = 0; n < 5; n++) add_segment(n, n + 1);
    add_segment(6, 7);   // after the resynchronisation, index 6 becomes the new base
    add_segment(7, 8);
    z = '0; push = 0; res = '0; res_valid = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    k = 0;
    for (int i = 0; i < int'(tq[NI-1]) + 400; i++) begin
      z.re = 16'($rtoi(10000.0 * $cos(2 * PI * i / 200.0)));
      z.im = 16'($rtoi(10000.0 * $sin(2 * PI * i / 200.0)));
      push = 1;
      res_valid = 0;
      if (k < NI && i == int'($floor(tq[k])) + 40) begin
        real dp;
        dp = pq[k] - ((k > 0) ? pq[k-1] : 0.0);
        res.t_center  = 40'($rtoi(tq[k] * 256.0));
        res.dt_center = 40'($rtoi((tq[k] - ((k > 0) ? tq[k-1] : 0.0)) * 256.0));
        res.phi       = 16'($rtoi(pq[k] * 65536.0));
        res.dphi      = 16'(res.phi - 16'($rtoi(((k > 0) ? pq[k-1] : 0.0) * 65536.0)));
        res.f_bin     = 0;
        res_valid = 1;
        k++;
      end
      @(negedge clk);
    end
    push = 0;
    repeat (50) @(negedge clk);
    checks += 4;
    if (exp_t.size() != 0) begin failures++; $display("missing outputs %0d", exp_t.size()); end
    if (n_first != 7) begin failures++; $display("record starts %0d", n_first); end
    if (n_drop == 0) begin failures++; $display("no drop"); end
    if (n_late != 0 || ovf) begin failures++; $display("late %0d", n_late); end
    $display("outputs %0d drops %0d", n_out, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
