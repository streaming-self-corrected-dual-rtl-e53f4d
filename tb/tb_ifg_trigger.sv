// tb_ifg_trigger: bursts of large samples at known positions in a quiet stream.
// Expected: one trigger per burst, at the first sample whose |I|+|Q| reaches the threshold,
// with t_approx equal to that sample's index; samples inside the hold-off must not re-trigger;
// a burst after the hold-off must. Gaps in din_valid must not advance the time index.
// After a directed part, 5400 random samples (bursts at, just below and far above the
// threshold, some inside the hold-off) are checked against a reference model of the rule.
module tb_ifg_trigger;
  timeunit 1ns; timeprecision 100ps;
  import dcs_pkg::*;
  logic clk = 0, rst = 1;
  cplx_t din;
  logic din_valid;
  logic trig;
  logic [31:0] t_approx, t_now;
  localparam int NS = 6000;       // samples driven
  localparam int THR = 1000, HOLD = 50;
  int checks = 0, failures = 0;
  int exp_times[$];
  int n_trig = 0, n_exp = 0;

  ifg_trigger dut (.clk, .rst, .din, .din_valid, .threshold(17'(THR)), .holdoff(32'(HOLD)),
                   .trig, .t_approx, .t_now);
  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && trig) begin
    n_trig++;
    checks++;
    if (exp_times.size() == 0) begin
      failures++;
      $display("unexpected trigger at %0d", t_approx);
    end else begin
      int e;
      e = exp_times.pop_front();
      if (int'(t_approx) != e) begin
        failures++;
        $display("trigger at %0d expected %0d", t_approx, e);
      end
    end
  end

  logic signed [15:0] xre [NS], xim [NS];

  function automatic int absi(input int v);
    return (v < 0) ? -v : v;
  endfunction

  initial begin
    int hold;
    din = '0; din_valid = 0;
    // Directed part, samples 0..599: bursts start at 100 (triggers), 130 (inside the hold-off,
    // no trigger), 200 (triggers) and 400 after a sub-threshold lead-in at 398/399 (triggers
    // at 400). |I|+|Q| = 1200 inside a burst.
    for (int i = 0; i < 600; i++) begin
      if ((i >= 100 && i < 110) || (i >= 130 && i < 140) || (i >= 200 && i < 205) || (i >= 400 && i < 410)) begin
        xre[i] = (i % 2 != 0) ? -16'sd600 : 16'sd600;
        xim[i] = 16'sd600;
      end else if (i == 398 || i == 399) begin
        xre[i] = 16'sd600; xim[i] = 16'sd0;
      end else begin
        xre[i] = 16'($urandom_range(0, 200)) - 16'sd100;
        xim[i] = 16'($urandom_range(0, 200)) - 16'sd100;
      end
    end
    // Random part: bursts of random length, spacing and sign, some closer than the hold-off,
    // with levels on both sides of the threshold (including exactly THR and THR - 1).
    for (int i = 600; i < NS; i++) begin
      int r;
      r = $urandom_range(0, 99);
      if (r < 6) begin
        xre[i] = 16'($urandom_range(0, 1) != 0 ? THR - 300 : -(THR - 300));
        xim[i] = 16'($urandom_range(0, 1) != 0 ? 300 : -300);             // exactly THR
      end else if (r < 12) begin
        xre[i] = 16'($urandom_range(0, 1) != 0 ? THR - 301 : -(THR - 301));
        xim[i] = 16'($urandom_range(0, 1) != 0 ? 300 : -300);             // THR - 1
      end else if (r < 16) begin
        xre[i] = 16'($urandom_range(0, 4000)) - 16'sd2000;
        xim[i] = 16'($urandom_range(0, 4000)) - 16'sd2000;
      end else begin
        xre[i] = 16'($urandom_range(0, 200)) - 16'sd100;
        xim[i] = 16'($urandom_range(0, 200)) - 16'sd100;
      end
    end
    // Reference: first sample at or above the threshold fires and starts a hold-off of HOLD
    // samples during which nothing fires.
    hold = 0;
    for (int i = 0; i < NS; i++) begin
      if (hold != 0) hold--;
      else if (absi(int'(xre[i])) + absi(int'(xim[i])) >= THR) begin
        exp_times.push_back(i);
        hold = HOLD;
      end
    end
    n_exp = exp_times.size();
    checks++;
    if (exp_times[0] != 100 || exp_times[1] != 200 || exp_times[2] != 400) begin
      failures++;
      $display("reference model disagrees with the directed cases");
    end

    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int i = 0; i < NS; i++) begin
      din_valid = ($urandom_range(0, 3) != 0);
      if (!din_valid) begin
        i--;
      end else begin
        din.re = xre[i];
        din.im = xim[i];
      end
      @(negedge clk);
    end
    din_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (n_trig != n_exp || exp_times.size() != 0) begin
      failures++;
      $display("triggers %0d of %0d, missing %0d", n_trig, n_exp, exp_times.size());
    end
    checks++;
    if (t_now != NS) begin
      failures++;
      $display("t_now %0d", t_now);
    end
    $display("triggers checked: %0d", n_trig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
