// tb_hilbert_mixer: real tones in, complex phasors out.
// A real cosine at 0.30 and then 0.20 of the 614.4 MSa/s input rate must come out as a complex
// exponential of constant magnitude (a residual negative-frequency image would make it ripple)
// whose phase advances by (f - 0.25) * 2 turns per output sample, i.e. +0.10 and -0.10 turn.
// Magnitude must be within 3 % of the input amplitude, the phase step within 0.005 turn.
module tb_hilbert_mixer;
  timeunit 1ns; timeprecision 100ps;
  import dcs_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [15:0] din [2];
  cplx_t dout;
  logic dout_valid;
  int checks = 0, failures = 0;
  localparam real A = 12000.0;
  localparam real PI = 3.14159265358979;

  hilbert_mixer dut (.clk, .rst, .din, .dout, .dout_valid);
  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tone(input real f, input real exp_step);
    real prev_ph;
    int  n;
    prev_ph = 0.0;
    n = 0;
    rst = 1;
    @(negedge clk);
    rst = 0;
    for (int m = 0; m < 300; m++) begin
      din[0] = 16'($rtoi(A * $cos(2.0 * PI * f * (2 * m))));
      din[1] = 16'($rtoi(A * $cos(2.0 * PI * f * (2 * m + 1))));
      @(posedge clk); #0.1;
      if (dout_valid && m > 60) begin
        real mag, ph, st;
        mag = $sqrt(real'(dout.re) * real'(dout.re) + real'(dout.im) * real'(dout.im));
        ph  = $atan2(real'(dout.im), real'(dout.re)) / (2.0 * PI);
        checks++;
        if (mag < 0.97 * A || mag > 1.03 * A) begin
          failures++;
          if (failures < 10) $display("f %f m %0d mag %f", f, m, mag);
        end
        if (n > 0) begin
          st = ph - prev_ph;
          st = st - $floor(st + 0.5);
          checks++;
          if (st - exp_step > 0.005 || exp_step - st > 0.005) begin
            failures++;
            if (failures < 10) $display("f %f m %0d step %f exp %f", f, m, st, exp_step);
          end
        end
        prev_ph = ph;
        n++;
      end
      @(negedge clk);
    end
  endtask

  initial begin
    din[0] = 0; din[1] = 0;
    @(negedge clk);
    run_tone(0.30, 0.10);
    run_tone(0.20, -0.10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
