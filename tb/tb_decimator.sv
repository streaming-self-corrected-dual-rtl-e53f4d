// tb_decimator: random 16-bit samples; each output must equal floor(sum of its 8 inputs / 8),
// computed here with integers, one clock after the inputs.
module tb_decimator;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0;
  logic signed [15:0] din [16];
  logic signed [15:0] dout [2];
  int checks = 0, failures = 0;

  decimator dut (.clk, .din, .dout);
  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int cyc = 0; cyc < 500; cyc++) begin
      int exp_v [2];
      @(negedge clk);
      foreach (din[k]) din[k] = (cyc < 5) ? 16'sh7fff : 16'($urandom);
      for (int j = 0; j < 2; j++) begin
        int s;
        s = 0;
        for (int k = 0; k < 8; k++) s += int'(din[j*8+k]);
        exp_v[j] = s >>> 3;
      end
      @(posedge clk); #0.1;
      for (int j = 0; j < 2; j++) begin
        checks++;
        if (int'(dout[j]) != exp_v[j]) begin
          failures++;
          $display("cyc %0d j %0d got %0d exp %0d", cyc, j, dout[j], exp_v[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
