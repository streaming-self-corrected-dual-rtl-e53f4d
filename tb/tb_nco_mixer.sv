// tb_nco_mixer: checks the digital mixer against a real-valued model.
// Random 14-bit samples and two frequency words are applied; the model tracks the phase of
// every sample (k * freq_word per sample), takes the table index from the top 10 bits and
// forms din * 32767*cos(2*pi*index/1024) / 2^13 in real arithmetic. Outputs must agree within
// 2 LSB. A watchdog ends the run.
module tb_nco_mixer;
  timeunit 1ns; timeprecision 100ps;
  localparam int S = 16;
  logic clk = 0, rst = 1;
  logic [31:0] fw;
  logic signed [13:0] din [S];
  logic signed [15:0] dout [S];
  int checks = 0, failures = 0;
  logic [31:0] ph_model;

  nco_mixer dut (.clk, .rst, .freq_word(fw), .din, .dout);

  always #1 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [13:0] held [S];
    fw = 32'h1234_5678;
    foreach (din[k]) din[k] = '0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    ph_model = 0;
    for (int cyc = 0; cyc < 400; cyc++) begin
      if (cyc == 200) fw = 32'hB000_0001;   // change frequency mid-run
      foreach (din[k]) din[k] = 14'($urandom);
      held = din;
      @(posedge clk);   // mixer registers here using ph_model as its accumulator
      #0.1;
      for (int k = 0; k < S; k++) begin
        logic [31:0] ph;
        real c, e;
        int  idx;
        ph  = ph_model + 32'(k) * fw;
        idx = int'(ph[31:22]);
        c   = $floor(32767.0 * $cos(2.0 * 3.14159265358979 * idx / 1024.0) + 0.5);
        e   = $floor(real'(held[k]) * c / 8192.0);
        checks++;
        if ((real'(dout[k]) - e) > 2.0 || (e - real'(dout[k])) > 2.0) begin
          failures++;
          if (failures < 10) $display("cyc %0d k %0d got %0d exp %f", cyc, k, dout[k], e);
        end
      end
      ph_model = ph_model + 32'(S) * fw;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
