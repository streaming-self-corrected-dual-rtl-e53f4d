// tb_ring_buffer: a counting stream with random valid gaps goes in; every valid output must
// be the sample that entered exactly DEPTH valid samples earlier and must appear in the clock
// after the input that pushes it out; no output may be valid before DEPTH samples were written.
// Two depths are tried.
module tb_ring_buffer;
  timeunit 1ns; timeprecision 100ps;
  import dcs_pkg::*;
  logic clk = 0, rst = 1;
  cplx_t din, d1, d2;
  logic  din_valid, v1, v2;
  int checks = 0, failures = 0;
  int n_in, n1, n2;
  int cyc = 0, n_acc = 0;
  int acc_cyc [4096];   // clock at which input n was accepted

  ring_buffer #(.DEPTH(13)) dut1 (.clk, .rst, .din, .din_valid, .dout(d1), .dout_valid(v1));
  ring_buffer #(.DEPTH(64)) dut2 (.clk, .rst, .din, .din_valid, .dout(d2), .dout_valid(v2));
  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output k must leave in the clock after input k + DEPTH was accepted.
  always @(posedge clk) if (!rst) begin
    if (v1) begin
      checks++;
      if (int'(d1.re) != n1 || int'(d1.im) != -n1 || acc_cyc[n1 + 13] != cyc - 1) begin
        failures++; $display("d13: got %0d exp %0d", d1.re, n1);
      end
      n1++;
    end
    if (v2) begin
      checks++;
      if (int'(d2.re) != n2 || int'(d2.im) != -n2 || acc_cyc[n2 + 64] != cyc - 1) begin
        failures++; $display("d64: got %0d exp %0d", d2.re, n2);
      end
      n2++;
    end
    if (din_valid) begin
      acc_cyc[n_acc] = cyc;
      n_acc++;
    end
    cyc++;
  end

  initial begin
    n_in = 0; n1 = 0; n2 = 0;
    din = '0; din_valid = 0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int c = 0; c < 2000; c++) begin
      din_valid = ($urandom_range(0, 4) != 0);
      din.re = 16'(n_in);
      din.im = 16'(-n_in);
      @(posedge clk);
      if (din_valid) n_in++;
      @(negedge clk);
    end
    din_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (n1 != n_in - 13 || n2 != n_in - 64) begin
      failures++;
      $display("counts: in %0d out13 %0d out64 %0d", n_in, n1, n2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
