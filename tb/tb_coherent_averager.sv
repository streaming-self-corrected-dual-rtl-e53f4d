// tb_coherent_averager: records of rec_len = 10 random samples, marked by din_first, with
// random valid gaps; n_avg = 3, then n_avg = 1. Each output must equal the sum, computed here,
// of the corresponding samples of the records of that average; dout_last must mark position
// rec_len-1; n_done must count completed averages. Samples before the first record start are
// ignored.
module tb_coherent_averager;
  timeunit 1ns; timeprecision 100ps;
  import dcs_pkg::*;
  localparam int R = 10;
  logic clk = 0, rst = 1;
  cplx_t din;
  logic din_valid, din_first, dout_valid, dout_last;
  logic [31:0] n_avg, n_done;
  logic signed [39:0] dout_re, dout_im;
  int checks = 0, failures = 0;
  longint exp_re[$], exp_im[$];
  int n_out = 0, n_last = 0;

  coherent_averager #(.DEPTH(32)) dut (.clk, .rst, .din, .din_valid, .din_first,
    .rec_len(16'(R)), .n_avg, .dout_re, .dout_im, .dout_valid, .dout_last, .n_done);
  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && dout_valid) begin
    checks++;
    if (exp_re.size() == 0) begin
      failures++; $display("unexpected output");
    end else begin
      longint er, ei;
      er = exp_re.pop_front(); ei = exp_im.pop_front();
      if (dout_re != 40'(er) || dout_im != 40'(ei)) begin
        failures++;
        if (failures < 10) $display("out %0d got %0d %0d exp %0d %0d", n_out, dout_re, dout_im, er, ei);
      end
    end
    if (dout_last) begin
      n_last++;
      checks++;
      if (n_out % R != R - 1) begin failures++; $display("last at %0d", n_out); end
    end
    n_out++;
  end

  task automatic send(input cplx_t x, input bit first);
    while ($urandom_range(0, 3) == 0) begin din_valid = 0; @(negedge clk); end
    din = x; din_valid = 1; din_first = first;
    @(negedge clk);
    din_valid = 0; din_first = 0;
  endtask

  initial begin
    longint sr [R], si [R];
    din = '0; din_valid = 0; din_first = 0; n_avg = 3;
    repeat (3) @(negedge clk);
    rst = 0;
    // junk before the first record start
    repeat (4) send(cplx_t'{16'sd999, 16'sd999}, 0);
    for (int a = 0; a < 4; a++) begin
      int na;
      na = (a < 2) ? 3 : 1;
      if (a == 2) n_avg = 1;
      for (int j = 0; j < R; j++) begin sr[j] = 0; si[j] = 0; end
      for (int r = 0; r < na; r++)
        for (int j = 0; j < R; j++) begin
          cplx_t x;
          x.re = 16'($urandom); x.im = 16'($urandom);
          if (r == 0 && j == 0 && a == 2) x.re = 16'sh7fff;
          sr[j] += longint'(x.re); si[j] += longint'(x.im);
          if (r == na - 1) begin exp_re.push_back(sr[j]); exp_im.push_back(si[j]); end
          send(x, j == 0);
        end
    end
    // with n_avg = 1 a further record start is itself a complete average of its first sample
    exp_re.push_back(1); exp_im.push_back(1);
    send(cplx_t'{16'sd1, 16'sd1}, 1);
    repeat (10) @(negedge clk);
    checks++;
    if (n_out != 4 * R + 1 || n_last != 4 || n_done != 4 || exp_re.size() != 0) begin
      failures++;
      $display("outputs %0d lasts %0d done %0d left %0d", n_out, n_last, n_done, exp_re.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
