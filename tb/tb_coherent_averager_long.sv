// tb_coherent_averager_long: the averaging counts of long integrations, through the real
// accumulator width. Records are only two samples long so that the number of records can be
// that of long measurements: averages of 2,100,000 records (more than 100 s at 20 kHz),
// 1,000,000 records (50 s) and 20,000 records (1 s), back to back with no gap. Position 0
// always carries the most positive and the most negative sample value (+32767, -32768), so
// its sums reach +-6.9e10, far beyond 32 bits; position 1 carries random samples. Both outputs
// must equal the sums accumulated here in 64-bit integers, exactly; dout_last and n_done must mark the three averages. The input is valid on
// every clock, so this also checks one sample per clock sustained over 6 million clocks.
module tb_coherent_averager_long;
  timeunit 1ns; timeprecision 100ps;
  import dcs_pkg::*;
  localparam int R = 2;
  localparam int NAV = 3;
  localparam int NA [NAV] = '{2100000, 1000000, 20000};
  logic clk = 0, rst = 1;
  cplx_t din;
  logic din_valid, din_first, dout_valid, dout_last;
  logic [31:0] n_avg, n_done;
  logic signed [39:0] dout_re, dout_im;
  int checks = 0, failures = 0;
  longint exp_re[$], exp_im[$];
  int n_out = 0, n_last = 0;

  coherent_averager #(.DEPTH(4)) dut (.clk, .rst, .din, .din_valid, .din_first,
    .rec_len(16'(R)), .n_avg, .dout_re, .dout_im, .dout_valid, .dout_last, .n_done);
  always #1 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
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
      $display("average output %0d: %0d %0d (expected %0d %0d)", n_out, dout_re, dout_im, er, ei);
      if (longint'(dout_re) != er || longint'(dout_im) != ei) failures++;
    end
    if (dout_last) n_last++;
    n_out++;
  end

  initial begin
    longint sr [R], si [R];
    din = '0; din_valid = 0; din_first = 0; n_avg = NA[0];
    repeat (3) @(negedge clk);
    rst = 0;
    for (int a = 0; a < NAV; a++) begin
      for (int j = 0; j < R; j++) begin sr[j] = 0; si[j] = 0; end
      for (int r = 0; r < NA[a]; r++) begin
        // the new n_avg is taken at the start of its first record
        if (r == 0) n_avg = NA[a];
        for (int j = 0; j < R; j++) begin
          cplx_t x;
          if (j == 0) begin
            x.re = 16'sh7fff; x.im = 16'sh8000;
          end else begin
            x.re = 16'($urandom); x.im = 16'($urandom);
          end
          sr[j] += longint'(x.re); si[j] += longint'(x.im);
          if (r == NA[a] - 1) begin exp_re.push_back(sr[j]); exp_im.push_back(si[j]); end
          din = x; din_valid = 1; din_first = (j == 0);
          @(negedge clk);
        end
      end
    end
    din_valid = 0; din_first = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (n_out != NAV * R || n_last != NAV || n_done != NAV || exp_re.size() != 0) begin
      failures++;
      $display("outputs %0d lasts %0d done %0d left %0d", n_out, n_last, n_done, exp_re.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
