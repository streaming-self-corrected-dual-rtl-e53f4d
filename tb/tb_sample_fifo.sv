// tb_sample_fifo: random pushes and pops against a queue model (DEPTH 16 + output register).
// Every popped head must equal the model's head; count must equal the model's size; a push
// into a full FIFO must be dropped and flagged with `overflow`. Phases with mostly pushes and
// mostly pops make the FIFO both fill and drain; occasional skips must discard exactly skip_n
// entries from the head.
module tb_sample_fifo;
  timeunit 1ns; timeprecision 100ps;
  import dcs_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst = 1;
  cplx_t din, dout;
  logic push, pop, dout_valid, overflow, skip;
  logic [$clog2(DEPTH+2)-1:0] skip_n;
  logic [$clog2(DEPTH+2)-1:0] count;
  int checks = 0, failures = 0, n_ovf = 0, n_ovf_seen = 0, n_skip = 0;
  cplx_t model[$];

  sample_fifo #(.DEPTH(DEPTH)) dut (.clk, .rst, .din, .push, .pop, .skip, .skip_n, .dout, .dout_valid, .count, .overflow);
  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && overflow) n_ovf_seen++;

  initial begin
    int seq;
    seq = 0;
    din = '0; push = 0; pop = 0; skip = 0; skip_n = 0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    @(negedge clk);
    for (int c = 0; c < 3000; c++) begin
      int pp;
      pp = ((c / 300) % 2 == 0) ? 80 : 30;      // push probability in percent
      push = ($urandom_range(0, 99) < pp);
      pop  = dout_valid && ($urandom_range(0, 99) < 100 - pp + 10);
      din.re = 16'(seq); din.im = 16'(seq * 3);
      skip = 0;
      if (model.size() > 2 && $urandom_range(0, 99) < 3) begin
        skip   = 1;
        pop    = 0;
        skip_n = ($clog2(DEPTH+2))'($urandom_range(1, model.size()));
      end
      if (pop) begin
        checks++;
        if (model.size() == 0 || dout != model[0]) begin
          failures++;
          if (failures < 10) $display("c %0d head %0d exp %0d", c, dout.re, model.size() ? model[0].re : -1);
        end
      end
      checks++;
      if (int'(count) != model.size()) begin
        failures++;
        if (failures < 10) $display("c %0d count %0d model %0d", c, count, model.size());
      end
      begin
        // the memory part (all but the output register) holds at most DEPTH entries
        bit accept;
        accept = push && (model.size() - int'(dout_valid) < DEPTH);
        @(posedge clk);
        if (pop) void'(model.pop_front());
        if (skip) begin
          n_skip++;
          repeat (int'(skip_n)) void'(model.pop_front());
        end
        if (accept) model.push_back(din);
        else if (push) n_ovf++;
      end
      @(negedge clk);
      seq++;
    end
    checks++;
    if (n_ovf == 0 || n_ovf != n_ovf_seen) begin
      failures++;
      $display("overflow drops %0d flagged %0d", n_ovf, n_ovf_seen);
    end
    checks++;
    if (n_skip == 0) failures++;
    $display("overflows %0d skips %0d", n_ovf, n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
