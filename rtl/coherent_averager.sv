// coherent_averager: time-domain coherent averaging of corrected interferogram records.
//
// After phase correction and resampling every record has the same length (rec_len) and the
// same phase, so records can simply be added sample by sample. The unit keeps one ACC_W-bit
// complex accumulator per record position in a DEPTH-entry memory. It locks onto the first
// record start (`din_first`); in pass 0 of an average it writes the incoming samples, in passes
// 1 .. n_avg-1 it adds them (read-modify-write, one clock apart, so one sample per clock is
// sustained), and during the last pass it also streams the completed sums out (dout_last on
// the final position). The next pass 0 overwrites the memory, so no clearing pass is needed.
// The paper says that the corrected stream is coherently averaged in a streaming fashion and
// handed to DMA; the accumulator width, the write-first pass and handing out sums (the host
// divides by n_avg) are this design's choices. With ACC_W = 40 up to 2^24 records of full-scale
// 16-bit samples can be added without overflow.
//
// Timing: dout appears two clocks after the sample of the last pass that completes it.
module coherent_averager
  import dcs_pkg::*;
#(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned ACC_W = 40
) (
  input  logic                    clk,
  input  logic                    rst,
  input  cplx_t                   din,
  input  logic                    din_valid,
  input  logic                    din_first,
  input  logic [15:0]             rec_len,     // at most DEPTH
  input  logic [31:0]             n_avg,       // records per average, >= 1
  output logic signed [ACC_W-1:0] dout_re,
  output logic signed [ACC_W-1:0] dout_im,
  output logic                    dout_valid,
  output logic                    dout_last,
  output logic [31:0]             n_done       // completed averages
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic signed [ACC_W-1:0] mem_re [DEPTH];
  logic signed [ACC_W-1:0] mem_im [DEPTH];

  logic          locked;
  logic [15:0]   pos;
  logic [31:0]   pass;
  // stage 1 registers
  logic          s_valid, s_firstpass, s_lastpass, s_lastpos;
  logic [AW-1:0] s_addr;
  cplx_t         s_x;
  logic signed [ACC_W-1:0] rd_re, rd_im;

  logic          take;
  logic [15:0]   pos_now;
  logic [31:0]   pass_now;

  // a record start resets the position; a start after rec_len samples moves to the next pass
  always_comb begin
    pos_now  = pos;
    pass_now = pass;
    if (din_first) begin
      pos_now = '0;
      if (locked && pos != 0) pass_now = (pass + 1 >= n_avg) ? '0 : pass + 1;
    end
    take = din_valid && (din_first || locked) && (pos_now < rec_len);
  end

  always_ff @(posedge clk) begin
    if (take) begin
      rd_re <= mem_re[AW'(pos_now)];
      rd_im <= mem_im[AW'(pos_now)];
    end
    if (s_valid) begin
      mem_re[s_addr] <= s_firstpass ? ACC_W'(s_x.re) : rd_re + ACC_W'(s_x.re);
      mem_im[s_addr] <= s_firstpass ? ACC_W'(s_x.im) : rd_im + ACC_W'(s_x.im);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      locked     <= 1'b0;
      pos        <= '0;
      pass       <= '0;
      s_valid    <= 1'b0;
      dout_valid <= 1'b0;
      dout_last  <= 1'b0;
      dout_re    <= '0;
      dout_im    <= '0;
      n_done     <= '0;
    end else begin
      if (din_valid && din_first) locked <= 1'b1;
      s_valid     <= take;
      s_addr      <= AW'(pos_now);
      s_x         <= din;
      s_firstpass <= (pass_now == 0);
      s_lastpass  <= (pass_now + 1 >= n_avg);
      s_lastpos   <= (pos_now == rec_len - 16'd1);
      if (din_valid) begin
        pos  <= take ? pos_now + 1'b1 : pos_now;
        pass <= pass_now;
      end
      dout_valid <= s_valid && s_lastpass;
      dout_last  <= s_valid && s_lastpass && s_lastpos;
      dout_re    <= s_firstpass ? ACC_W'(s_x.re) : rd_re + ACC_W'(s_x.re);
      dout_im    <= s_firstpass ? ACC_W'(s_x.im) : rd_im + ACC_W'(s_x.im);
      if (s_valid && s_lastpass && s_lastpos) n_done <= n_done + 1'b1;
    end
  end

endmodule
