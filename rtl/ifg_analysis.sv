// ifg_analysis: measures arrival time, carrier frequency and carrier phase of each
// interferogram (the "interferogram analysis" step).
//
// On a trigger at sample t_approx the unit opens a window of WIN samples of the delayed
// stream (from the 4 us ring buffer) that starts PRE samples before the trigger, so the
// window covers about 4 us before and 4 us after it. Three things happen while the window
// streams through, one sample per clock:
//   * a vectoring CORDIC forms |x|; the sums S0 = sum |x| and S1 = sum i*|x| give the first
//     moment S1/S0 (a bit-serial divider, TIME_FRAC fractional bits), i.e. the arrival time
//     t_center = window start + S1/S0;
//   * the centred FFT_N samples of the window feed a streaming FFT (fft_r2sdf); as its bins
//     leave, the bin k with the largest |X|^2 is kept: f_bin = k (signed) is the carrier
//     frequency in units of 307.2 MHz / FFT_N;
//   * a second CORDIC takes arg X[k]; the carrier phase at the arrival time is
//     phi = arg X[k] + k * (t_center - t_fft0) / FFT_N turns, which removes the phase ramp that
//     the envelope's position in the FFT frame puts on X[k].
// The result also carries dt_center = t_center - previous t_center and dphi = phi - previous
// phi (wrapped to half a turn by two's complement), the quantities from which repetition-rate
// and offset-frequency fluctuations follow.
//
// The paper gives what is measured and how (FFT for frequency, first moment of the magnitude
// for arrival time, 4 us before and after the trigger); the window placement, the FFT size,
// peak picking without interpolation, the phase-ramp formula and all widths are this design's.
//
// Interface: trig/t_approx from ifg_trigger; dly/dly_valid: the stream delayed by the ring
// buffer. The ring buffer must delay by at least PRE + 1 samples; the window start is found by
// counting delayed samples from reset, the same time base as the trigger's counter. Triggers
// while busy are ignored. res_valid pulses once per analysed interferogram.
// Timing: with the defaults, res_valid rises about 4320 clocks (14.1 us) after the trigger.
module ifg_analysis
  import dcs_pkg::*;
#(
  parameter int unsigned PRE   = 1225,
  parameter int unsigned WIN   = 2458,
  parameter int unsigned FFT_N = 2048,
  parameter int unsigned FFT_W = 24
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                trig,
  input  logic [TIME_INT-1:0] t_approx,
  input  cplx_t               dly,
  input  logic                dly_valid,
  output ifg_result_t         res,
  output logic                res_valid,
  output logic                busy
);
  localparam int unsigned L      = $clog2(FFT_N);
  localparam int unsigned FOFF   = (WIN > FFT_N) ? (WIN - FFT_N) / 2 : 0;
  localparam int unsigned RUNLEN = (WIN > FOFF + FFT_N) ? WIN : FOFF + FFT_N;
  localparam int unsigned IW     = $clog2(RUNLEN + 1);
  localparam int unsigned MW     = DATA_W + 2;            // CORDIC magnitude width
  localparam int unsigned S0W    = MW + IW;
  localparam int unsigned S1W    = MW + 2 * IW;
  localparam int unsigned NUMW   = S1W + TIME_FRAC;
  localparam int unsigned CORD_ITER = 16;

  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_RUN, S_DRAIN, S_PHASE, S_OUT} state_t;
  state_t state;

  logic [TIME_INT-1:0] d_idx;     // index of the delayed sample on dly
  logic [TIME_INT-1:0] w_start;
  logic [IW-1:0]       wi;        // position in the window

  // ---------------- magnitude and first moment ----------------
  logic            m_in_valid;
  logic [IW:0]     m_in_user, m_out_user;   // {last, index}
  logic            m_out_valid;
  logic [MW-1:0]   m_mag;
  logic [PHASE_W-1:0] m_ang_unused;
  logic [S0W-1:0]  s0;
  logic [S1W-1:0]  s1;
  logic            div_start, div_busy, div_done;
  logic [NUMW-1:0] div_q;
  logic            moment_done;
  logic [TIME_W-1:0] t_rel;       // S1/S0, TIME_FRAC fractional bits

  cordic_vector #(.W(DATA_W), .ITER(CORD_ITER), .PHASE_W(PHASE_W), .USER_W(IW+1)) u_mag (
    .clk, .rst,
    .in_valid(m_in_valid), .in_re(dly.re), .in_im(dly.im), .in_user(m_in_user),
    .out_valid(m_out_valid), .mag(m_mag), .angle(m_ang_unused), .out_user(m_out_user)
  );

  seq_divider #(.NUM_W(NUMW), .DEN_W(S0W)) u_div (
    .clk, .rst, .start(div_start), .num({s1, {TIME_FRAC{1'b0}}}), .den(s0),
    .busy(div_busy), .done(div_done), .quot(div_q)
  );

  // ---------------- FFT and peak search ----------------
  logic                    f_start;
  logic signed [FFT_W-1:0] f_in_re, f_in_im, f_out_re, f_out_im;
  logic                    f_out_start;
  logic [L-1:0]            f_oi;
  logic                    f_active, peak_done;
  logic [2*FFT_W-1:0]      pk_pow;
  logic [L-1:0]            pk_bin;
  logic signed [FFT_W-1:0] pk_re, pk_im;

  fft_r2sdf #(.N(FFT_N), .W(FFT_W)) u_fft (
    .clk, .rst, .start(f_start), .din_re(f_in_re), .din_im(f_in_im),
    .out_start(f_out_start), .dout_re(f_out_re), .dout_im(f_out_im)
  );

  function automatic logic [L-1:0] bitrev(input logic [L-1:0] v);
    for (int b = 0; b < L; b++) bitrev[b] = v[L-1-b];
  endfunction

  // ---------------- phase of the peak bin ----------------
  logic               p_in_valid, p_out_valid;
  logic [FFT_W+1:0]   p_mag_unused;
  logic [PHASE_W-1:0] p_ang;
  logic               p_user_unused;

  cordic_vector #(.W(FFT_W), .ITER(CORD_ITER), .PHASE_W(PHASE_W), .USER_W(1)) u_phase (
    .clk, .rst,
    .in_valid(p_in_valid), .in_re(pk_re), .in_im(pk_im), .in_user(1'b0),
    .out_valid(p_out_valid), .mag(p_mag_unused), .angle(p_ang), .out_user(p_user_unused)
  );

  // d_idx lies before the window start (modular comparison on the wrapping counter)
  logic d_idx_before_start;
  assign d_idx_before_start = $signed(d_idx - w_start) < 0;

  // window feeding (combinational decode of the current window position)
  logic in_run;
  assign in_run     = (state == S_RUN) && dly_valid;
  assign m_in_valid = in_run && (wi < IW'(WIN));
  assign m_in_user  = {wi == IW'(WIN - 1), wi};
  assign f_start    = in_run && (wi == IW'(FOFF));
  assign f_in_re    = (in_run && wi < IW'(WIN)) ? FFT_W'(dly.re) <<< (FFT_W - DATA_W - 2) : '0;
  assign f_in_im    = (in_run && wi < IW'(WIN)) ? FFT_W'(dly.im) <<< (FFT_W - DATA_W - 2) : '0;

  // phase at the arrival time: arg X[k] + k * (t_rel - FOFF) / FFT_N (turns)
  logic signed [PHASE_W-1:0] phi_now;
  logic [PHASE_W-1:0]        ang_q;
  logic signed [L:0]         k_s;
  assign k_s = $signed({pk_bin[L-1], pk_bin});            // bins >= N/2 are negative
  always_comb begin
    logic signed [TIME_W:0]            n_c;
    logic signed [TIME_W+L+PHASE_W+1:0] prod;
    n_c  = $signed({1'b0, t_rel}) - $signed((TIME_W+1)'(FOFF) <<< TIME_FRAC);
    prod = ((TIME_W+L+PHASE_W+2)'(k_s) * (TIME_W+L+PHASE_W+2)'(n_c)) <<< PHASE_W;
    phi_now = PHASE_W'($signed(ang_q) + PHASE_W'(prod >>> (L + TIME_FRAC)));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_IDLE;
      d_idx       <= '0;
      w_start     <= '0;
      wi          <= '0;
      s0          <= '0;
      s1          <= '0;
      div_start   <= 1'b0;
      moment_done <= 1'b0;
      t_rel       <= '0;
      f_active    <= 1'b0;
      f_oi        <= '0;
      peak_done   <= 1'b0;
      pk_pow      <= '0;
      pk_bin      <= '0;
      pk_re       <= '0;
      pk_im       <= '0;
      p_in_valid  <= 1'b0;
      ang_q       <= '0;
      res         <= '0;
      res_valid   <= 1'b0;
    end else begin
      div_start  <= 1'b0;
      p_in_valid <= 1'b0;
      res_valid  <= 1'b0;
      if (dly_valid) d_idx <= d_idx + 1'b1;

      // moment accumulation behind the magnitude CORDIC
      if (m_out_valid) begin
        s0 <= s0 + S0W'(m_mag);
        s1 <= s1 + S1W'(m_mag) * S1W'(m_out_user[IW-1:0]);
        if (m_out_user[IW]) div_start <= 1'b1;
      end
      if (div_done) begin
        moment_done <= 1'b1;
        t_rel       <= (s0 == 0) ? TIME_W'(WIN / 2) << TIME_FRAC : TIME_W'(div_q);
      end

      // peak search over the FFT output (bit-reversed order)
      if (f_out_start) begin
        f_active <= 1'b1;
        f_oi     <= '0;
      end
      if (f_out_start || f_active) begin
        logic [2*FFT_W-1:0] pw;
        pw = (2*FFT_W)'($signed(f_out_re) * $signed(f_out_re)) +
             (2*FFT_W)'($signed(f_out_im) * $signed(f_out_im));
        if (f_out_start || pw > pk_pow) begin
          pk_pow <= pw;
          pk_bin <= bitrev(f_out_start ? '0 : f_oi);
          pk_re  <= f_out_re;
          pk_im  <= f_out_im;
        end
        f_oi <= (f_out_start ? '0 : f_oi) + 1'b1;
        if (!f_out_start && f_oi == L'(FFT_N - 1)) begin
          f_active  <= 1'b0;
          peak_done <= 1'b1;
        end
      end

      unique case (state)
        S_IDLE: if (trig) begin
          w_start     <= t_approx - TIME_INT'(PRE);
          s0          <= '0;
          s1          <= '0;
          moment_done <= 1'b0;
          peak_done   <= 1'b0;
          state       <= S_WAIT;
        end
        S_WAIT: if (dly_valid && d_idx == w_start - 1'b1) begin
          wi    <= '0;
          state <= S_RUN;
        end else if (dly_valid && !d_idx_before_start) begin
          state <= S_IDLE;   // window start already passed: drop this trigger
        end
        S_RUN: if (dly_valid) begin
          wi <= wi + 1'b1;
          if (wi == IW'(RUNLEN - 1)) state <= S_DRAIN;
        end
        S_DRAIN: if (moment_done && peak_done) begin
          p_in_valid <= 1'b1;
          state      <= S_PHASE;
        end
        S_PHASE: if (p_out_valid) begin
          ang_q <= p_ang;
          state <= S_OUT;
        end
        S_OUT: begin
          res.t_center  <= ({w_start, {TIME_FRAC{1'b0}}}) + t_rel;
          res.dt_center <= ({w_start, {TIME_FRAC{1'b0}}}) + t_rel - res.t_center;
          res.f_bin     <= 16'(k_s);
          res.phi       <= phi_now;
          res.dphi      <= phi_now - res.phi;
          res_valid     <= 1'b1;
          state         <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
