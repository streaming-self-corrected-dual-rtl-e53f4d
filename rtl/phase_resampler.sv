// phase_resampler: phase correction and resampling of the buffered stream.
//
// Between the arrival times t_n and t_n+1 of two consecutive interferograms the unit lays a
// uniform grid of exactly rec_len points, t_j = t_n + j*(t_n+1 - t_n)/rec_len, and a phase
// ramp phi_j = phi_n + j*dphi_n+1/rec_len (the linear interpolation between the carrier phases
// of adjacent interferograms, dphi already wrapped to half a turn). For each grid point it
// linearly interpolates the stream between the two samples around t_j and multiplies the
// result by exp(-j*phi_j). Output records are cut at the midpoints between interferograms:
// record n takes the last rec_len/2 grid points of segment (n-1, n) and the first
// rec_len - rec_len/2 of segment (n, n+1), so its grid depends on the last, current and next
// arrival times and interferogram n sits at index rec_len/2 of every record. The output rate is
// rec_len per interferogram period: with rec_len = 95 % of the nominal period (14592 for
// 20 kHz detuning at 307.2 MSa/s) the grid step exceeds one input sample, so one input sample
// per clock is enough even when the detuning rises by up to 5 %.
//
// Mechanics: a segment is queued when an analysis result arrives; two bit-serial dividers
// then form the time and phase steps (24 and 16 fractional bits), well before the segment is
// needed. The stream comes from the FIFO; two registers hold samples b and b+1 where b counts
// the samples taken since reset, which is the same time base as the trigger's counter. Each
// clock the unit emits the grid point if floor(t_j) = b and advances the pair (pops the FIFO)
// if the next grid point lies beyond b. Without a queued segment it discards samples older
// than the start of the next segment (before the first result: all but KEEP samples), jumping
// over them in one clock with the FIFO's skip operation, because popping one sample a clock
// could never catch up with a stream that also arrives at one sample a clock. If the FIFO
// nearly fills while no segment is available (interferograms missing), it discards all but
// KEEP samples, pulses `drop` and waits for two new results.
//
// The paper gives the phase interpolation, the three-interferogram grid and the 95 % rate;
// the midpoint record cut, the fixed-point formats, the discard/drop policy and the CORDIC
// rotator are this design's choices. Timing: ITER + 3 clocks from FIFO pair to dout.
module phase_resampler
  import dcs_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 38400,
  parameter int unsigned KEEP       = FIFO_DEPTH / 2,
  parameter int unsigned CNT_W      = $clog2(FIFO_DEPTH + 2)
) (
  input  logic             clk,
  input  logic             rst,
  input  ifg_result_t      res,
  input  logic             res_valid,
  input  logic [15:0]      rec_len,
  input  cplx_t            fifo_dout,
  input  logic             fifo_valid,
  input  logic [CNT_W-1:0] fifo_count,
  output logic             fifo_pop,
  output logic             fifo_skip,
  output logic [CNT_W-1:0] fifo_skip_n,
  output cplx_t            dout,
  output logic             dout_valid,
  output logic             dout_first,
  output logic             drop,
  output logic             late
);
  localparam int unsigned SF   = 24;                      // fractional bits of grid time
  localparam int unsigned TAW  = TIME_INT + SF;
  localparam int unsigned TNW  = TIME_W + SF - TIME_FRAC; // divider width for the time step
  localparam int unsigned PAW  = 32;                      // phase accumulator, 16 frac bits

  typedef struct packed {
    logic [TAW-1:0]        t0;
    logic [TAW-1:0]        t1;
    logic [PAW-1:0]        phi0;
    logic [TAW-1:0]        step_t;
    logic signed [PAW-1:0] step_phi;
  } seg_t;

  // ---------------- result intake and step division ----------------
  logic           have_base;
  logic [TAW-1:0] base_t;
  logic [PAW-1:0] base_phi;
  seg_t           pend;
  logic           pend_busy, phi_neg;
  logic           dt_start, dt_done, dp_done, dt_busy_unused, dp_busy_unused;
  logic           dt_got, dp_got;
  logic [TNW-1:0] dt_q;
  logic [31:0]    dp_q;
  logic [TNW-1:0] dt_num;
  logic [31:0]    dp_num;

  seq_divider #(.NUM_W(TNW), .DEN_W(16)) u_div_t (
    .clk, .rst, .start(dt_start), .num(dt_num), .den(rec_len),
    .busy(dt_busy_unused), .done(dt_done), .quot(dt_q));
  seq_divider #(.NUM_W(32), .DEN_W(16)) u_div_p (
    .clk, .rst, .start(dt_start), .num(dp_num), .den(rec_len),
    .busy(dp_busy_unused), .done(dp_done), .quot(dp_q));

  assign dt_num = TNW'(res.dt_center) << (SF - TIME_FRAC);
  assign dp_num = res.dphi[PHASE_W-1] ? {16'(-res.dphi), 16'b0} : {16'(res.dphi), 16'b0};
  assign dt_start = res_valid && have_base && !pend_busy;

  // ---------------- segment queue (2 entries) ----------------
  seg_t       q [2];
  logic [1:0] q_cnt;
  logic       q_pop;

  // ---------------- resampling engine ----------------
  logic                  active;
  logic [TAW-1:0]        t_acc, step_t, t_end;
  logic [PAW-1:0]        phi_acc;
  logic signed [PAW-1:0] step_phi;
  logic [15:0]           seg_cnt;
  logic                  have_hold;
  logic [TAW-1:0]        hold_t;
  cplx_t                 x0, x1;
  logic [1:0]            n_loaded;
  logic [TIME_INT-1:0]   h_idx;   // samples popped so far
  logic [TIME_INT-1:0]   b;       // index of x0

  assign b = h_idx - TIME_INT'(2);

  logic                  emit, last, pop_c, drop_c, load_next, skip_c;
  logic [CNT_W-1:0]      skip_n_c;
  logic signed [TIME_INT-1:0] gap;
  logic signed [TIME_INT-1:0] diff;
  logic [TAW-1:0]        t_after;

  always_comb begin
    diff      = $signed(t_acc[SF +: TIME_INT] - b);
    emit      = active && (n_loaded == 2'd2) && (diff <= 0);
    last      = emit && (seg_cnt == rec_len - 16'd1);
    load_next = (last || !active) && (q_cnt != 0);
    if (load_next)            t_after = q[0].t0;
    else if (last)            t_after = t_end;
    else if (emit)            t_after = t_acc + step_t;
    else if (active)          t_after = t_acc;
    else                      t_after = hold_t;
    drop_c   = 1'b0;
    skip_c   = 1'b0;
    skip_n_c = '0;
    // samples between the FIFO head and the start of the next segment
    gap = $signed(hold_t[SF +: TIME_INT] - 1'b1 - h_idx);
    if (!fifo_valid)                         pop_c = 1'b0;
    else if (n_loaded != 2'd2)               pop_c = 1'b1;
    else if (active || load_next || have_hold)
      pop_c = $signed(t_after[SF +: TIME_INT] - b) > 0;
    else                                     pop_c = fifo_count > CNT_W'(KEEP);
    // idle and far behind: jump ahead in one clock instead of popping
    if (fifo_valid && !active && !load_next) begin
      if (have_hold && gap > 4) begin
        skip_c   = 1'b1;
        skip_n_c = (gap >= $signed(TIME_INT'(fifo_count))) ? fifo_count : CNT_W'(gap);
      end else if (!have_hold && fifo_count > CNT_W'(KEEP) + 4) begin
        skip_c   = 1'b1;
        skip_n_c = fifo_count - CNT_W'(KEEP);
      end else if (fifo_count >= CNT_W'(FIFO_DEPTH - 2)) begin
        // no next interferogram for a whole FIFO: give up the chain and resynchronise
        skip_c   = 1'b1;
        skip_n_c = fifo_count - CNT_W'(KEEP);
        drop_c   = 1'b1;
      end
      if (skip_c) pop_c = 1'b0;
    end
  end

  assign fifo_pop    = pop_c;
  assign fifo_skip   = skip_c;
  assign fifo_skip_n = skip_n_c;
  assign q_pop    = load_next;

  always_ff @(posedge clk) begin
    logic q_push;
    q_push = 1'b0;
    if (rst) begin
      have_base <= 1'b0;
      base_t    <= '0;
      base_phi  <= '0;
      pend      <= '0;
      pend_busy <= 1'b0;
      phi_neg   <= 1'b0;
      dt_got    <= 1'b0;
      dp_got    <= 1'b0;
      q_cnt     <= '0;
      active    <= 1'b0;
      t_acc     <= '0;
      step_t    <= '0;
      t_end     <= '0;
      phi_acc   <= '0;
      step_phi  <= '0;
      seg_cnt   <= '0;
      have_hold <= 1'b0;
      hold_t    <= '0;
      n_loaded  <= '0;
      h_idx     <= '0;
      drop      <= 1'b0;
      late      <= 1'b0;
    end else begin
      drop <= drop_c;
      late <= emit && (diff < 0);

      // intake: the first result of a chain becomes the base; every later one a segment
      if (res_valid && !pend_busy) begin
        base_t   <= TAW'(res.t_center) << (SF - TIME_FRAC);
        base_phi <= {res.phi, 16'b0};
        if (!have_base) begin
          have_base <= 1'b1;
          if (!have_hold) begin
            have_hold <= 1'b1;
            hold_t    <= TAW'(res.t_center) << (SF - TIME_FRAC);
          end
        end else begin
          pend_busy <= 1'b1;
          dt_got    <= 1'b0;
          dp_got    <= 1'b0;
          phi_neg   <= res.dphi[PHASE_W-1];
          pend.t0   <= base_t;
          pend.t1   <= TAW'(res.t_center) << (SF - TIME_FRAC);
          pend.phi0 <= base_phi;
        end
      end
      if (dt_done) begin
        pend.step_t <= TAW'(dt_q);
        dt_got      <= 1'b1;
      end
      if (dp_done) begin
        pend.step_phi <= phi_neg ? -$signed(dp_q) : $signed(dp_q);
        dp_got        <= 1'b1;
      end
      if (pend_busy && dt_got && dp_got) begin
        pend_busy <= 1'b0;
        q_push = 1'b1;
      end

      // queue update
      if (q_pop) q[0] <= q[1];
      if (q_push) begin
        if (q_pop) q[1'(q_cnt - 2'd1)] <= pend;
        else if (q_cnt < 2'd2) q[q_cnt[0]] <= pend;
      end
      q_cnt <= q_cnt - 2'(q_pop) + 2'(q_push && (q_pop || q_cnt < 2'd2));

      // grid advance
      if (load_next) begin
        active   <= 1'b1;
        t_acc    <= q[0].t0;
        t_end    <= q[0].t1;
        step_t   <= q[0].step_t;
        phi_acc  <= q[0].phi0;
        step_phi <= q[0].step_phi;
        seg_cnt  <= '0;
      end else if (last) begin
        active    <= 1'b0;
        have_hold <= 1'b1;
        hold_t    <= t_end;
      end else if (emit) begin
        t_acc   <= t_acc + step_t;
        phi_acc <= phi_acc + PAW'(step_phi);
        seg_cnt <= seg_cnt + 1'b1;
      end
      if (last) hold_t <= t_end;

      // stream pair
      if (skip_c) begin
        h_idx    <= h_idx + TIME_INT'(skip_n_c);
        n_loaded <= '0;
      end else if (pop_c) begin
        x0    <= x1;
        x1    <= fifo_dout;
        h_idx <= h_idx + 1'b1;
        if (n_loaded != 2'd2) n_loaded <= n_loaded + 1'b1;
      end

      if (drop_c) begin
        have_base <= 1'b0;
        have_hold <= 1'b0;
        q_cnt     <= '0;
      end
    end
  end

  // ---------------- interpolation ----------------
  logic               i_valid, i_first;
  logic signed [15:0] i_re, i_im;
  logic [15:0]        i_phase;

  always_ff @(posedge clk) begin
    logic signed [17:0] fr;
    logic signed [DATA_W+18:0] dr, di;
    fr = $signed({2'b00, t_acc[SF-1 -: 16]});
    dr = (DATA_W+19)'($signed(x1.re) - $signed(x0.re)) * (DATA_W+19)'(fr);
    di = (DATA_W+19)'($signed(x1.im) - $signed(x0.im)) * (DATA_W+19)'(fr);
    i_re    <= 16'($signed(x0.re) + DATA_W'(dr >>> 16));
    i_im    <= 16'($signed(x0.im) + DATA_W'(di >>> 16));
    i_phase <= 16'(-$signed(phi_acc[PAW-1 -: 16]));
    i_first <= (seg_cnt == rec_len - (rec_len >> 1));
    if (rst) i_valid <= 1'b0;
    else     i_valid <= emit;
  end

  cordic_rotate #(.W(DATA_W), .ITER(16), .PHASE_W(16), .USER_W(1)) u_rot (
    .clk, .rst,
    .in_valid(i_valid), .in_re(i_re), .in_im(i_im), .angle(i_phase), .in_user(i_first),
    .out_valid(dout_valid), .out_re(dout.re), .out_im(dout.im), .out_user(dout_first)
  );

  assert property (@(posedge clk) disable iff (rst) fifo_pop |-> fifo_valid);

endmodule
