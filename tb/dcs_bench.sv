// dcs_bench: stimulus and checks for the whole pipeline, shared by the reduced-size and the
// full-size end-to-end testbenches.
//
// It drives 16 ADC samples per clock with a synthetic interferogram train: interferogram n is
// a Gaussian-envelope burst (sigma SIGMA complex samples) on a 1.0 GHz carrier sampled at
// 4.9152 GSa/s, centred at c_n with a period of P +- PJIT samples plus a random fraction, and a
// carrier phase that slips by up to +-0.35 turn from one interferogram to the next. The mixer
// is set to 0.85 GHz, so the burst lands at 150 MHz in the 614.4 MSa/s stream and near zero
// in the complex stream. Uniform noise of +-NOISE LSB is added. NGAP interferograms from GAP
// on are left out, a gap longer than the FIFO, which must make the resampler drop its chain and
// resynchronise.
// Checks:
//   * every measured arrival time matches the true centre of the interferogram it belongs to
//     (up to a constant pipeline offset taken from the first) within 0.3 sample, and
//     dt_center matches the true spacing within 0.3 sample when consecutive;
//   * every interferogram present is analysed, each result at most LAT_MAX clocks after its
//     trigger;
//   * consecutive corrected records agree sample by sample within SIM_TOL of their peak (they
//     would not without the phase correction: the slips reach a third of a turn), and the
//     peak sits at rec_len/2 +- 2;
//   * every averaged output equals the sum of the N_AVG corrected records it covers;
//   * each mechanism happened: trigger, analysis, record start, average dump, FIFO skip,
//     resynchronisation drop; and the grid never fell behind the stream (`late`).
module dcs_bench
  import dcs_pkg::*;
#(
  parameter int    P       = 400,
  parameter int    NI      = 14,
  parameter int    GAP     = 7,
  parameter int    NGAP    = 3,     // interferograms left out from GAP on
  parameter int    PJIT    = 2,     // period varies by up to +-PJIT samples
  parameter real   SIM_TOL = 0.06,  // allowed record-to-record difference, fraction of peak
  parameter int    REC     = 380,
  parameter int    N_AVG   = 3,
  parameter real   SIGMA   = 6.0,
  parameter int    LAT_MAX = 600,
  parameter int    ACC_W   = 40,
  parameter int    NOISE   = 2      // uniform ADC noise, +-NOISE LSB
) (
  output logic                    clk,
  output logic                    rst,
  output logic signed [13:0]      adc_data [16],
  output logic [31:0]             nco_freq,
  output logic [DATA_W:0]         trig_threshold,
  output logic [TIME_INT-1:0]     trig_holdoff,
  output logic [15:0]             rec_len,
  output logic [31:0]             n_avg,
  input  cplx_t                   corr,
  input  logic                    corr_valid,
  input  logic                    corr_first,
  input  logic signed [ACC_W-1:0] avg_re,
  input  logic signed [ACC_W-1:0] avg_im,
  input  logic                    avg_valid,
  input  logic                    avg_last,
  input  ifg_result_t             meas,
  input  logic                    meas_valid,
  input  logic                    trig,
  input  logic                    fifo_skip,
  input  logic                    resync_drop,
  input  logic                    grid_late
);
  timeunit 1ns; timeprecision 100ps;
  localparam real PI  = 3.14159265358979;
  localparam real FS  = 4.9152e9;
  localparam real FC  = 1.0e9;
  localparam real FN  = 0.85e9;
  localparam real AMP = 6000.0;

  int checks = 0, failures = 0;
  int n_trig = 0, n_meas = 0, n_rec = 0, n_dump = 0, n_skip = 0, n_drop = 0, n_late = 0;
  real c [NI], phi [NI];
  bit  present [NI];
  int  cyc = 0;

  initial clk = 0;
  always #1 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic real absr(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // ---------------- stimulus ----------------
  initial begin
    real t;
    t = 3.0 * P / 4.0;
    for (int n = 0; n < NI; n++) begin
      t += (n == 0) ? 0.0 : real'(P) + real'($urandom_range(0, 2 * PJIT)) - real'(PJIT) + real'($urandom_range(0, 999)) / 1000.0;
      c[n]       = t;
      phi[n]     = (n == 0) ? 0.1 : phi[n-1] + (real'($urandom_range(0, 700)) / 1000.0 - 0.35);
      present[n] = !(n >= GAP && n < GAP + NGAP);
    end
    rst            = 1;
    nco_freq       = 32'($rtoi(FN / FS * 4294967296.0));
    trig_threshold = 17'd3000;
    trig_holdoff   = 32'(P / 2);
    rec_len        = 16'(REC);
    n_avg          = 32'(N_AVG);
    foreach (adc_data[k]) adc_data[k] = '0;
    repeat (4) @(negedge clk);
    rst = 0;
  end

  // the complex-sample clock count since reset is the time axis of c[]
  always @(negedge clk) if (!rst) begin
    for (int k = 0; k < 16; k++) begin
      real a, s;
      a = real'(cyc) * 16.0 + k;          // ADC sample index
      s = 0.0;
      for (int n = 0; n < NI; n++) if (present[n]) begin
        real d;
        d = a - 16.0 * c[n];
        if (d > -16.0 * 12.0 * SIGMA && d < 16.0 * 12.0 * SIGMA)
          s += AMP * $exp(-(d / (16.0 * SIGMA)) * (d / (16.0 * SIGMA)) / 2.0) *
               $cos(2.0 * PI * (FC / FS * d + phi[n]));
      end
      if (NOISE > 0) s += real'($urandom_range(0, 2 * NOISE)) - real'(NOISE);
      adc_data[k] = 14'($rtoi(s));
    end
  end

  // ---------------- measured quantities ----------------
  real off;
  int  prev_n = -10;
  int  t_trig = 0;
  bit  trig_seen = 0;

  always @(posedge clk) if (!rst) begin
    if (trig) begin n_trig++; t_trig = cyc; trig_seen = 1; end
    if (fifo_skip) n_skip++;
    if (resync_drop) n_drop++;
    if (grid_late) n_late++;
    if (meas_valid) begin
      real tm, best;
      int  bn;
      tm = real'(meas.t_center) / 256.0;
      if (n_meas == 0) off = tm - c[0];
      best = 1.0e9; bn = 0;
      for (int n = 0; n < NI; n++) if (present[n] && absr(tm - off - c[n]) < best) begin
        best = absr(tm - off - c[n]); bn = n;
      end
      checks++;
      if (best > 0.3) begin failures++; $display("meas %0d: time error %f samples", n_meas, best); end
      if (bn == prev_n + 1) begin
        checks++;
        if (absr(real'(meas.dt_center) / 256.0 - (c[bn] - c[bn-1])) > 0.3) begin
          failures++; $display("meas %0d: dt %f exp %f", n_meas, real'(meas.dt_center) / 256.0, c[bn] - c[bn-1]);
        end
      end
      checks++;
      if (!trig_seen || cyc - t_trig > LAT_MAX) begin
        failures++; $display("meas %0d: latency %0d clocks", n_meas, cyc - t_trig);
      end
      if (n_meas < 4 || bn == GAP + NGAP)
        $display("meas %0d: ifg %0d t %f f_bin %0d phi %f dphi %f latency %0d clocks",
                 n_meas, bn, tm, meas.f_bin, real'(meas.phi) / 65536.0, real'(meas.dphi) / 65536.0, cyc - t_trig);
      prev_n = bn;
      n_meas++;
    end
  end

  // ---------------- corrected records and averages ----------------
  localparam int HIST = (N_AVG > 3) ? N_AVG : 3;   // records kept for the checks
  int  rec_re [HIST][], rec_im [HIST][];
  int  cur_re [], cur_im [];
  int  pos = -1;
  int  avg_pos = 0;
  longint sum_re [], sum_im [];
  bit  have_sum = 0;

  initial begin
    for (int r = 0; r < HIST; r++) begin rec_re[r] = new[REC]; rec_im[r] = new[REC]; end
    cur_re = new[REC]; cur_im = new[REC];
    sum_re = new[REC]; sum_im = new[REC];
  end

  task automatic close_record();
    // shift the record history and compare with the previous record
    real pk, md;
    int  ip;
    for (int r = HIST - 1; r > 0; r--) begin rec_re[r] = rec_re[r-1]; rec_im[r] = rec_im[r-1]; end
    rec_re[0] = cur_re; rec_im[0] = cur_im;
    cur_re = new[REC]; cur_im = new[REC];
    n_rec++;
    pk = 0; ip = 0;
    for (int j = 0; j < REC; j++) begin
      real m;
      m = $sqrt(real'(rec_re[0][j]) ** 2 + real'(rec_im[0][j]) ** 2);
      if (m > pk) begin pk = m; ip = j; end
    end
    checks++;
    if (ip < REC / 2 - 2 || ip > REC / 2 + 2) begin failures++; $display("record %0d peak at %0d", n_rec, ip); end
    if (n_rec >= 2) begin
      md = 0;
      for (int j = 0; j < REC; j++) begin
        real d;
        d = $sqrt(real'(rec_re[0][j] - rec_re[1][j]) ** 2 + real'(rec_im[0][j] - rec_im[1][j]) ** 2);
        if (d > md) md = d;
      end
      checks++;
      if (md > SIM_TOL * pk) begin failures++; $display("record %0d differs from previous by %f of peak", n_rec, md / pk); end
      if (n_rec < 4) $display("record %0d: peak %f at %0d, max difference to previous %f of peak", n_rec, pk, ip, md / pk);
    end
    // the average that ends with this record
    if (n_rec % N_AVG == 0) begin
      for (int j = 0; j < REC; j++) begin
        sum_re[j] = 0; sum_im[j] = 0;
        for (int r = 0; r < N_AVG; r++) begin sum_re[j] += rec_re[r][j]; sum_im[j] += rec_im[r][j]; end
      end
      have_sum = 1;
    end
  endtask

  always @(posedge clk) if (!rst) begin
    if (corr_valid) begin
      if (corr_first) begin
        pos = 0;
      end
      if (pos >= 0 && pos < REC) begin
        cur_re[pos] = int'(corr.re);
        cur_im[pos] = int'(corr.im);
        pos++;
        if (pos == REC) begin
          close_record();
          pos = -1;
        end
      end
    end
  end

  // averaged outputs stream out while the last record of an average arrives; they are
  // compared once that record is complete
  longint a_re [$], a_im [$];
  always @(posedge clk) if (!rst) begin
    if (avg_valid) begin a_re.push_back(longint'(avg_re)); a_im.push_back(longint'(avg_im)); end
    if (avg_valid && avg_last) n_dump++;
    if (have_sum && a_re.size() >= REC) begin
      int bad;
      bad = 0;
      for (int j = 0; j < REC; j++) begin
        longint xr, xi;
        xr = a_re.pop_front(); xi = a_im.pop_front();
        if (xr != sum_re[j] || xi != sum_im[j]) bad++;
      end
      checks++;
      if (bad != 0) begin failures++; $display("average %0d: %0d samples differ", n_dump, bad); end
      have_sum = 0;
    end
  end

  // ---------------- end ----------------
  initial begin
    wait (!rst);
    wait (cyc > int'(c[NI-1]) + 2 * P);
    $display("mechanisms: triggers %0d analyses %0d records %0d average dumps %0d fifo skips %0d resync drops %0d late %0d",
             n_trig, n_meas, n_rec, n_dump, n_skip, n_drop, n_late);
    checks += 8;
    if (n_trig == 0)  begin failures++; $display("no trigger"); end
    if (n_meas == 0)  begin failures++; $display("no analysis result"); end
    if (n_meas != NI - NGAP) begin failures++; $display("%0d of %0d interferograms analysed", n_meas, NI - NGAP); end
    if (n_rec < 3)    begin failures++; $display("too few records"); end
    if (n_dump == 0)  begin failures++; $display("no average dump"); end
    if (n_skip == 0)  begin failures++; $display("no fifo skip"); end
    if (n_drop == 0)  begin failures++; $display("no resync drop"); end
    if (n_late != 0)  begin failures++; $display("grid fell behind"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
