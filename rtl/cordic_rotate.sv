// cordic_rotate: pipelined CORDIC in rotation mode with gain correction.
//
// Rotates (in_re + j*in_im) by `angle` (turns, 2^PHASE_W = one turn). A first stage rotates
// by half a turn (negation) when |angle| exceeds a quarter turn; ITER micro-rotations by
// +-atan(2^-i) then drive the residual angle to zero. A final multiply by 1/K (K ~ 1.6468, the
// CORDIC gain, as a Q1.15 constant) restores the amplitude, so out ~ in * exp(j*angle). The
// phase correction uses it to apply exp(-j*phi) to each resampled sample.
//
// Timing: fully pipelined, one input per clock, latency ITER + 2 clocks; the USER_W-bit tag
// and the valid bit travel alongside.
module cordic_rotate #(
  parameter int unsigned W       = 16,
  parameter int unsigned ITER    = 16,
  parameter int unsigned PHASE_W = 16,
  parameter int unsigned USER_W  = 1
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       in_valid,
  input  logic signed [W-1:0]        in_re,
  input  logic signed [W-1:0]        in_im,
  input  logic signed [PHASE_W-1:0]  angle,
  input  logic [USER_W-1:0]          in_user,
  output logic                       out_valid,
  output logic signed [W-1:0]        out_re,
  output logic signed [W-1:0]        out_im,
  output logic [USER_W-1:0]          out_user
);
  localparam int unsigned XW = W + 2;
  localparam int unsigned ZW = PHASE_W + 4;
  localparam logic signed [17:0] INV_K = 18'sd19898;  // round(2^15 / 1.6467603)

  typedef logic signed [ZW-1:0] atan_t [ITER];

  function automatic atan_t gen_atan();
    atan_t t;
    for (int i = 0; i < ITER; i++)
      t[i] = ZW'($rtoi($floor($atan(2.0 ** (-i)) / (2.0 * 3.14159265358979) * (2.0 ** ZW) + 0.5)));
    return t;
  endfunction

  localparam atan_t ATAN = gen_atan();

  logic signed [XW-1:0] x [ITER+1];
  logic signed [XW-1:0] y [ITER+1];
  logic signed [ZW-1:0] z [ITER+1];
  logic                 v [ITER+2];
  logic [USER_W-1:0]    u [ITER+2];

  always_ff @(posedge clk) begin
    logic signed [ZW-1:0] a;
    a = {angle, 4'b0};
    // |angle| > quarter turn: negate the input (half-turn rotation) and fold the angle.
    if (a > (ZW'(1) <<< (ZW - 2)) || a < -(ZW'(1) <<< (ZW - 2))) begin
      x[0] <= -XW'(in_re);
      y[0] <= -XW'(in_im);
      z[0] <= a + (ZW'(1) <<< (ZW - 1));   // a - half turn, modulo one turn
    end else begin
      x[0] <= XW'(in_re);
      y[0] <= XW'(in_im);
      z[0] <= a;
    end
    u[0] <= in_user;
    for (int i = 0; i < ITER; i++) begin
      if (z[i] >= 0) begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
        z[i+1] <= z[i] - ATAN[i];
      end else begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
        z[i+1] <= z[i] + ATAN[i];
      end
      u[i+1] <= u[i];
    end
    begin
      logic signed [XW+18:0] pr, pi;
      pr = (XW+19)'(x[ITER]) * (XW+19)'(INV_K);
      pi = (XW+19)'(y[ITER]) * (XW+19)'(INV_K);
      out_re <= W'((pr + (XW+19)'(1 << 14)) >>> 15);
      out_im <= W'((pi + (XW+19)'(1 << 14)) >>> 15);
    end
    u[ITER+1] <= u[ITER];
  end

  always_ff @(posedge clk) begin
    if (rst) for (int i = 0; i <= ITER + 1; i++) v[i] <= 1'b0;
    else begin
      v[0] <= in_valid;
      for (int i = 0; i <= ITER; i++) v[i+1] <= v[i];
    end
  end

  assign out_valid = v[ITER+1];
  assign out_user  = u[ITER+1];

endmodule
