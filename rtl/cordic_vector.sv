// cordic_vector: pipelined CORDIC in vectoring mode: magnitude and angle of a complex value.
//
// A first stage folds the input into the right half plane (adding half a turn to the angle
// when it negates it); then ITER micro-rotations by +-atan(2^-i) drive y to zero while
// summing the rotation angles. Results: mag = K*|x + jy| with the CORDIC gain K ~ 1.6468 left
// in (every use here takes ratios or maxima, where K cancels), and angle = arg(x + jy) in turns
// (2^PHASE_W = one turn). A USER_W-bit tag travels alongside for the caller's bookkeeping.
// The interferogram analysis uses it for the magnitude whose first moment gives the arrival
// time, and for the phase of the FFT peak; the paper does not say how these are computed.
//
// Timing: fully pipelined, one input per clock, latency ITER + 1 clocks.
module cordic_vector #(
  parameter int unsigned W       = 16,
  parameter int unsigned ITER    = 16,
  parameter int unsigned PHASE_W = 16,
  parameter int unsigned USER_W  = 1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  in_re,
  input  logic signed [W-1:0]  in_im,
  input  logic [USER_W-1:0]    in_user,
  output logic                 out_valid,
  output logic [W+1:0]         mag,
  output logic [PHASE_W-1:0]   angle,
  output logic [USER_W-1:0]    out_user
);
  localparam int unsigned XW = W + 2;
  localparam int unsigned ZW = PHASE_W + 4;

  typedef logic [ZW-1:0] atan_t [ITER];

  function automatic atan_t gen_atan();
    atan_t t;
    for (int i = 0; i < ITER; i++)
      t[i] = ZW'($rtoi($floor($atan(2.0 ** (-i)) / (2.0 * 3.14159265358979) * (2.0 ** ZW) + 0.5)));
    return t;
  endfunction

  localparam atan_t ATAN = gen_atan();

  logic signed [XW-1:0] x [ITER+1];
  logic signed [XW-1:0] y [ITER+1];
  logic [ZW-1:0]        z [ITER+1];
  logic                 v [ITER+1];
  logic [USER_W-1:0]    u [ITER+1];

  always_ff @(posedge clk) begin
    if (in_re < 0) begin
      x[0] <= -XW'(in_re);
      y[0] <= -XW'(in_im);
      z[0] <= ZW'(1) << (ZW - 1);
    end else begin
      x[0] <= XW'(in_re);
      y[0] <= XW'(in_im);
      z[0] <= '0;
    end
    u[0] <= in_user;
    for (int i = 0; i < ITER; i++) begin
      if (y[i] > 0) begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
        z[i+1] <= z[i] + ATAN[i];
      end else begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
        z[i+1] <= z[i] - ATAN[i];
      end
      u[i+1] <= u[i];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) for (int i = 0; i <= ITER; i++) v[i] <= 1'b0;
    else begin
      v[0] <= in_valid;
      for (int i = 0; i < ITER; i++) v[i+1] <= v[i];
    end
  end

  assign out_valid = v[ITER];
  assign mag       = (W+2)'(x[ITER]);
  assign angle     = PHASE_W'((z[ITER] + (ZW'(1) << 3)) >> 4);
  assign out_user  = u[ITER];

endmodule
