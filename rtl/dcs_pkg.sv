// dcs_pkg: types and constants shared by the dual-comb self-correction pipeline.
//
// A complex sample is a pair of signed 16-bit integers. Times are unsigned fixed-point
// numbers in units of one complex sample period (one fabric clock, 1/307.2 MHz) with
// TIME_FRAC fractional bits, so sub-sample arrival times can be carried. Phases are signed
// numbers in turns (2^PHASE_W = one full turn), so phase differences wrap modulo 2*pi for
// free in two's complement. The word widths are this design's choice; the paper gives none
// besides the 14-bit converter.
package dcs_pkg;

  localparam int unsigned DATA_W    = 16;  // I and Q width of the complex stream
  localparam int unsigned TIME_INT  = 32;  // integer bits of a sample time
  localparam int unsigned TIME_FRAC = 8;   // fractional bits of a sample time
  localparam int unsigned TIME_W    = TIME_INT + TIME_FRAC;
  localparam int unsigned PHASE_W   = 16;  // one turn = 2^PHASE_W

  typedef struct packed {
    logic signed [DATA_W-1:0] re;
    logic signed [DATA_W-1:0] im;
  } cplx_t;

  typedef logic [TIME_W-1:0]          time_t;   // sample time, TIME_FRAC fractional bits
  typedef logic signed [PHASE_W-1:0]  phase_t;  // phase in turns

  // Everything the analysis measures for one interferogram.
  typedef struct packed {
    time_t              t_center;   // arrival time: first moment of |x|
    time_t              dt_center;  // t_center minus the previous t_center
    logic signed [15:0] f_bin;      // carrier frequency as signed FFT bin index
    phase_t             phi;        // carrier phase at t_center
    phase_t             dphi;       // phi minus the previous phi, wrapped to [-pi, pi)
  } ifg_result_t;

endpackage
