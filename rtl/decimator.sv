// decimator: average of DECIM successive real samples.
//
// The mixed word of SAMPLES_PER_CLK samples (16) is cut into SAMPLES_PER_CLK/DECIM groups
// of DECIM (8) consecutive samples; each group is summed and divided by DECIM, giving two real
// samples per clock (614.4 MSa/s), as the paper describes. The boxcar average is also the
// anti-alias filter: its nulls sit at multiples of the output rate. The paper gives the
// averaging; the truncating division (arithmetic shift) is this design's choice.
//
// Interface: dout[j] is the average of din[j*DECIM .. j*DECIM+DECIM-1]; j = 0 is older.
// Timing: one register stage, one clock of latency.
module decimator #(
  parameter int unsigned SAMPLES_PER_CLK = 16,
  parameter int unsigned DECIM           = 8,
  parameter int unsigned W               = 16
) (
  input  logic                  clk,
  input  logic signed [W-1:0]   din  [SAMPLES_PER_CLK],
  output logic signed [W-1:0]   dout [SAMPLES_PER_CLK/DECIM]
);
  localparam int unsigned NOUT = SAMPLES_PER_CLK / DECIM;
  localparam int unsigned SW   = W + $clog2(DECIM);

  always_ff @(posedge clk) begin
    for (int j = 0; j < NOUT; j++) begin
      logic signed [SW-1:0] s;
      s = '0;
      for (int k = 0; k < DECIM; k++) s = s + SW'(din[j*DECIM + k]);
      dout[j] <= W'(s >>> $clog2(DECIM));
    end
  end

endmodule
