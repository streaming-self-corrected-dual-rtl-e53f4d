// ring_buffer: the 4 us look-back buffer in front of the interferogram analysis.
//
// A circular memory of DEPTH complex samples (1229 = 4 us at 307.2 MSa/s by default, the
// paper's 4 us) written at one sample per valid clock. Each write first reads the entry it
// overwrites, so the output is the stream delayed by exactly DEPTH samples. This lets the
// analysis start its window 4 us before the trigger. The paper gives the 4 us length; the
// read-before-write delay-line organisation is this design's choice.
//
// Interface/timing: when din_valid, dout/dout_valid show (one clock later) the sample that
// entered DEPTH valid samples earlier; dout_valid stays low until DEPTH samples were written.
module ring_buffer
  import dcs_pkg::*;
#(
  parameter int unsigned DEPTH = 1229
) (
  input  logic  clk,
  input  logic  rst,
  input  cplx_t din,
  input  logic  din_valid,
  output cplx_t dout,
  output logic  dout_valid
);
  localparam int unsigned AW = $clog2(DEPTH);

  cplx_t          mem [DEPTH];
  logic [AW-1:0]  wp;
  logic           full;

  always_ff @(posedge clk) begin
    if (din_valid) begin
      dout    <= mem[wp];
      mem[wp] <= din;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp         <= '0;
      full       <= 1'b0;
      dout_valid <= 1'b0;
    end else begin
      dout_valid <= din_valid && full;
      if (din_valid) begin
        if (wp == AW'(DEPTH - 1)) begin
          wp   <= '0;
          full <= 1'b1;
        end else begin
          wp <= wp + 1'b1;
        end
      end
    end
  end

endmodule
