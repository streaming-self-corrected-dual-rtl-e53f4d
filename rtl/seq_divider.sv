// seq_divider: unsigned restoring divider, one quotient bit per clock.
//
// On `start` it latches num and den; NUM_W clocks later `done` pulses for one clock with
// quot = num / den and the remainder discarded. den = 0 gives an all-ones quotient. Used by
// the analysis (first-moment ratio) and by the resampler (grid steps). The paper does not
// describe division; a bit-serial divider is this design's choice because each division is
// needed only once per interferogram.
module seq_divider #(
  parameter int unsigned NUM_W = 48,
  parameter int unsigned DEN_W = 32
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  output logic             busy,
  output logic             done,
  output logic [NUM_W-1:0] quot
);
  logic [NUM_W-1:0]         n_sh;
  logic [DEN_W:0]           rem;
  logic [DEN_W-1:0]         d;
  logic [$clog2(NUM_W+1)-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        n_sh <= num;
        d    <= den;
        rem  <= '0;
        cnt  <= ($clog2(NUM_W+1))'(NUM_W);
      end else if (busy) begin
        logic [DEN_W:0] r2;
        r2 = {rem[DEN_W-1:0], n_sh[NUM_W-1]};
        if (r2 >= {1'b0, d}) begin
          rem  <= r2 - {1'b0, d};
          n_sh <= {n_sh[NUM_W-2:0], 1'b1};
        end else begin
          rem  <= r2;
          n_sh <= {n_sh[NUM_W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quot = n_sh;

endmodule
