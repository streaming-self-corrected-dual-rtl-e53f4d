// sample_fifo: the 125 us first-in first-out buffer of the main data path.
//
// The complex stream is written here every valid clock and held until the phase correction
// knows the arrival time and phase of the following interferogram (about one interferogram
// period plus the analysis time later). DEPTH defaults to 38400 entries, the paper's 125 us at
// 307.2 MSa/s. The memory has a synchronous read port feeding a one-entry output register, so
// the head of the queue is always visible on dout (first-word fall-through). A push into a full
// FIFO is dropped and raises `overflow` for one clock. The paper gives the 125 us size; the
// organisation and the drop-on-full policy are this design's choices.
//
// `skip` discards skip_n entries (head first, at most count) in one clock by moving the read
// pointer, so a consumer that fell behind can jump ahead instead of reading one entry a clock.
//
// Interface: push/din write; dout_valid says dout holds the head; pop (only with dout_valid)
// removes it, and the next entry shows one clock later. count is the number held.
module sample_fifo
  import dcs_pkg::*;
#(
  parameter int unsigned DEPTH = 38400
) (
  input  logic                       clk,
  input  logic                       rst,
  input  cplx_t                      din,
  input  logic                       push,
  input  logic                       pop,
  input  logic                       skip,
  input  logic [$clog2(DEPTH+2)-1:0] skip_n,
  output cplx_t                      dout,
  output logic                       dout_valid,
  output logic [$clog2(DEPTH+2)-1:0] count,
  output logic                       overflow
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 2);

  cplx_t         mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [CW-1:0] mem_cnt;
  logic          do_wr, do_rd;

  assign do_wr = push && (mem_cnt < CW'(DEPTH));
  logic [CW-1:0] skip_mem;   // entries skipped in the memory part
  logic [CW:0]   rp_sum;
  assign skip_mem = skip_n - CW'(dout_valid);
  assign rp_sum   = (CW+1)'(rp) + (CW+1)'(skip_mem);
  assign do_rd = !skip && (!dout_valid || pop) && (mem_cnt != 0);
  assign count = mem_cnt + CW'(dout_valid);

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= din;
    if (do_rd) dout <= mem[rp];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp         <= '0;
      rp         <= '0;
      mem_cnt    <= '0;
      dout_valid <= 1'b0;
      overflow   <= 1'b0;
    end else begin
      overflow <= push && !do_wr;
      if (do_wr) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (skip) begin
        rp         <= AW'((rp_sum >= (CW+1)'(DEPTH)) ? rp_sum - (CW+1)'(DEPTH) : rp_sum);
        mem_cnt    <= mem_cnt + CW'(do_wr) - skip_mem;
        dout_valid <= 1'b0;
      end else begin
        if (do_rd) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
        mem_cnt <= mem_cnt + CW'(do_wr) - CW'(do_rd);
        if (do_rd)     dout_valid <= 1'b1;
        else if (pop)  dout_valid <= 1'b0;
      end
    end
  end

  // A pop is only meaningful when the head is valid.
  assert property (@(posedge clk) disable iff (rst) pop |-> dout_valid);
  assert property (@(posedge clk) disable iff (rst) skip |-> (!pop && skip_n <= count && skip_n != 0));

endmodule
