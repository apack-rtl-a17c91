// apack_range_norm: the range renormalisation step shared by the APack
// encoder (HI/LO/CODE Gen) and decoder (HI/LO/CODE Adj).
//
// Given the new range boundaries tHI > tLO it does in one combinational step
// what a bit-serial arithmetic coder does in a loop:
//   1. Common prefix: XOR tHI and tLO and find the leading 1 (LD1). The cpl
//      bits above it are equal in both and can no longer change; they are
//      shifted out (they are the code bits of this step). HI is refilled with
//      1s and LO with 0s, since HI stands for a number with an infinite tail
//      of 1s and LO for one with a tail of 0s. This gives tHI' and tLO'.
//   2. Underflow prefix (01PREFIX): below the MSb, count the run of positions
//      where tLO' is 1 and tHI' is 0 (an AND of tLO' with NOT tHI' per bit
//      position, then a leading-zero detect). Those p01 bits are removed
//      while the MSb is kept, and HI/LO are refilled again. The caller adds
//      p01 to its pending underflow count (encoder) or drops the same bits
//      from CODE (decoder).
// The outputs are nHI and nLO. The algorithm follows the paper's description;
// the exact arrangement of shifters is this design's own.
// Purely combinational; no clock.
module apack_range_norm
  import apack_pkg::*;
(
  input  win_t       t_hi,
  input  win_t       t_lo,
  output logic [4:0] cpl,    // common prefix length, 0..16
  output logic [4:0] p01,    // underflow subprefix length, 0..15
  output win_t       n_hi,
  output win_t       n_lo
);
  win_t diff, hi1, lo1;
  logic [WIN_W-2:0] und;
  logic [WIN_W-2:0] hi_rest, lo_rest;
  logic run;

  always_comb begin
    diff = t_hi ^ t_lo;
    // LD1: position of the first differing bit from the MSb
    cpl = 5'(WIN_W);
    for (int j = 0; j < WIN_W; j++) begin
      if (diff[j]) cpl = 5'(WIN_W - 1 - j);
    end
    hi1 = win_t'((32'(t_hi) << cpl) | ((32'd1 << cpl) - 32'd1));
    lo1 = win_t'(32'(t_lo) << cpl);
    // 01PREFIX: run of (lo=1, hi=0) starting at the second MSb
    for (int j = 0; j < WIN_W - 1; j++) und[j] = lo1[j] & ~hi1[j];
    p01 = '0;
    run = 1'b1;
    for (int j = WIN_W - 2; j >= 0; j--) begin
      if (run && und[j]) p01 = p01 + 5'd1;
      else               run = 1'b0;
    end
    hi_rest = (WIN_W-1)'((32'(hi1[WIN_W-2:0]) << p01) | ((32'd1 << p01) - 32'd1));
    lo_rest = (WIN_W-1)'(32'(lo1[WIN_W-2:0]) << p01);
    n_hi = {hi1[WIN_W-1] | (p01 != 5'd0), hi_rest};
    n_lo = {lo1[WIN_W-1] & (p01 == 5'd0), lo_rest};
  end
endmodule
