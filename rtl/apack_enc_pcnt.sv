// apack_enc_pcnt: "PCNT Table" block of the APack encoder.
//
// Holds one 10-bit probability count per row, HiCnt[i], the inclusive end of
// the row's count range. For the row selected by the one-hot SYMi it picks
// cHI = HiCnt[i] and cLO = HiCnt[i-1] (0 for row 0) and scales both by the
// current range HI - LO + 1: sHI = (range * cHI) >> 10, sLO = (range * cLO) >> 10.
// Dropping the 10 LSBs divides by 2^10, which turns counts into fractions of
// the range; the products below bit 10 are therefore not kept. As in the paper
// the full count range 0 .. 0x3FF is always assigned, so the top 1/1024 of the
// range is never used.
//
// Interface: pcnt_in ({enable, row, count}, the printed 10+4+1 port) writes
// one row per cycle. Lookup and scaling are combinational.
// The range is 17 bits wide here because HI - LO + 1 reaches 0x10000 for the
// initial range (the paper calls it a 16b number). Reset loads a uniform count
// table (HiCnt[i] = 64*i + 63), this design's own choice.
module apack_enc_pcnt
  import apack_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  pcnt_wr_t pcnt_in,
  input  onehot_t  symi,
  input  win_t     hi,
  input  win_t     lo,
  output win_t     s_hi,
  output win_t     s_lo
);
  cnt_t hicnt [NSYM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSYM; i++) hicnt[i] <= cnt_t'(i * 64 + 63);
    end else if (pcnt_in.en) begin
      hicnt[pcnt_in.idx] <= pcnt_in.cnt;
    end
  end

  logic [RNG_W-1:0] range_v;
  cnt_t c_hi, c_lo;
  logic [RNG_W+CNT_W-1:0] p_hi, p_lo;
  always_comb begin
    c_hi = '0;
    c_lo = '0;
    for (int i = 0; i < NSYM; i++) begin
      if (symi[i]) begin
        c_hi = c_hi | hicnt[i];
        if (i > 0) c_lo = c_lo | hicnt[(i + NSYM - 1) % NSYM];
      end
    end
    range_v = RNG_W'(hi) - RNG_W'(lo) + RNG_W'(1);
    p_hi = range_v * c_hi;
    p_lo = range_v * c_lo;
    s_hi = win_t'(p_hi >> CNT_W);
    s_lo = win_t'(p_lo >> CNT_W);
  end
endmodule
