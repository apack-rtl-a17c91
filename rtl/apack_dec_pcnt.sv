// apack_dec_pcnt: "PCNT Table" block of the APack decoder.
//
// Finds which symbol row the current code window falls in. It forms
// range = HI - LO + 1 and CODEadj = CODE - LO, scales every row's count
// boundary by the range (sHI[i] = (range * HiCnt[i]) >> 10, one multiplier per
// row) and compares each with CODEadj. A priority encoder picks the first row
// whose scaled boundary exceeds CODEadj; that row's code interval is
// [LO + sHI[i-1], LO + sHI[i] - 1], exactly the interval the encoder used, so
// the decoder recovers the encoder's row. Rows with an empty count range never
// win because their boundary equals the previous row's.
//
// Outputs: one-hot SYMi, and adjHI = sHI[i], adjLO = sHI[i-1] (0 for row 0),
// still relative to LO; HI/LO/CODE Adj adds LO. sym_ok is low if no row
// matched (only possible for a corrupt stream).
// Interface: pcnt_in ({enable, row, count}) writes one row per cycle; the rest
// is combinational. Reset loads a uniform count table, as in the encoder.
module apack_dec_pcnt
  import apack_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  pcnt_wr_t pcnt_in,
  input  win_t     hi,
  input  win_t     lo,
  input  win_t     code,
  output onehot_t  symi,
  output logic     sym_ok,
  output win_t     adj_hi,
  output win_t     adj_lo
);
  cnt_t hicnt [NSYM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSYM; i++) hicnt[i] <= cnt_t'(i * 64 + 63);
    end else if (pcnt_in.en) begin
      hicnt[pcnt_in.idx] <= pcnt_in.cnt;
    end
  end

  logic [RNG_W-1:0]       range_v;
  win_t                   code_adj;
  win_t                   s [NSYM];
  logic [RNG_W+CNT_W-1:0] p;
  onehot_t                gt;
  always_comb begin
    range_v  = RNG_W'(hi) - RNG_W'(lo) + RNG_W'(1);
    code_adj = code - lo;
    for (int i = 0; i < NSYM; i++) begin
      p     = range_v * hicnt[i];
      s[i]  = win_t'(p >> CNT_W);
      gt[i] = (s[i] > code_adj);
    end
    // priority: first row whose scaled upper boundary is above CODEadj
    symi   = '0;
    adj_hi = '0;
    adj_lo = '0;
    for (int i = NSYM - 1; i >= 0; i--) begin
      if (gt[i]) begin
        symi      = '0;
        symi[i]   = 1'b1;
        adj_hi    = s[i];
        adj_lo    = (i == 0) ? '0 : s[(i + NSYM - 1) % NSYM];
      end
    end
    sym_ok = |gt;
  end
endmodule
