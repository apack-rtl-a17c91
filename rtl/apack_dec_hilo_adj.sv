// apack_dec_hilo_adj: "HI/LO/CODE Adj" block of the APack decoder.
//
// Mirrors the encoder's range update. With the row's scaled boundaries adjHI
// and adjLO from the PCNT Table it forms tHI = LO + adjHI - 1 and
// tLO = LO + adjLO and renormalises them exactly as the encoder does
// (apack_range_norm). The CODE window is then shifted the same way: the cpl
// common-prefix bits are shifted out at the top, then the p01 underflow bits
// just below the MSb (cMSb) are removed, and cpl + p01 new bits are pulled in
// from code_in, which presents the 16 symbol-stream bits that follow CODE.
// code_r = cpl + p01 tells the supplier how many bits were consumed.
// Purely combinational.
module apack_dec_hilo_adj
  import apack_pkg::*;
(
  input  win_t       lo,
  input  win_t       adj_hi,
  input  win_t       adj_lo,
  input  win_t       code_q,
  input  win_t       code_in,
  output win_t       n_hi,
  output win_t       n_lo,
  output win_t       n_code,
  output logic [4:0] code_r
);
  win_t t_hi, t_lo;
  logic [4:0] cpl, p01;
  logic [2*WIN_W-1:0] c1;
  logic [2*WIN_W-2:0] rest;

  assign t_hi = lo + adj_hi - win_t'(1);
  assign t_lo = lo + adj_lo;

  apack_range_norm u_norm (
    .t_hi (t_hi), .t_lo (t_lo),
    .cpl  (cpl),  .p01  (p01),
    .n_hi (n_hi), .n_lo (n_lo)
  );

  always_comb begin
    c1     = {code_q, code_in} << cpl;
    rest   = c1[2*WIN_W-2:0] << p01;
    n_code = {c1[2*WIN_W-1], rest[2*WIN_W-2 -: WIN_W-1]};
    code_r = cpl + p01;
  end
endmodule
