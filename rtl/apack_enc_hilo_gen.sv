// apack_enc_hilo_gen: "HI/LO/CODE Gen" block of the APack encoder.
//
// Places the scaled count range of the current symbol into the current code
// range: tHI = LO + sHI - 1 and tLO = LO + sLO (sHI/sLO count from 0; the -1
// makes tHI inclusive). It then renormalises (apack_range_norm): the common
// prefix of tHI and tLO becomes the code output, the underflow (01) subprefix
// is dropped and added to the pending underflow count UBC.
//
// Output format, as in the paper: CODE_out holds tHI; its CODE_c most
// significant bits are the code bits to append (code_v = 0 when CODE_c is 0).
// When code bits are emitted and UBC was non-zero, OUT_u = UBC bits equal to the
// inverse of CODE_out's MSb must be inserted right after that MSb; UBC then
// restarts from this step's underflow count. Without code output the
// underflow count accumulates.
// Purely combinational.
module apack_enc_hilo_gen
  import apack_pkg::*;
(
  input  win_t             lo,
  input  win_t             s_hi,
  input  win_t             s_lo,
  input  logic [UBC_W-1:0] ubc,
  output win_t             n_hi,
  output win_t             n_lo,
  output logic [UBC_W-1:0] n_ubc,
  output win_t             code_out,
  output logic [3:0]       code_c,
  output logic             code_v,
  output logic [UBC_W-1:0] out_u,
  output logic             out_u_v
);
  win_t t_hi, t_lo;
  logic [4:0] cpl, p01;

  assign t_hi = lo + s_hi - win_t'(1);
  assign t_lo = lo + s_lo;

  apack_range_norm u_norm (
    .t_hi (t_hi), .t_lo (t_lo),
    .cpl  (cpl),  .p01  (p01),
    .n_hi (n_hi), .n_lo (n_lo)
  );

  always_comb begin
    code_out = t_hi;
    code_c   = cpl[3:0];
    code_v   = (cpl != 5'd0);
    if (code_v) begin
      out_u   = ubc;
      out_u_v = (ubc != '0);
      n_ubc   = UBC_W'(p01);
    end else begin
      out_u   = '0;
      out_u_v = 1'b0;
      n_ubc   = ubc + UBC_W'(p01);
    end
  end
endmodule
