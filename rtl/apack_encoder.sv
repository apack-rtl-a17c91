// apack_encoder: one APack encoder unit, one value per cycle.
//
// Every cycle with in_en it codes the 8-bit value in_val: SYMBOL Lookup finds
// the table row and the offset, PCNT Table scales the row's count range by the
// current range, and HI/LO/CODE Gen narrows the range, emits the settled code
// bits and tracks pending underflow bits. The state is HI and LO (16b, reset to
// 0xFFFF / 0x0000) and the 5-bit UBC.
//
// Interface (names from the paper's encoder description):
//   hi_in, lo_in   {en, 16b}: load HI / LO before a stream; loading HI also
//                  clears UBC (this design's choice).
//   symt_in        {en, row, {base, ob}}: write a symbol-table row.
//   pcnt_in        {en, row, count}: write a count-table row.
//   in_val, in_en  value to code this cycle.
//   done           ends the stream: flushes the coder (see below). Must not be
//                  raised together with in_en.
// Outputs are registered: they describe the step of the previous cycle and are
// valid while out_valid is high.
//   ofs_out, ofs_r offset bits (LSB-aligned) and their number, 0..7.
//   code_out, code_c, code_v   the code_c MSbs of code_out are code bits.
//   out_u, out_u_v insert out_u copies of ~code_out[15] after code_out[15].
// The flush on done follows the finite-precision arithmetic coder this design
// is modelled on: it emits LO's second MSb b followed by UBC+1 copies of ~b,
// expressed here as code_out = {b, ~b, 0...}, code_c = 2, out_u = UBC.
// A decoder reads the symbol stream with zero bits appended after its end.
// UBC is 5 bits as in the paper; more than 31 pending underflow bits is not
// handled (flagged by an assertion).
module apack_encoder
  import apack_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  range_wr_t        hi_in,
  input  range_wr_t        lo_in,
  input  symt_wr_t         symt_in,
  input  pcnt_wr_t         pcnt_in,
  input  val_t             in_val,
  input  logic             in_en,
  input  logic             done,
  output logic             out_valid,
  output val_t             ofs_out,
  output logic [3:0]       ofs_r,
  output win_t             code_out,
  output logic [3:0]       code_c,
  output logic             code_v,
  output logic [UBC_W-1:0] out_u,
  output logic             out_u_v
);
  win_t             hi_q, lo_q;
  logic [UBC_W-1:0] ubc_q;

  onehot_t          symi;
  val_t             ofs_c;
  logic [OB_W-1:0]  ob_c;
  win_t             s_hi, s_lo, n_hi, n_lo, code_c_out;
  logic [UBC_W-1:0] n_ubc, out_u_c;
  logic [3:0]       code_c_c;
  logic             code_v_c, out_u_v_c;

  apack_enc_symbol_lookup u_sym (
    .clk, .rst_n, .symt_in, .in_val,
    .symi (symi), .ofs_out (ofs_c), .ob_out (ob_c)
  );

  apack_enc_pcnt u_pcnt (
    .clk, .rst_n, .pcnt_in, .symi (symi),
    .hi (hi_q), .lo (lo_q), .s_hi (s_hi), .s_lo (s_lo)
  );

  apack_enc_hilo_gen u_gen (
    .lo (lo_q), .s_hi (s_hi), .s_lo (s_lo), .ubc (ubc_q),
    .n_hi (n_hi), .n_lo (n_lo), .n_ubc (n_ubc),
    .code_out (code_c_out), .code_c (code_c_c), .code_v (code_v_c),
    .out_u (out_u_c), .out_u_v (out_u_v_c)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hi_q      <= '1;
      lo_q      <= '0;
      ubc_q     <= '0;
      out_valid <= 1'b0;
      ofs_out   <= '0;
      ofs_r     <= '0;
      code_out  <= '0;
      code_c    <= '0;
      code_v    <= 1'b0;
      out_u     <= '0;
      out_u_v   <= 1'b0;
    end else begin
      out_valid <= in_en | done;
      if (in_en) begin
        hi_q     <= n_hi;
        lo_q     <= n_lo;
        ubc_q    <= n_ubc;
        ofs_out  <= ofs_c;
        ofs_r    <= 4'(ob_c);
        code_out <= code_c_out;
        code_c   <= code_c_c;
        code_v   <= code_v_c;
        out_u    <= out_u_c;
        out_u_v  <= out_u_v_c;
      end else if (done) begin
        // flush: b = LO[14], then UBC+1 copies of ~b
        ofs_out  <= '0;
        ofs_r    <= '0;
        code_out <= {lo_q[WIN_W-2], ~lo_q[WIN_W-2], {(WIN_W-2){1'b0}}};
        code_c   <= 4'd2;
        code_v   <= 1'b1;
        out_u    <= ubc_q;
        out_u_v  <= (ubc_q != '0);
        hi_q     <= '1;
        lo_q     <= '0;
        ubc_q    <= '0;
      end
      if (hi_in.en) begin
        hi_q  <= hi_in.val;
        ubc_q <= '0;
      end
      if (lo_in.en) lo_q <= lo_in.val;
    end
  end

  // The coder needs a non-empty range for every coded value (the value's row
  // must have a non-zero count range) and cannot hold more than 31 pending
  // underflow bits.
  a_no_done_with_value: assert property (@(posedge clk) disable iff (!rst_n) !(in_en && done));
  a_ubc_fits: assert property (@(posedge clk) disable iff (!rst_n)
    in_en |-> (32'(ubc_q) + 32'(u_gen.p01) <= 32'((1 << UBC_W) - 1)) || code_v_c);
endmodule
