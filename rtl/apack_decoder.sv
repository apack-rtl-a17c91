// apack_decoder: one APack decoder unit, one value per cycle.
//
// State: HI and LO (16b, reset to 0xFFFF / 0x0000), the 16-bit CODE window
// into the symbol stream and the 8-bit OFS window into the offset stream.
// Each decode step: PCNT Table finds the symbol row whose scaled interval holds
// CODE, SYMBOL Gen adds the row's base to the next ob offset bits, and
// HI/LO/CODE Adj updates the range and the CODE window as the encoder did.
//
// Interface (names from the paper's decoder figure):
//   hi_in, lo_in, symt_in, pcnt_in   initialisation, as in the encoder.
//   code_in  the 16 symbol-stream bits that follow the CODE register, MSb first.
//   ofs_in   the 8 offset-stream bits that follow the OFS register, MSb first.
//   start    fill CODE and OFS from code_in / ofs_in (code_r = 16, ofs_r = 8).
//   step     decode one value.
//   code_r   (5b) symbol-stream bits consumed this cycle, combinational.
//   ofs_r    (4b) offset-stream bits consumed this cycle, combinational.
//   out_val, out_valid  decoded value, registered: valid the cycle after step.
// The supplier must advance its read position by code_r and ofs_r every
// cycle. code_r and ofs_r do not depend on code_in or ofs_in, so there is no
// combinational loop through the supplier. The start/step control and the
// look-ahead form of code_in/ofs_in are this design's own; the paper gives the
// ports and their widths.
module apack_decoder
  import apack_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  range_wr_t  hi_in,
  input  range_wr_t  lo_in,
  input  symt_wr_t   symt_in,
  input  pcnt_wr_t   pcnt_in,
  input  logic       start,
  input  logic       step,
  input  win_t       code_in,
  input  val_t       ofs_in,
  output logic [4:0] code_r,
  output logic [3:0] ofs_r,
  output val_t       out_val,
  output logic       out_valid,
  output logic       sym_err
);
  win_t hi_q, lo_q, code_q;
  val_t ofs_q;

  onehot_t    symi;
  logic       sym_ok;
  win_t       adj_hi, adj_lo, n_hi, n_lo, n_code;
  val_t       val_c, n_ofs;
  logic [3:0] ofs_r_c;
  logic [4:0] code_r_c;

  apack_dec_pcnt u_pcnt (
    .clk, .rst_n, .pcnt_in,
    .hi (hi_q), .lo (lo_q), .code (code_q),
    .symi (symi), .sym_ok (sym_ok), .adj_hi (adj_hi), .adj_lo (adj_lo)
  );

  apack_dec_symbol_gen u_sym (
    .clk, .rst_n, .symt_in, .symi (symi),
    .ofs_q (ofs_q), .ofs_in (ofs_in),
    .out_val (val_c), .n_ofs (n_ofs), .ofs_r (ofs_r_c)
  );

  apack_dec_hilo_adj u_adj (
    .lo (lo_q), .adj_hi (adj_hi), .adj_lo (adj_lo),
    .code_q (code_q), .code_in (code_in),
    .n_hi (n_hi), .n_lo (n_lo), .n_code (n_code), .code_r (code_r_c)
  );

  always_comb begin
    code_r = '0;
    ofs_r  = '0;
    if (start) begin
      code_r = 5'(WIN_W);
      ofs_r  = 4'(VAL_W);
    end else if (step) begin
      code_r = code_r_c;
      ofs_r  = ofs_r_c;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hi_q      <= '1;
      lo_q      <= '0;
      code_q    <= '0;
      ofs_q     <= '0;
      out_val   <= '0;
      out_valid <= 1'b0;
      sym_err   <= 1'b0;
    end else begin
      out_valid <= step & ~start;
      if (start) begin
        code_q <= code_in;
        ofs_q  <= ofs_in;
      end else if (step) begin
        hi_q    <= n_hi;
        lo_q    <= n_lo;
        code_q  <= n_code;
        ofs_q   <= n_ofs;
        out_val <= val_c;
        sym_err <= ~sym_ok;
      end
      if (hi_in.en) hi_q <= hi_in.val;
      if (lo_in.en) lo_q <= lo_in.val;
    end
  end

  a_start_xor_step: assert property (@(posedge clk) disable iff (!rst_n) !(start && step));
endmodule
