// apack_enc_pipe: a two-stage pipelined APack encoder that is time-multiplexed
// over NSTR independent streams (sub-tensors).
//
// All streams share one symbol table and one count table; each stream has its
// own HI, LO and UBC registers. A value enters with its stream number in_sid.
//   Stage 1: SYMBOL Lookup finds the row and offset, PCNT Table scales the
//            row's count range by the stream's current range (HI/LO read from
//            that stream's registers). Results go into a pipeline register.
//   Stage 2: HI/LO/CODE Gen narrows the range, writes the stream's HI, LO and
//            UBC back and fills the output registers.
// Because HI/LO are written at the end of stage 2, a stream may not enter in
// two consecutive cycles: with two or more streams in rotation the unit takes
// one value every cycle. done (with in_sid) flushes that stream exactly like
// the single-cycle encoder (LO's second MSb b, then UBC+1 copies of ~b) and
// returns it to HI = 0xFFFF, LO = 0, UBC = 0; it must not come with in_en.
//
// Timing: outputs are valid two cycles after the value enters (out_valid,
// tagged with out_sid); the output fields mean the same as in apack_encoder.
// The split into these two stages, the issue rule and NSTR = 2 are this
// design's choices; the published description lists the stage boundaries
// (count lookup, HI/LO/CODE generation, offset generation) as options and
// states only that the tables are shared and the range registers are not.
module apack_enc_pipe
  import apack_pkg::*;
#(
  parameter int unsigned NSTR  = 2,
  localparam int unsigned SID_W = (NSTR > 1) ? $clog2(NSTR) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  symt_wr_t         symt_in,
  input  pcnt_wr_t         pcnt_in,
  input  val_t             in_val,
  input  logic             in_en,
  input  logic [SID_W-1:0] in_sid,
  input  logic             done,
  output logic             out_valid,
  output logic [SID_W-1:0] out_sid,
  output val_t             ofs_out,
  output logic [3:0]       ofs_r,
  output win_t             code_out,
  output logic [3:0]       code_c,
  output logic             code_v,
  output logic [UBC_W-1:0] out_u,
  output logic             out_u_v
);
  // per-stream state
  win_t             hi_q  [NSTR];
  win_t             lo_q  [NSTR];
  logic [UBC_W-1:0] ubc_q [NSTR];

  // stage 1
  onehot_t         symi;
  val_t            ofs_c;
  logic [OB_W-1:0] ob_c;
  win_t            s_hi, s_lo;

  // stage 1 -> 2 register
  logic             p_en, p_done;
  logic [SID_W-1:0] p_sid;
  win_t             p_shi, p_slo, p_lo;
  val_t             p_ofs;
  logic [OB_W-1:0]  p_ob;

  // stage 2
  win_t             n_hi, n_lo, code_c_out;
  logic [UBC_W-1:0] n_ubc, out_u_c, p_ubc;
  logic [3:0]       code_c_c;
  logic             code_v_c, out_u_v_c;

  apack_enc_symbol_lookup u_sym (
    .clk, .rst_n, .symt_in, .in_val,
    .symi (symi), .ofs_out (ofs_c), .ob_out (ob_c)
  );

  apack_enc_pcnt u_pcnt (
    .clk, .rst_n, .pcnt_in, .symi (symi),
    .hi (hi_q[in_sid]), .lo (lo_q[in_sid]), .s_hi (s_hi), .s_lo (s_lo)
  );

  assign p_ubc = ubc_q[p_sid];

  apack_enc_hilo_gen u_gen (
    .lo (p_lo), .s_hi (p_shi), .s_lo (p_slo), .ubc (p_ubc),
    .n_hi (n_hi), .n_lo (n_lo), .n_ubc (n_ubc),
    .code_out (code_c_out), .code_c (code_c_c), .code_v (code_v_c),
    .out_u (out_u_c), .out_u_v (out_u_v_c)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_en   <= 1'b0;
      p_done <= 1'b0;
      p_sid  <= '0;
      p_shi  <= '0;
      p_slo  <= '0;
      p_lo   <= '0;
      p_ofs  <= '0;
      p_ob   <= '0;
    end else begin
      p_en   <= in_en;
      p_done <= done & ~in_en;
      p_sid  <= in_sid;
      p_shi  <= s_hi;
      p_slo  <= s_lo;
      p_lo   <= lo_q[in_sid];
      p_ofs  <= ofs_c;
      p_ob   <= ob_c;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSTR; s++) begin
        hi_q[s]  <= '1;
        lo_q[s]  <= '0;
        ubc_q[s] <= '0;
      end
      out_valid <= 1'b0;
      out_sid   <= '0;
      ofs_out   <= '0;
      ofs_r     <= '0;
      code_out  <= '0;
      code_c    <= '0;
      code_v    <= 1'b0;
      out_u     <= '0;
      out_u_v   <= 1'b0;
    end else begin
      out_valid <= p_en | p_done;
      out_sid   <= p_sid;
      if (p_en) begin
        hi_q[p_sid]  <= n_hi;
        lo_q[p_sid]  <= n_lo;
        ubc_q[p_sid] <= n_ubc;
        ofs_out  <= p_ofs;
        ofs_r    <= 4'(p_ob);
        code_out <= code_c_out;
        code_c   <= code_c_c;
        code_v   <= code_v_c;
        out_u    <= out_u_c;
        out_u_v  <= out_u_v_c;
      end else if (p_done) begin
        // flush: b = LO[14], then UBC+1 copies of ~b
        ofs_out  <= '0;
        ofs_r    <= '0;
        code_out <= {p_lo[WIN_W-2], ~p_lo[WIN_W-2], {(WIN_W-2){1'b0}}};
        code_c   <= 4'd2;
        code_v   <= 1'b1;
        out_u    <= p_ubc;
        out_u_v  <= (p_ubc != '0);
        hi_q[p_sid]  <= '1;
        lo_q[p_sid]  <= '0;
        ubc_q[p_sid] <= '0;
      end
    end
  end

  // Issue rule: a stream may not enter while its previous value is still in
  // stage 2. Also: no value and flush together, a valid stream number, and no
  // more than 31 pending underflow bits.
  a_issue_gap: assert property (@(posedge clk) disable iff (!rst_n)
    (in_en || done) && (p_en || p_done) |-> in_sid != p_sid);
  a_no_done_with_value: assert property (@(posedge clk) disable iff (!rst_n) !(in_en && done));
  a_sid_range: assert property (@(posedge clk) disable iff (!rst_n)
    (in_en || done) |-> 32'(in_sid) < NSTR);
  a_ubc_fits: assert property (@(posedge clk) disable iff (!rst_n)
    p_en |-> (32'(p_ubc) + 32'(u_gen.p01) <= 32'((1 << UBC_W) - 1)) || code_v_c);
endmodule
