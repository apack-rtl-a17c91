// apack_dec_pipe: a two-stage pipelined APack decoder that is time-multiplexed
// over NSTR independent streams.
//
// All streams share one symbol table and one count table; each stream has its
// own HI, LO, CODE and OFS registers. A command (start or step) enters with
// its stream number in_sid.
//   Stage 1: PCNT Table finds the symbol row from the stream's HI, LO and
//            CODE; row, interval bounds, LO and CODE go into a pipeline
//            register.
//   Stage 2: SYMBOL Gen forms the value from the row's base and the stream's
//            OFS window, HI/LO/CODE Adj renormalises; the stream's registers
//            are written back and the value goes to the output register.
// A start command resets the stream's range to 0xFFFF / 0x0000 and, in stage
// 2, fills its CODE and OFS windows.
//
// The bit supply works on the stream in stage 2: win_sid names it, code_in and
// ofs_in must hold the 16 and 8 bits that follow that stream's CODE and OFS
// registers, and code_r / ofs_r (combinational, not depending on code_in or
// ofs_in) say how many bits to advance that stream by at the clock edge.
// win_v is high when stage 2 holds a command; the windows must be full then.
//
// Timing: out_val / out_valid / out_sid appear two cycles after the step
// command. A stream may not be commanded in two consecutive cycles (its
// registers are written at the end of stage 2); with two or more streams in
// rotation the unit decodes one value per cycle. The stage split, the issue
// rule, the start command and NSTR = 2 are this design's choices; the
// published description names the possible stage boundaries and says that the
// tables are shared while OFS, CODE, HI and LO are kept per stream.
module apack_dec_pipe
  import apack_pkg::*;
#(
  parameter int unsigned NSTR  = 2,
  localparam int unsigned SID_W = (NSTR > 1) ? $clog2(NSTR) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  symt_wr_t         symt_in,
  input  pcnt_wr_t         pcnt_in,
  input  logic             start,
  input  logic             step,
  input  logic [SID_W-1:0] in_sid,
  output logic [SID_W-1:0] win_sid,
  output logic             win_v,
  input  win_t             code_in,
  input  val_t             ofs_in,
  output logic [4:0]       code_r,
  output logic [3:0]       ofs_r,
  output val_t             out_val,
  output logic             out_valid,
  output logic [SID_W-1:0] out_sid,
  output logic             sym_err
);
  // per-stream state
  win_t hi_q   [NSTR];
  win_t lo_q   [NSTR];
  win_t code_q [NSTR];
  val_t ofs_q  [NSTR];

  // stage 1
  onehot_t symi;
  logic    sym_ok;
  win_t    adj_hi, adj_lo;

  // stage 1 -> 2 register
  logic             p_step, p_start, p_ok;
  logic [SID_W-1:0] p_sid;
  onehot_t          p_symi;
  win_t             p_adj_hi, p_adj_lo, p_lo, p_code;

  // stage 2
  win_t       n_hi, n_lo, n_code;
  val_t       val_c, n_ofs, p_ofs;
  logic [3:0] ofs_r_c;
  logic [4:0] code_r_c;

  apack_dec_pcnt u_pcnt (
    .clk, .rst_n, .pcnt_in,
    .hi (hi_q[in_sid]), .lo (lo_q[in_sid]), .code (code_q[in_sid]),
    .symi (symi), .sym_ok (sym_ok), .adj_hi (adj_hi), .adj_lo (adj_lo)
  );

  assign p_ofs = ofs_q[p_sid];

  apack_dec_symbol_gen u_sym (
    .clk, .rst_n, .symt_in, .symi (p_symi),
    .ofs_q (p_ofs), .ofs_in (ofs_in),
    .out_val (val_c), .n_ofs (n_ofs), .ofs_r (ofs_r_c)
  );

  apack_dec_hilo_adj u_adj (
    .lo (p_lo), .adj_hi (p_adj_hi), .adj_lo (p_adj_lo),
    .code_q (p_code), .code_in (code_in),
    .n_hi (n_hi), .n_lo (n_lo), .n_code (n_code), .code_r (code_r_c)
  );

  assign win_sid = p_sid;
  assign win_v   = p_start | p_step;

  always_comb begin
    code_r = '0;
    ofs_r  = '0;
    if (p_start) begin
      code_r = 5'(WIN_W);
      ofs_r  = 4'(VAL_W);
    end else if (p_step) begin
      code_r = code_r_c;
      ofs_r  = ofs_r_c;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_step   <= 1'b0;
      p_start  <= 1'b0;
      p_ok     <= 1'b0;
      p_sid    <= '0;
      p_symi   <= '0;
      p_adj_hi <= '0;
      p_adj_lo <= '0;
      p_lo     <= '0;
      p_code   <= '0;
    end else begin
      p_start  <= start;
      p_step   <= step & ~start;
      p_ok     <= sym_ok;
      p_sid    <= in_sid;
      p_symi   <= symi;
      p_adj_hi <= adj_hi;
      p_adj_lo <= adj_lo;
      p_lo     <= lo_q[in_sid];
      p_code   <= code_q[in_sid];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSTR; s++) begin
        hi_q[s]   <= '1;
        lo_q[s]   <= '0;
        code_q[s] <= '0;
        ofs_q[s]  <= '0;
      end
      out_val   <= '0;
      out_valid <= 1'b0;
      out_sid   <= '0;
      sym_err   <= 1'b0;
    end else begin
      out_valid <= p_step;
      out_sid   <= p_sid;
      if (p_start) begin
        hi_q[p_sid]   <= '1;
        lo_q[p_sid]   <= '0;
        code_q[p_sid] <= code_in;
        ofs_q[p_sid]  <= ofs_in;
      end else if (p_step) begin
        hi_q[p_sid]   <= n_hi;
        lo_q[p_sid]   <= n_lo;
        code_q[p_sid] <= n_code;
        ofs_q[p_sid]  <= n_ofs;
        out_val       <= val_c;
        sym_err       <= ~p_ok;
      end
    end
  end

  // Issue rule: a stream may not be commanded while its previous command is
  // still in stage 2; start and step are exclusive; stream number in range.
  a_issue_gap: assert property (@(posedge clk) disable iff (!rst_n)
    (start || step) && (p_start || p_step) |-> in_sid != p_sid);
  a_start_xor_step: assert property (@(posedge clk) disable iff (!rst_n) !(start && step));
  a_sid_range: assert property (@(posedge clk) disable iff (!rst_n)
    (start || step) |-> 32'(in_sid) < NSTR);
endmodule
