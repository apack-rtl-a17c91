// apack_enc_engine: one APack compression engine as it sits in front of the
// memory controller: an encoder, the two stream packers and the symbol
// counter.
//
// Values arrive one per cycle (in_val, in_en). The encoder's code output is
// expanded to a plain bit string: the MSb of code_out, then out_u copies of its
// inverse (pending underflow bits), then the remaining code_c - 1 code bits.
// That string goes to the symbol-stream packer, the offset bits to the
// offset-stream packer; each emits WORD_W-bit words for memory. done ends the
// stream: the encoder flushes, both packers pad their last word, and the number
// of values coded (kept by the paper as stream metadata for the decoder) is
// presented on nsym with nsym_v.
//
// Latency: an input value's bits reach the packers one cycle later and a word
// that they complete leaves one cycle after that. stream_done pulses once both
// packers have written their last word. The word width and the packer
// structure are this design's choices (the paper asks only for wide sequential
// accesses); NSYM_W, the width of the metadata count, is assumed.
module apack_enc_engine
  import apack_pkg::*;
#(
  parameter int unsigned WORD_W = 64,
  parameter int unsigned NSYM_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  symt_wr_t          symt_in,
  input  pcnt_wr_t          pcnt_in,
  input  val_t              in_val,
  input  logic              in_en,
  input  logic              done,
  output logic [WORD_W-1:0] code_word,
  output logic              code_word_v,
  output logic [WORD_W-1:0] ofs_word,
  output logic              ofs_word_v,
  output logic [NSYM_W-1:0] nsym,
  output logic              nsym_v,
  output logic              stream_done,
  output logic              underflow_seen  // pulses when underflow bits are emitted
);
  localparam int unsigned EXP_W = CODE_EXP_W;

  logic             e_valid, e_code_v, e_out_u_v;
  val_t             e_ofs;
  logic [3:0]       e_ofs_r, e_code_c;
  win_t             e_code;
  logic [UBC_W-1:0] e_out_u;
  logic             done_q;
  logic             c_fd, o_fd, c_fd_seen, o_fd_seen;

  apack_encoder u_enc (
    .clk, .rst_n,
    .hi_in   ('0), .lo_in ('0),
    .symt_in, .pcnt_in,
    .in_val, .in_en, .done,
    .out_valid (e_valid), .ofs_out (e_ofs), .ofs_r (e_ofs_r),
    .code_out (e_code), .code_c (e_code_c), .code_v (e_code_v),
    .out_u (e_out_u), .out_u_v (e_out_u_v)
  );

  // expand {MSb, out_u x ~MSb, rest of code bits} into one MSb-aligned string
  logic [EXP_W-1:0]          exp_bits;
  logic [$clog2(EXP_W+1)-1:0] exp_cnt;
  logic [4:0]                u;
  always_comb begin
    u        = e_out_u_v ? 5'(e_out_u) : 5'd0;
    exp_bits = '0;
    exp_bits[EXP_W-1] = e_code[WIN_W-1];
    for (int j = 1; j < EXP_W; j++) begin
      if (j <= 32'(u))
        exp_bits[EXP_W-1-j] = ~e_code[WIN_W-1];
      else if ((j - 32'(u)) < 32'(e_code_c))
        exp_bits[EXP_W-1-j] = e_code[WIN_W-1-((j - 32'(u)) % WIN_W)];
    end
    exp_cnt = $clog2(EXP_W+1)'(32'(e_code_c) + 32'(u));
  end

  apack_bit_packer #(.IN_W (EXP_W), .WORD_W (WORD_W)) u_code_pk (
    .clk, .rst_n,
    .in_bits (exp_bits), .in_cnt (exp_cnt), .in_v (e_valid && e_code_v),
    .flush (done_q),
    .word (code_word), .word_v (code_word_v), .flush_done (c_fd)
  );

  apack_bit_packer #(.IN_W (VAL_W), .WORD_W (WORD_W)) u_ofs_pk (
    .clk, .rst_n,
    .in_bits (val_t'(e_ofs << (VAL_W - 32'(e_ofs_r)))),
    .in_cnt  (e_ofs_r),
    .in_v    (e_valid && (e_ofs_r != '0)),
    .flush   (done_q),
    .word (ofs_word), .word_v (ofs_word_v), .flush_done (o_fd)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_q         <= 1'b0;
      nsym           <= '0;
      nsym_v         <= 1'b0;
      c_fd_seen      <= 1'b0;
      o_fd_seen      <= 1'b0;
      stream_done    <= 1'b0;
      underflow_seen <= 1'b0;
    end else begin
      done_q         <= done;
      nsym_v         <= done;
      underflow_seen <= e_valid && e_code_v && e_out_u_v;
      stream_done    <= 1'b0;
      if (nsym_v)     nsym <= NSYM_W'(in_en);
      else if (in_en) nsym <= nsym + NSYM_W'(1);
      if (c_fd) c_fd_seen <= 1'b1;
      if (o_fd) o_fd_seen <= 1'b1;
      if ((c_fd || c_fd_seen) && (o_fd || o_fd_seen)) begin
        stream_done <= 1'b1;
        c_fd_seen   <= 1'b0;
        o_fd_seen   <= 1'b0;
      end
    end
  end
endmodule
