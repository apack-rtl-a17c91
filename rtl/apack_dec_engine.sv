// apack_dec_engine: one APack decompression engine: two stream unpackers, a
// decoder and the control that runs one stream.
//
// A stream starts with cmd_start and its value count cmd_nsym (the metadata
// the encoder side recorded). The engine empties its unpackers, loads the
// decoder's HI/LO with 0xFFFF/0x0000 through the decoder's HI_in/LO_in ports,
// waits until both unpackers hold a full window, fills the decoder's CODE and
// OFS registers (start) and then decodes one value per cycle until cmd_nsym
// values are out. Memory words arrive on code_word/ofs_word with ready/valid
// handshakes, taken only while a stream is active; the symbol stream must be followed by at least 16 zero bits
// (the engine keeps taking words after the stream's last one, and the memory
// side supplies zero words there).
//
// Whenever a unpacker runs short of bits the decoder waits (stall pulses),
// which is the only source of bubbles. Output: out_val/out_valid, one value per
// cycle at best, two cycles after the step; busy is high while a stream is
// being decoded. The sequencing is this design's own; the paper states that
// tables are loaded before a layer and that the recorded number of symbols
// terminates decoding.
module apack_dec_engine
  import apack_pkg::*;
#(
  parameter int unsigned WORD_W = 64,
  parameter int unsigned NSYM_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  symt_wr_t          symt_in,
  input  pcnt_wr_t          pcnt_in,
  input  logic              cmd_start,
  input  logic [NSYM_W-1:0] cmd_nsym,
  input  logic [WORD_W-1:0] code_word,
  input  logic              code_word_v,
  output logic              code_word_rdy,
  input  logic [WORD_W-1:0] ofs_word,
  input  logic              ofs_word_v,
  output logic              ofs_word_rdy,
  output val_t              out_val,
  output logic              out_valid,
  output logic              busy,
  output logic              stall,
  output logic              sym_err
);
  typedef enum logic [1:0] {S_IDLE, S_INIT, S_PRIME, S_RUN} state_t;
  state_t            state_q;
  logic [NSYM_W-1:0] left_q;

  logic       clear, d_start, d_step;
  win_t       code_win;
  val_t       ofs_win;
  logic       code_win_v, ofs_win_v;
  logic [4:0] code_r;
  logic [3:0] ofs_r;
  range_wr_t  hi_wr, lo_wr;
  logic       d_valid;
  val_t       d_val;
  logic       fetch, c_rdy, o_rdy;

  always_comb begin
    clear   = (state_q == S_INIT);
    hi_wr   = '{en: (state_q == S_INIT), val: '1};
    lo_wr   = '{en: (state_q == S_INIT), val: '0};
    d_start = (state_q == S_PRIME) && code_win_v && ofs_win_v;
    d_step  = (state_q == S_RUN) && (left_q != '0) && code_win_v && ofs_win_v;
    stall   = (state_q == S_RUN) && (left_q != '0) && !(code_win_v && ofs_win_v);
    busy    = (state_q != S_IDLE);
    // words are taken only while a stream is being read
    fetch   = (state_q == S_PRIME) || (state_q == S_RUN);
  end

  assign code_word_rdy = c_rdy && fetch;
  assign ofs_word_rdy  = o_rdy && fetch;

  apack_bit_unpacker #(.WIN_W (WIN_W), .WORD_W (WORD_W)) u_code_up (
    .clk, .rst_n, .clear,
    .word_in (code_word), .word_v (code_word_v && fetch), .word_rdy (c_rdy),
    .win (code_win), .win_v (code_win_v), .consume (code_r)
  );

  apack_bit_unpacker #(.WIN_W (VAL_W), .WORD_W (WORD_W)) u_ofs_up (
    .clk, .rst_n, .clear,
    .word_in (ofs_word), .word_v (ofs_word_v && fetch), .word_rdy (o_rdy),
    .win (ofs_win), .win_v (ofs_win_v), .consume (ofs_r)
  );

  apack_decoder u_dec (
    .clk, .rst_n,
    .hi_in (hi_wr), .lo_in (lo_wr), .symt_in, .pcnt_in,
    .start (d_start), .step (d_step),
    .code_in (code_win), .ofs_in (ofs_win),
    .code_r (code_r), .ofs_r (ofs_r),
    .out_val (d_val), .out_valid (d_valid), .sym_err (sym_err)
  );

  assign out_val   = d_val;
  assign out_valid = d_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      left_q  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE:  if (cmd_start) begin
                   state_q <= S_INIT;
                   left_q  <= cmd_nsym;
                 end
        S_INIT:  state_q <= S_PRIME;
        S_PRIME: if (d_start) state_q <= S_RUN;
        S_RUN: begin
          if (d_step) left_q <= left_q - NSYM_W'(1);
          if (left_q == '0 || (d_step && left_q == NSYM_W'(1))) state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
