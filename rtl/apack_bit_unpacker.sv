// apack_bit_unpacker: turns a stream of fixed-width memory words back into a
// sliding window of stream bits for the APack decoder.
//
// The decoder reads a variable number of bits per value from each of its two
// streams and reports how many (CODE_r / OFS_r) to "whichever unit supplies
// them". This block is that supplier: it keeps up to 2*WORD_W buffered stream
// bits, MSb first, shows the next WIN_W of them on win, and drops the first
// consume bits every cycle. It takes a new word whenever at most WORD_W bits
// remain. The paper gives only the function; the buffer organisation is this
// design's own.
//
// Interface: win and win_v (at least WIN_W bits buffered) are registered-state
// outputs; consume (<= WIN_W) must only be non-zero while win_v. word_in is
// taken when word_v && word_rdy. clear empties the buffer (start of a stream).
module apack_bit_unpacker #(
  parameter int unsigned WIN_W  = 16,
  parameter int unsigned WORD_W = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic [WORD_W-1:0]           word_in,
  input  logic                        word_v,
  output logic                        word_rdy,
  output logic [WIN_W-1:0]            win,
  output logic                        win_v,
  input  logic [$clog2(WIN_W+1)-1:0]  consume
);
  localparam int unsigned BUF_W  = 2 * WORD_W;
  localparam int unsigned FILL_W = $clog2(BUF_W + 1);

  logic [BUF_W-1:0]  buf_q, s_buf;
  logic [FILL_W-1:0] fill_q, s_fill;
  logic              take;

  assign win      = buf_q[BUF_W-1 -: WIN_W];
  assign win_v    = (fill_q >= FILL_W'(WIN_W));
  assign word_rdy = (fill_q <= FILL_W'(WORD_W)) && !clear;
  assign take     = word_v && word_rdy;

  always_comb begin
    s_buf  = buf_q << consume;
    s_fill = fill_q - FILL_W'(consume);
    if (take) begin
      s_buf  = s_buf | ({word_in, {(BUF_W-WORD_W){1'b0}}} >> s_fill);
      s_fill = s_fill + FILL_W'(WORD_W);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q  <= '0;
      fill_q <= '0;
    end else if (clear) begin
      buf_q  <= '0;
      fill_q <= '0;
    end else begin
      buf_q  <= s_buf;
      fill_q <= s_fill;
    end
  end

  a_consume_ok: assert property (@(posedge clk) disable iff (!rst_n)
    (consume != '0) |-> (win_v && 32'(consume) <= WIN_W));
endmodule
