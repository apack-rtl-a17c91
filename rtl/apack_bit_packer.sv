// apack_bit_packer: packs variable-length groups of bits into fixed-width
// memory words, most significant bit first.
//
// APack writes each tensor as two sequential bit streams (coded symbols and
// raw offsets). The coder produces a variable number of bits per value; this
// block concatenates them and hands out full WORD_W-bit words, so that memory
// sees plain sequential wide writes. The paper states the goal (regular,
// DRAM-friendly sequential accesses) but not the circuit; this is the simplest
// packer that does it.
//
// Interface: in_bits holds in_cnt valid bits at its top (MSb first), taken when
// in_v. flush pads the bits collected so far (including this cycle's) with
// zeros to a whole word and emits it; flush_done pulses when that is complete.
// At most one word leaves per cycle (word, word_v, registered); if a flush
// needs two words the second follows a cycle later. IN_W must not exceed
// WORD_W. There is no back-pressure: the memory side must take every word.
module apack_bit_packer #(
  parameter int unsigned IN_W   = 48,
  parameter int unsigned WORD_W = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [IN_W-1:0]            in_bits,
  input  logic [$clog2(IN_W+1)-1:0]  in_cnt,
  input  logic                       in_v,
  input  logic                       flush,
  output logic [WORD_W-1:0]          word,
  output logic                       word_v,
  output logic                       flush_done
);
  localparam int unsigned BUF_W  = 2 * WORD_W;
  localparam int unsigned FILL_W = $clog2(BUF_W + 1);

  logic [BUF_W-1:0]  buf_q, c_buf, n_buf, placed;
  logic [FILL_W-1:0] fill_q, c_fill, n_fill;
  logic              pend_q, n_pend, emit, n_done;
  logic [IN_W-1:0]   masked;

  always_comb begin
    // keep only the in_cnt valid bits, then place them after the fill level
    masked = (32'(in_cnt) >= IN_W) ? in_bits
           : in_bits & ~(IN_W'({IN_W{1'b1}}) >> in_cnt);
    placed = {masked, {(BUF_W-IN_W){1'b0}}} >> fill_q;
    c_buf  = in_v ? (buf_q | placed) : buf_q;
    c_fill = in_v ? fill_q + FILL_W'(in_cnt) : fill_q;
    emit   = 1'b0;
    n_buf  = c_buf;
    n_fill = c_fill;
    n_pend = 1'b0;
    n_done = 1'b0;
    if (c_fill >= FILL_W'(WORD_W)) begin
      emit   = 1'b1;
      n_buf  = c_buf << WORD_W;
      n_fill = c_fill - FILL_W'(WORD_W);
      n_pend = pend_q | flush;
    end else if (pend_q | flush) begin
      emit   = (c_fill != '0);
      n_buf  = '0;
      n_fill = '0;
      n_done = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q      <= '0;
      fill_q     <= '0;
      pend_q     <= 1'b0;
      word       <= '0;
      word_v     <= 1'b0;
      flush_done <= 1'b0;
    end else begin
      buf_q      <= n_buf;
      fill_q     <= n_fill;
      pend_q     <= n_pend;
      word_v     <= emit;
      flush_done <= n_done;
      if (emit) word <= c_buf[BUF_W-1 -: WORD_W];
    end
  end

  a_in_cnt_range: assert property (@(posedge clk) disable iff (!rst_n) in_v |-> 32'(in_cnt) <= IN_W);
endmodule
