// tb_apack_bilstm_layer: one weight layer of the BiLSTM captioning model, as
// profiled in the example symbol table, through one compression engine and
// one decompression engine.
//
// NVAL weights are drawn from that table's distribution (row chosen with the
// row's share of the 10-bit counts, value uniform inside the row). The
// compression engine writes its symbol and offset words into a memory model;
// the decompression engine then reads them back at full rate. Checks:
//   - every value decodes to the original, in order, and nsym is right;
//   - the symbol stream is within 1% (plus the 2-bit flush and the last
//     word's padding) of the ideal cost sum(p_i * log2(1024 / c_i)) per value,
//     where c_i is row i's count range: the coder loses nothing measurable to
//     its 16-bit window;
//   - the offset stream is exactly the sum of the offset lengths;
//   - the decoder, fed without gaps, needs at most NVAL plus a small fixed
//     number of cycles (one value per cycle).
// It prints the compression ratio (8-bit values against both streams).
module tb_apack_bilstm_layer;
  import apack_pkg::*;
  import apack_ref_pkg::*;

  localparam int NVAL = 20000;

  logic clk = 0, rst_n = 0;
  symt_wr_t symt_in;
  pcnt_wr_t pcnt_in;
  // compression side
  val_t in_val;
  logic in_en, done;
  logic [63:0] e_code_word, e_ofs_word;
  logic e_code_word_v, e_ofs_word_v;
  logic [31:0] e_nsym;
  logic e_nsym_v, e_stream_done, e_underflow;
  // decompression side
  logic cmd_start;
  logic [31:0] cmd_nsym;
  logic [63:0] d_code_word, d_ofs_word;
  logic d_code_word_v, d_code_word_rdy, d_ofs_word_v, d_ofs_word_rdy;
  val_t out_val;
  logic out_valid, busy, stall, sym_err;

  int checks = 0, failures = 0;
  logic [63:0] cw [$];
  logic [63:0] ow [$];
  int vals [$];
  int cidx = 0, oidx = 0, n_got = 0, got_nsym = -1, n_done = 0;

  apack_enc_engine u_enc (
    .clk, .rst_n, .symt_in, .pcnt_in, .in_val, .in_en, .done,
    .code_word (e_code_word), .code_word_v (e_code_word_v),
    .ofs_word (e_ofs_word), .ofs_word_v (e_ofs_word_v),
    .nsym (e_nsym), .nsym_v (e_nsym_v), .stream_done (e_stream_done),
    .underflow_seen (e_underflow)
  );

  apack_dec_engine u_dec (
    .clk, .rst_n, .symt_in, .pcnt_in, .cmd_start, .cmd_nsym,
    .code_word (d_code_word), .code_word_v (d_code_word_v), .code_word_rdy (d_code_word_rdy),
    .ofs_word (d_ofs_word), .ofs_word_v (d_ofs_word_v), .ofs_word_rdy (d_ofs_word_rdy),
    .out_val, .out_valid, .busy, .stall, .sym_err
  );

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory model: the decoder side always has a word ready (zeros past the end)
  always_comb begin
    d_code_word = (cidx < cw.size()) ? cw[cidx] : '0;
    d_ofs_word  = (oidx < ow.size()) ? ow[oidx] : '0;
  end
  assign d_code_word_v = 1'b1;
  assign d_ofs_word_v  = 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (e_code_word_v) cw.push_back(e_code_word);
    if (e_ofs_word_v) ow.push_back(e_ofs_word);
    if (e_nsym_v) got_nsym = int'(e_nsym);
    if (e_stream_done) n_done++;
    if (d_code_word_rdy) cidx <= cidx + 1;
    if (d_ofs_word_rdy) oidx <= oidx + 1;
    if (out_valid) begin
      checks++;
      if (n_got >= vals.size() || int'(out_val) != vals[n_got] || sym_err) begin
        failures++;
        if (failures < 5) $display("value %0d: got %0d", n_got, out_val);
      end
      n_got++;
    end
  end

  initial begin
    int v, ofs_bits, t0, t1;
    real ideal, c;
    symt_in = '0; pcnt_in = '0; in_val = '0; in_en = 0; done = 0;
    cmd_start = 0; cmd_nsym = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NROW; i++) begin
      symt_in = symt_word(i);
      pcnt_in = pcnt_word(i);
      @(negedge clk);
    end
    symt_in = '0; pcnt_in = '0;

    // compress
    ofs_bits = 0;
    for (int i = 0; i < NVAL; i++) begin
      v = draw_value();
      vals.push_back(v);
      ofs_bits += ol_t(0, row_of(v));
      in_val = val_t'(v);
      in_en = 1;
      @(negedge clk);
    end
    in_en = 0;
    done = 1;
    @(negedge clk);
    done = 0;
    repeat (8) @(negedge clk);
    checks++;
    if (got_nsym != NVAL || n_done != 1) begin failures++; $display("nsym %0d, stream_done %0d", got_nsym, n_done); end

    // size against the ideal cost of the table's distribution
    ideal = 0.0;
    for (int i = 0; i < NROW; i++) begin
      c = real'(high_t(0, i) - low_cnt(i));
      if (c > 0.0) ideal += (c / real'(high_t(0, NROW - 1))) * ($ln(1024.0 / c) / $ln(2.0));
    end
    ideal *= real'(NVAL);
    checks++;
    if (real'(cw.size() * 64) > ideal * 1.01 + 66.0 || real'(cw.size() * 64) < ideal * 0.99) begin
      failures++;
      $display("symbol stream %0d bits, ideal %0.1f", cw.size() * 64, ideal);
    end
    checks++;
    if (ow.size() != (ofs_bits + 63) / 64) begin failures++; $display("offset words %0d for %0d bits", ow.size(), ofs_bits); end

    // decompress
    cmd_nsym = NVAL;
    cmd_start = 1;
    @(negedge clk);
    cmd_start = 0;
    t0 = int'($time);
    wait (n_got == NVAL);
    t1 = int'($time);
    repeat (4) @(negedge clk);
    checks++;
    if (n_got != NVAL) failures++;
    checks++;
    if ((t1 - t0) / 10 > NVAL + 16) begin failures++; $display("decode took %0d cycles", (t1 - t0) / 10); end
    $display("values %0d: symbol stream %0d bits (ideal %0.0f), offset stream %0d bits, ratio %0.3f",
             NVAL, cw.size() * 64, ideal, ofs_bits, real'(8 * NVAL) / real'(64 * (cw.size() + ow.size())));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
