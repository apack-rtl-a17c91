// tb_apack_top: end-to-end test of the APack layer at its default size
// (32 compression and 32 decompression engines, 64-bit memory words).
//
// One complete operation: the two test tables are loaded (even engines get the
// weight-like table, odd engines the activation-like one, through the
// per-engine table select), all 32 compression engines code their own stream
// of NVAL values concurrently, and the words they write are kept in a memory
// model. Then all 32 decompression engines read those streams back
// concurrently; every fourth one is served by a slow memory port. Checks:
//   - every word written equals the reference encoder's packed streams;
//   - every decoded value equals the original, in order;
//   - the value counts (nsym) and end-of-stream signals are right;
//   - unthrottled decoders deliver one value per cycle apart from stalls.
// Mechanisms counted (each must occur): pending underflow bits emitted,
// decoder stalls on a starved window, values with no offset bits (single-value
// rows), streams flushed, engines with each of the two tables.
module tb_apack_top;
  import apack_pkg::*;
  import apack_ref_pkg::*;

  localparam int N = 32;
  localparam int NVAL = 600;

  logic clk = 0, rst_n = 0;
  symt_wr_t symt_in;
  pcnt_wr_t pcnt_in;
  logic [N-1:0] enc_tbl_sel, dec_tbl_sel;
  val_t enc_val [N];
  logic [N-1:0] enc_en, enc_done;
  logic [63:0] enc_code_word [N], enc_ofs_word [N];
  logic [N-1:0] enc_code_word_v, enc_ofs_word_v;
  logic [31:0] enc_nsym [N];
  logic [N-1:0] enc_nsym_v, enc_stream_done, enc_underflow;
  logic [N-1:0] dec_start;
  logic [31:0] dec_nsym [N];
  logic [63:0] dec_code_word [N], dec_ofs_word [N];
  logic [N-1:0] dec_code_word_v, dec_code_word_rdy, dec_ofs_word_v, dec_ofs_word_rdy;
  val_t dec_val [N];
  logic [N-1:0] dec_val_v, dec_busy, dec_stall, dec_sym_err;

  apack_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int vals [N][$];
  logic [63:0] mem_code [N][$];
  logic [63:0] mem_ofs [N][$];
  int nsym_got [N];
  int n_done = 0, n_uf = 0, n_stall = 0, n_noofs = 0;
  int cidx [N], oidx [N], n_got [N], first_out [N], last_out [N], stalls [N];
  int cyc = 0;
  bit reading = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory model: write side
  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int e = 0; e < N; e++) begin
      if (enc_code_word_v[e]) mem_code[e].push_back(enc_code_word[e]);
      if (enc_ofs_word_v[e]) mem_ofs[e].push_back(enc_ofs_word[e]);
      if (enc_nsym_v[e]) nsym_got[e] = int'(enc_nsym[e]);
      if (enc_stream_done[e]) n_done++;
      if (enc_underflow[e]) n_uf++;
    end
  end

  // memory model: read side (zero words past the end of a stream)
  always_comb begin
    for (int d = 0; d < N; d++) begin
      dec_code_word[d] = (cidx[d] < mem_code[d].size()) ? mem_code[d][cidx[d]] : '0;
      dec_ofs_word[d]  = (oidx[d] < mem_ofs[d].size())  ? mem_ofs[d][oidx[d]]  : '0;
    end
  end
  always @(negedge clk) begin
    for (int d = 0; d < N; d++) begin
      dec_code_word_v[d] <= reading && ((d % 4 != 3) || ($urandom_range(0, 31) == 0));
      dec_ofs_word_v[d]  <= reading && ((d % 4 != 3) || ($urandom_range(0, 31) == 0));
    end
  end
  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < N; d++) begin
      if (dec_code_word_v[d] && dec_code_word_rdy[d]) cidx[d] <= cidx[d] + 1;
      if (dec_ofs_word_v[d] && dec_ofs_word_rdy[d]) oidx[d] <= oidx[d] + 1;
      if (dec_stall[d]) begin n_stall++; stalls[d]++; end
      if (dec_val_v[d]) begin
        checks++;
        if (int'(dec_val[d]) != vals[d][n_got[d]] || dec_sym_err[d]) begin
          failures++;
          if (failures < 5) $display("decoder %0d value %0d: %0d expected %0d", d, n_got[d], dec_val[d], vals[d][n_got[d]]);
        end
        if ((d % 2 == 1) && (dec_val[d] < 2)) n_noofs++;
        if (first_out[d] < 0) first_out[d] = cyc;
        last_out[d] = cyc;
        n_got[d]++;
      end
    end
  end

  task automatic load_table(int tid, logic [N-1:0] sel);
    enc_tbl_sel = sel;
    dec_tbl_sel = sel;
    for (int i = 0; i < NROW; i++) begin
      symt_in = symt_word(i, tid);
      pcnt_in = pcnt_word(i, tid);
      @(negedge clk);
    end
    symt_in = '0; pcnt_in = '0;
    enc_tbl_sel = '0; dec_tbl_sel = '0;
  endtask

  initial begin
    ref_encoder re [N];
    logic [63:0] exp_w [$];
    logic [N-1:0] even_sel, busy_any;
    int v;
    symt_in = '0; pcnt_in = '0; enc_tbl_sel = '0; dec_tbl_sel = '0;
    enc_en = '0; enc_done = '0; dec_start = '0;
    for (int e = 0; e < N; e++) begin
      enc_val[e] = '0; dec_nsym[e] = '0;
      cidx[e] = 0; oidx[e] = 0; n_got[e] = 0; first_out[e] = -1; last_out[e] = -1; stalls[e] = 0;
      nsym_got[e] = -1;
      re[e] = new;
      re[e].tid = e % 2;
    end
    for (int e = 0; e < N; e++) even_sel[e] = (e % 2 == 0);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    load_table(0, even_sel);
    load_table(1, ~even_sel);

    // compression: all engines in parallel, one value per cycle each
    for (int i = 0; i < NVAL; i++) begin
      for (int e = 0; e < N; e++) begin
        v = draw_value(e % 2);
        vals[e].push_back(v);
        re[e].encode(v);
        enc_val[e] = val_t'(v);
      end
      enc_en = '1;
      @(negedge clk);
    end
    enc_en = '0;
    enc_done = '1;
    @(negedge clk);
    enc_done = '0;
    repeat (8) @(negedge clk);
    for (int e = 0; e < N; e++) begin
      re[e].flush();
      pack_words(re[e].code_bits, exp_w);
      checks++;
      if (exp_w != mem_code[e]) begin failures++; $display("encoder %0d symbol stream differs", e); end
      pack_words(re[e].ofs_bits, exp_w);
      checks++;
      if (exp_w != mem_ofs[e]) begin failures++; $display("encoder %0d offset stream differs", e); end
      checks++;
      if (nsym_got[e] != NVAL) begin failures++; $display("encoder %0d nsym %0d", e, nsym_got[e]); end
    end

    // decompression: all engines in parallel
    reading = 1;
    for (int d = 0; d < N; d++) dec_nsym[d] = 32'(nsym_got[d]);
    dec_start = '1;
    @(negedge clk);
    dec_start = '0;
    do begin
      @(negedge clk);
      busy_any = dec_busy;
    end while (busy_any != '0);
    repeat (4) @(negedge clk);
    for (int d = 0; d < N; d++) begin
      checks++;
      if (n_got[d] != NVAL) begin failures++; $display("decoder %0d gave %0d values", d, n_got[d]); end
      if (d % 4 != 3) begin
        checks++;
        if (last_out[d] - first_out[d] + 1 > NVAL + stalls[d]) begin
          failures++;
          $display("decoder %0d: %0d cycles for %0d values", d, last_out[d] - first_out[d] + 1, NVAL);
        end
      end
    end

    $display("mechanisms: streams flushed %0d, underflow emissions %0d, decoder stall cycles %0d, values without offset bits %0d",
             n_done, n_uf, n_stall, n_noofs);
    checks++; if (n_done != N) begin failures++; $display("flush count wrong"); end
    checks++; if (n_uf == 0)   begin failures++; $display("underflow never happened"); end
    checks++; if (n_stall == 0) begin failures++; $display("stall never happened"); end
    checks++; if (n_noofs == 0) begin failures++; $display("no zero-offset value"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
