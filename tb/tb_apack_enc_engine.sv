// tb_apack_enc_engine: checks a compression engine end to end at the memory
// side. Two streams are coded back to back (the first with the example weight
// table, the second after loading the activation-like table); for each the
// 64-bit symbol-stream and offset-stream words must equal the reference
// encoder's streams packed MSb first and zero-padded, nsym must give the value
// count, and stream_done must follow. Values enter one per cycle without gaps.
module tb_apack_enc_engine;
  import apack_pkg::*;
  import apack_ref_pkg::*;

  localparam int NVAL = 3000;

  logic clk = 0, rst_n = 0;
  symt_wr_t symt_in;
  pcnt_wr_t pcnt_in;
  val_t in_val;
  logic in_en, done;
  logic [63:0] code_word, ofs_word;
  logic code_word_v, ofs_word_v;
  logic [31:0] nsym;
  logic nsym_v, stream_done, underflow_seen;

  int checks = 0, failures = 0, n_done = 0, n_uf = 0;
  logic [63:0] got_code [$];
  logic [63:0] got_ofs [$];
  int got_nsym = -1;

  apack_enc_engine dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (code_word_v) got_code.push_back(code_word);
    if (ofs_word_v) got_ofs.push_back(ofs_word);
    if (nsym_v) got_nsym = int'(nsym);
    if (stream_done) n_done++;
    if (underflow_seen) n_uf++;
  end

  task automatic one_stream(int tid);
    ref_encoder re = new;
    logic [63:0] exp_code [$];
    logic [63:0] exp_ofs [$];
    int v;
    re.tid = tid;
    for (int i = 0; i < NROW; i++) begin
      symt_in = symt_word(i, tid);
      pcnt_in = pcnt_word(i, tid);
      @(negedge clk);
    end
    symt_in = '0; pcnt_in = '0;
    got_code.delete(); got_ofs.delete(); got_nsym = -1; n_done = 0;
    for (int i = 0; i < NVAL; i++) begin
      v = draw_value(tid);
      re.encode(v);
      in_val = val_t'(v);
      in_en = 1;
      @(negedge clk);
    end
    in_en = 0;
    done = 1;
    re.flush();
    @(negedge clk);
    done = 0;
    repeat (8) @(negedge clk);
    pack_words(re.code_bits, exp_code);
    pack_words(re.ofs_bits, exp_ofs);
    checks++;
    if (got_code.size() != exp_code.size()) begin failures++; $display("code words %0d, expected %0d", got_code.size(), exp_code.size()); end
    foreach (exp_code[i]) begin
      checks++;
      if (i >= got_code.size() || got_code[i] != exp_code[i]) failures++;
    end
    checks++;
    if (got_ofs.size() != exp_ofs.size()) begin failures++; $display("offset words %0d, expected %0d", got_ofs.size(), exp_ofs.size()); end
    foreach (exp_ofs[i]) begin
      checks++;
      if (i >= got_ofs.size() || got_ofs[i] != exp_ofs[i]) failures++;
    end
    checks++;
    if (got_nsym != NVAL) begin failures++; $display("nsym %0d", got_nsym); end
    checks++;
    if (n_done != 1) begin failures++; $display("stream_done seen %0d times", n_done); end
    $display("table %0d: %0d values -> %0d code + %0d offset words", tid, NVAL, exp_code.size(), exp_ofs.size());
  endtask

  initial begin
    symt_in = '0; pcnt_in = '0; in_val = '0; in_en = 0; done = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    one_stream(0);
    one_stream(1);
    checks++;
    if (n_uf == 0) begin failures++; $display("no underflow emission seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
