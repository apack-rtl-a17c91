// tb_apack_dec_engine: checks a decompression engine end to end.
// Streams coded by the reference encoder are packed into 64-bit words and
// served from a memory model that answers ready/valid, for the first stream only about once every 48 cycles (and
// zero words past the end). Two streams are decoded, one per table. Every
// value must come out in order, the engine must stall at least once, return
// to idle after exactly nsym values, and, with gaps turned off for the second
// stream's table, deliver one value per cycle apart from stall cycles.
module tb_apack_dec_engine;
  import apack_pkg::*;
  import apack_ref_pkg::*;

  localparam int NVAL = 3000;

  logic clk = 0, rst_n = 0;
  symt_wr_t symt_in;
  pcnt_wr_t pcnt_in;
  logic cmd_start;
  logic [31:0] cmd_nsym;
  logic [63:0] code_word, ofs_word;
  logic code_word_v, code_word_rdy, ofs_word_v, ofs_word_rdy;
  val_t out_val;
  logic out_valid, busy, stall, sym_err;

  int checks = 0, failures = 0;
  logic [63:0] cw [$];
  logic [63:0] ow [$];
  int cidx = 0, oidx = 0, gaps = 1;
  int vals [$];
  int n_got = 0, n_stall = 0, first_out = -1, last_out = -1, cyc = 0, stall_in_run = 0;

  apack_dec_engine dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory model
  always_comb begin
    code_word = (cidx < cw.size()) ? cw[cidx] : '0;
    ofs_word  = (oidx < ow.size()) ? ow[oidx] : '0;
  end
  always @(negedge clk) begin
    code_word_v <= (gaps == 0) || ($urandom_range(0, 47) == 0);
    ofs_word_v  <= (gaps == 0) || ($urandom_range(0, 47) == 0);
  end
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (code_word_v && code_word_rdy) cidx <= cidx + 1;
    if (ofs_word_v && ofs_word_rdy) oidx <= oidx + 1;
    if (stall) begin n_stall++; stall_in_run++; end
    if (out_valid) begin
      checks++;
      if (int'(out_val) != vals[n_got] || sym_err) begin
        failures++;
        if (failures < 5) $display("value %0d: %0d expected %0d", n_got, out_val, vals[n_got]);
      end
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
      n_got++;
    end
  end

  task automatic one_stream(int tid, int with_gaps);
    ref_encoder re = new;
    int v;
    re.tid = tid;
    vals.delete();
    for (int i = 0; i < NVAL; i++) begin
      v = draw_value(tid);
      vals.push_back(v);
      re.encode(v);
    end
    re.flush();
    pack_words(re.code_bits, cw);
    pack_words(re.ofs_bits, ow);
    cidx = 0; oidx = 0; n_got = 0; first_out = -1; stall_in_run = 0;
    gaps = with_gaps;
    for (int i = 0; i < NROW; i++) begin
      symt_in = symt_word(i, tid);
      pcnt_in = pcnt_word(i, tid);
      @(negedge clk);
    end
    symt_in = '0; pcnt_in = '0;
    cmd_start = 1;
    cmd_nsym = NVAL;
    @(negedge clk);
    cmd_start = 0;
    while (busy) @(negedge clk);
    repeat (4) @(negedge clk);
    checks++;
    if (n_got != NVAL) begin failures++; $display("decoded %0d of %0d", n_got, NVAL); end
    if (!with_gaps) begin
      checks++;
      if (last_out - first_out + 1 > NVAL + stall_in_run) begin
        failures++;
        $display("rate: %0d cycles for %0d values with %0d stalls", last_out - first_out + 1, NVAL, stall_in_run);
      end
    end
    $display("table %0d: %0d values, %0d stall cycles", tid, n_got, stall_in_run);
  endtask

  initial begin
    symt_in = '0; pcnt_in = '0; cmd_start = 0; cmd_nsym = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    one_stream(0, 1);
    one_stream(1, 0);
    checks++;
    if (n_stall == 0) begin failures++; $display("no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
