// tb_apack_enc_pcnt: checks the encoder's count table and range scaling.
// With the example table loaded, for random ranges HI > LO and every row the
// block must return sHI = floor((HI-LO+1) * HiCnt[row] / 1024) and
// sLO = floor((HI-LO+1) * HiCnt[row-1] / 1024), computed here in integers.
module tb_apack_enc_pcnt;
  import apack_pkg::*;
  import apack_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  pcnt_wr_t pcnt_in;
  onehot_t symi;
  win_t hi, lo, s_hi, s_lo;
  int checks = 0, failures = 0;

  apack_enc_pcnt dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned rng, eh, el;
    pcnt_in = '0; symi = '0; hi = '1; lo = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NROW; i++) begin
      pcnt_in = pcnt_word(i);
      @(negedge clk);
    end
    pcnt_in = '0;
    for (int t = 0; t < 3000; t++) begin
      int r = $urandom_range(0, NROW - 1);
      int unsigned a = $urandom_range(0, 'hFFFF), b = $urandom_range(0, 'hFFFF);
      if (t == 0) begin a = 'hFFFF; b = 0; end
      if (a < b) begin int unsigned x = a; a = b; b = x; end
      hi = win_t'(a); lo = win_t'(b); symi = onehot_t'(1 << r);
      #1;
      rng = longint'(a) - longint'(b) + 1;
      eh = (rng * longint'(HIGH[r])) >> 10;
      el = (rng * longint'(low_cnt(r))) >> 10;
      checks++;
      if (longint'(s_hi) != eh || longint'(s_lo) != el) begin
        failures++;
        if (failures < 5) $display("row %0d hi %h lo %h: got %h %h expected %h %h", r, a, b, s_hi, s_lo, eh, el);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
