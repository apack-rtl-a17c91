// tb_apack_dec_pcnt: checks the decoder's symbol search.
// With the example table loaded, random normalised ranges are applied and the
// code window is placed at a random point of a random non-empty row's
// interval [LO + sLO, LO + sHI - 1] (both worked out here in integers). The
// block must return that row one-hot and adjHI = sHI, adjLO = sLO. The
// interval edges are hit on purpose.
module tb_apack_dec_pcnt;
  import apack_pkg::*;
  import apack_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  pcnt_wr_t pcnt_in;
  win_t hi, lo, code, adj_hi, adj_lo;
  onehot_t symi;
  logic sym_ok;
  int checks = 0, failures = 0;

  apack_dec_pcnt dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pcnt_in = '0; hi = '1; lo = '0; code = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NROW; i++) begin
      pcnt_in = pcnt_word(i);
      @(negedge clk);
    end
    pcnt_in = '0;
    for (int t = 0; t < 4000; t++) begin
      int unsigned h, l, rng, sh, sl, c;
      int r;
      do begin
        h = $urandom_range('h8000, 'hFFFF);
        l = $urandom_range(0, 'h7FFF);
      end while ((l & 'h4000) != 0 && (h & 'h4000) == 0);
      do r = $urandom_range(0, NROW - 1); while (HIGH[r] == low_cnt(r));
      rng = h - l + 1;
      sh = (rng * HIGH[r]) >> 10;
      sl = (rng * low_cnt(r)) >> 10;
      case (t % 4)
        0: c = l + sl;
        1: c = l + sh - 1;
        default: c = l + $urandom_range(sl, sh - 1);
      endcase
      hi = win_t'(h); lo = win_t'(l); code = win_t'(c);
      #1;
      checks++;
      if (symi != onehot_t'(1 << r) || adj_hi != win_t'(sh) || adj_lo != win_t'(sl) || !sym_ok) begin
        failures++;
        if (failures < 5) $display("row %0d: symi %h adj %h %h expected %h %h", r, symi, adj_hi, adj_lo, sh, sl);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
