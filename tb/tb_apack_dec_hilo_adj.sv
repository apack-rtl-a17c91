// tb_apack_dec_hilo_adj: checks the decoder's single-step range and CODE
// update against the bit-serial loop.
// Random normalised states, a random non-empty row and a code window inside
// that row's interval are applied with random look-ahead bits on CODE_in. nHI,
// nLO, the new CODE window and CODE_r (bits pulled in) must equal the loop's.
module tb_apack_dec_hilo_adj;
  import apack_pkg::*;
  import apack_ref_pkg::*;

  win_t lo, adj_hi, adj_lo, code_q, code_in, n_hi, n_lo, n_code;
  logic [4:0] code_r;
  int checks = 0, failures = 0, n_und = 0;

  apack_dec_hilo_adj dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int unsigned h, l, rng, sh, sl, th, tl, c, u, ci;
      bit ibits [$];
      bit obits [$];
      int ip, r;
      ibits.delete();
      obits.delete();
      do begin
        h = $urandom_range('h8000, 'hFFFF);
        l = $urandom_range(0, 'h7FFF);
      end while ((l & 'h4000) != 0 && (h & 'h4000) == 0);
      do r = $urandom_range(0, NROW - 1); while (HIGH[r] == low_cnt(r));
      rng = h - l + 1;
      sh = (rng * HIGH[r]) >> 10;
      sl = (rng * low_cnt(r)) >> 10;
      c  = l + $urandom_range(sl, sh - 1);
      ci = $urandom_range(0, 'hFFFF);
      for (int j = 15; j >= 0; j--) ibits.push_back(bit'((ci >> j) & 1));
      lo = win_t'(l); adj_hi = win_t'(sh); adj_lo = win_t'(sl);
      code_q = win_t'(c); code_in = win_t'(ci);
      #1;
      th = (l + sh - 1) & 'hFFFF;
      tl = (l + sl) & 'hFFFF;
      u = 0; ip = 0;
      normalize(th, tl, u, c, obits, ibits, ip);
      if (u != 0) n_und++;
      checks++;
      if (n_hi != win_t'(th) || n_lo != win_t'(tl) || n_code != win_t'(c) || int'(code_r) != ip) begin
        failures++;
        if (failures < 5) $display("hi %h lo %h: nhi %h/%h nlo %h/%h code %h/%h r %0d/%0d", h, l, n_hi, th, n_lo, tl, n_code, c, code_r, ip);
      end
      #1;
    end
    checks++;
    if (n_und == 0) begin failures++; $display("no underflow case reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
