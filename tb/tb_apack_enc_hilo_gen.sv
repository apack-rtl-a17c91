// tb_apack_enc_hilo_gen: checks the encoder's single-step range update
// against the bit-serial renormalisation loop.
// Random coder states (LO, a symbol's scaled bounds sHI > sLO, pending UBC)
// are applied; the emitted bit string (MSb of CODE_out, OUT_u inverted copies,
// remaining CODE_c - 1 bits), nHI, nLO and the new UBC must match the loop.
module tb_apack_enc_hilo_gen;
  import apack_pkg::*;
  import apack_ref_pkg::*;

  win_t lo, s_hi, s_lo, n_hi, n_lo, code_out;
  logic [UBC_W-1:0] ubc, n_ubc, out_u;
  logic [3:0] code_c;
  logic code_v, out_u_v;
  int checks = 0, failures = 0;
  int n_uf_out = 0, n_uf_new = 0;

  apack_enc_hilo_gen dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int unsigned h, l, rng, sh, sl, th, tl, u, code;
      bit exp_bits [$];
      bit got [$];
      bit none [$];
      int ip;
      int r;
      exp_bits.delete();
      got.delete();
      // a normalised state: HI MSb 1, LO MSb 0, not in the 10 / 01 trap
      do begin
        h = $urandom_range('h8000, 'hFFFF);
        l = $urandom_range(0, 'h7FFF);
      end while ((l & 'h4000) != 0 && (h & 'h4000) == 0);
      if (t % 3 == 0) begin h = 'h8000 | $urandom_range(0, 'h3FFF) | 'h0000; l = 'h4000 | $urandom_range(0, 'h3FFF); h = h & 'hBFFF; h = h | 'h8000; if (h <= l) h = 'hBFFF; end
      r = $urandom_range(0, NROW - 1);
      if (HIGH[r] == low_cnt(r)) r = 0;
      rng = h - l + 1;
      sh = (rng * HIGH[r]) >> 10;
      sl = (rng * low_cnt(r)) >> 10;
      if (sh <= sl) continue;
      u = $urandom_range(0, 8);
      lo = win_t'(l); s_hi = win_t'(sh); s_lo = win_t'(sl); ubc = UBC_W'(u);
      #1;
      th = (l + sh - 1) & 'hFFFF;
      tl = (l + sl) & 'hFFFF;
      code = 0; ip = 0;
      normalize(th, tl, u, code, exp_bits, none, ip);
      if (code_v) begin
        got.push_back(code_out[15]);
        if (out_u_v) begin
          n_uf_out++;
          for (int j = 0; j < out_u; j++) got.push_back(~code_out[15]);
        end
        for (int j = 1; j < code_c; j++) got.push_back(code_out[15-j]);
      end
      if (n_ubc > ubc && !code_v) n_uf_new++;
      checks++;
      if (got != exp_bits || n_hi != win_t'(th) || n_lo != win_t'(tl) || int'(n_ubc) != u) begin
        failures++;
        if (failures < 5) $display("lo %h sHI %h sLO %h ubc %0d: nhi %h/%h nlo %h/%h ubc %0d/%0d bits %0d/%0d",
          l, sh, sl, ubc, n_hi, th, n_lo, tl, n_ubc, u, got.size(), exp_bits.size());
      end
      #1;
    end
    checks++;
    if (n_uf_out == 0 || n_uf_new == 0) begin failures++; $display("underflow cases not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
