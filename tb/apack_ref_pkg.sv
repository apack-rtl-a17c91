// apack_ref_pkg: reference models and test data for the APack testbenches.
//
// The models are written the way a software arithmetic coder is usually
// written: one bit per loop iteration, with explicit pending-underflow
// handling, and no shared code with the RTL's single-step shifters. They define
// the expected streams and values against which the RTL is checked.
//
// Test tables: the example symbol / count table of a BiLSTM weight layer (16
// rows, v_min, offset length and inclusive upper count per row).
package apack_ref_pkg;

  localparam int NROW = 16;
  localparam int VMIN [NROW] = '{'h00, 'h04, 'h08, 'h10, 'h40, 'h50, 'h60, 'h70,
                                 'h80, 'h90, 'hA0, 'hB0, 'hC0, 'hD0, 'hF4, 'hFC};
  localparam int OL   [NROW] = '{2, 2, 3, 6, 4, 4, 4, 4, 4, 4, 4, 4, 4, 6, 3, 2};
  localparam int HIGH [NROW] = '{'h1EB, 'h229, 'h238, 'h23A, 'h23A, 'h23A, 'h23A, 'h23A,
                                 'h23A, 'h23A, 'h23A, 'h23A, 'h23A, 'h23C, 'h276, 'h3FF};

  // Table-write words for the RTL's SYMT_in / PCNT_in ports.
  function automatic apack_pkg::symt_wr_t symt_word(int i, int tid = 0);
    apack_pkg::symt_wr_t w;
    w.en = 1'b1;
    w.idx = 4'(i);
    w.entry.base = 8'(vmin_t(tid, i));
    w.entry.ob = 3'(ol_t(tid, i));
    return w;
  endfunction

  function automatic apack_pkg::pcnt_wr_t pcnt_word(int i, int tid = 0);
    apack_pkg::pcnt_wr_t w;
    w.en = 1'b1;
    w.idx = 4'(i);
    w.cnt = 10'(high_t(tid, i));
    return w;
  endfunction

  // Second test table, shaped like post-ReLU activations: half of all values
  // are zero, so 0 and 1 get single-value rows with no offset bits.
  localparam int VMIN2 [NROW] = '{'h00, 'h01, 'h02, 'h04, 'h08, 'h10, 'h20, 'h40,
                                  'h80, 'h90, 'hA0, 'hB0, 'hC0, 'hD0, 'hE0, 'hF0};
  localparam int OL2   [NROW] = '{0, 0, 1, 2, 3, 4, 5, 6, 4, 4, 4, 4, 4, 4, 4, 4};
  localparam int HIGH2 [NROW] = '{'h200, 'h260, 'h2A0, 'h2E0, 'h320, 'h360, 'h390, 'h3B8,
                                  'h3C0, 'h3C8, 'h3D0, 'h3D8, 'h3E0, 'h3E8, 'h3F0, 'h3FF};

  function automatic int vmin_t(int tid, int i);
    return (tid == 0) ? VMIN[i] : VMIN2[i];
  endfunction
  function automatic int ol_t(int tid, int i);
    return (tid == 0) ? OL[i] : OL2[i];
  endfunction
  function automatic int high_t(int tid, int i);
    return (tid == 0) ? HIGH[i] : HIGH2[i];
  endfunction

  function automatic int low_cnt(int row, int tid = 0);
    return (row == 0) ? 0 : high_t(tid, row - 1);
  endfunction

  function automatic int row_of(int v, int tid = 0);
    int r = 0;
    for (int i = 0; i < NROW; i++) if (v >= vmin_t(tid, i)) r = i;
    return r;
  endfunction

  function automatic int vmax_of(int row, int tid = 0);
    return (row == NROW - 1) ? 255 : vmin_t(tid, row + 1) - 1;
  endfunction

  // A value drawn with the table's own row probabilities (rows with an empty
  // count range never appear), uniform inside the row's value range.
  function automatic int draw_value(int tid = 0);
    int c, r, span;
    c = $urandom_range(0, high_t(tid, NROW - 1) - 1);
    r = 0;
    for (int i = NROW - 1; i >= 0; i--) if (c < high_t(tid, i)) r = i;
    span = vmax_of(r, tid) - vmin_t(tid, r);
    return vmin_t(tid, r) + $urandom_range(0, span);
  endfunction

  // One bit-serial renormalisation of a new range (tHI, tLO): appends emitted
  // code bits (with pending underflow bits) to obits, shifts code left pulling
  // bits from ibits[ipos...], and returns the final hi/lo/ubc/code.
  function automatic void normalize(inout int unsigned hi, inout int unsigned lo,
                                    inout int unsigned ubc, inout int unsigned code,
                                    ref bit obits[$], input bit ibits[$], inout int ipos);
    forever begin
      if (((hi ^ lo) & 'h8000) == 0) begin
        obits.push_back(bit'((hi >> 15) & 1));
        while (ubc > 0) begin
          obits.push_back(bit'(~(hi >> 15) & 1));
          ubc--;
        end
      end else if ((lo & 'h4000) != 0 && (hi & 'h4000) == 0) begin
        ubc++;
        code ^= 'h4000;
        lo &= 'h3FFF;
        hi |= 'h4000;
      end else break;
      lo = (lo << 1) & 'hFFFF;
      hi = ((hi << 1) | 1) & 'hFFFF;
      code = ((code << 1) | 32'((ipos < ibits.size()) ? ibits[ipos] : 1'b0)) & 'hFFFF;
      ipos++;
    end
  endfunction

  // Packs a bit queue MSb first into 64-bit words, the last one zero-padded.
  function automatic void pack_words(input bit q[$], ref logic [63:0] w[$]);
    logic [63:0] cur = '0;
    w.delete();
    for (int i = 0; i < q.size(); i++) begin
      cur[63 - (i % 64)] = q[i];
      if (i % 64 == 63) begin
        w.push_back(cur);
        cur = '0;
      end
    end
    if (q.size() % 64 != 0) w.push_back(cur);
  endfunction

  // Bit-serial reference encoder.
  class ref_encoder;
    int tid = 0;
    int unsigned hi = 'hFFFF, lo = 0, ubc = 0;
    bit code_bits [$];
    bit ofs_bits [$];
    int max_ubc = 0;
    int underflows = 0;

    function void put(bit b);
      code_bits.push_back(b);
      while (ubc > 0) begin
        code_bits.push_back(~b);
        ubc--;
      end
    endfunction

    function void encode(int v);
      int unsigned rng, nh, nl;
      int row = row_of(v, tid);
      rng = hi - lo + 1;
      nh = lo + ((rng * high_t(tid, row)) >> 10) - 1;
      nl = lo + ((rng * low_cnt(row, tid)) >> 10);
      hi = nh & 'hFFFF;
      lo = nl & 'hFFFF;
      forever begin
        if (((hi ^ lo) & 'h8000) == 0) begin
          put(bit'((hi >> 15) & 1));
        end else if ((lo & 'h4000) != 0 && (hi & 'h4000) == 0) begin
          ubc++;
          underflows++;
          lo &= 'h3FFF;
          hi |= 'h4000;
        end else break;
        lo = (lo << 1) & 'hFFFF;
        hi = ((hi << 1) | 1) & 'hFFFF;
      end
      if (ubc > max_ubc) max_ubc = ubc;
      for (int j = ol_t(tid, row) - 1; j >= 0; j--) ofs_bits.push_back(bit'(((v - vmin_t(tid, row)) >> j) & 1));
    endfunction

    function void flush();
      bit b = bit'((lo >> 14) & 1);
      code_bits.push_back(b);
      ubc++;
      while (ubc > 0) begin
        code_bits.push_back(~b);
        ubc--;
      end
      hi = 'hFFFF;
      lo = 0;
    endfunction
  endclass

  // Bit-serial reference decoder over bit queues (zeros past the end).
  class ref_decoder;
    int tid = 0;
    int unsigned hi = 'hFFFF, lo = 0, code = 0;
    int cpos = 0, opos = 0;
    bit code_bits [$];
    bit ofs_bits [$];

    function bit next_code();
      bit b = (cpos < code_bits.size()) ? code_bits[cpos] : 1'b0;
      cpos++;
      return b;
    endfunction

    function void start();
      hi = 'hFFFF; lo = 0; code = 0; cpos = 0; opos = 0;
      for (int j = 0; j < 16; j++) code = (code << 1) | 32'(next_code());
    endfunction

    function int decode();
      int unsigned rng, sl, sh;
      int row = -1, v;
      rng = hi - lo + 1;
      for (int i = 0; i < NROW; i++) begin
        sl = (rng * low_cnt(i, tid)) >> 10;
        sh = (rng * high_t(tid, i)) >> 10;
        if (row < 0 && sh > sl && ((code - lo) & 'hFFFF) >= sl && ((code - lo) & 'hFFFF) < sh) row = i;
      end
      if (row < 0) return -1;
      sl = (rng * low_cnt(row, tid)) >> 10;
      sh = (rng * high_t(tid, row)) >> 10;
      hi = (lo + sh - 1) & 'hFFFF;
      lo = (lo + sl) & 'hFFFF;
      forever begin
        if (((hi ^ lo) & 'h8000) == 0) begin
        end else if ((lo & 'h4000) != 0 && (hi & 'h4000) == 0) begin
          code ^= 'h4000;
          lo &= 'h3FFF;
          hi |= 'h4000;
        end else break;
        lo = (lo << 1) & 'hFFFF;
        hi = ((hi << 1) | 1) & 'hFFFF;
        code = ((code << 1) | 32'(next_code())) & 'hFFFF;
      end
      v = vmin_t(tid, row);
      for (int j = ol_t(tid, row) - 1; j >= 0; j--) begin
        v += int'(ofs_bits[opos]) << j;
        opos++;
      end
      return v;
    endfunction
  endclass

endpackage
