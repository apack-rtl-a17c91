// tb_apack_dec_symbol_gen: checks value generation and offset extraction.
// With the example table loaded, for random rows and offset-register contents
// the value must be v_min + (top ob bits of OFS), the new OFS must be the
// 16-bit {OFS, OFS_in} shifted left by ob (upper byte), and OFS_r = ob.
module tb_apack_dec_symbol_gen;
  import apack_pkg::*;
  import apack_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  symt_wr_t symt_in;
  onehot_t symi;
  val_t ofs_q, ofs_in, out_val, n_ofs;
  logic [3:0] ofs_r;
  int checks = 0, failures = 0;

  apack_dec_symbol_gen dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    symt_in = '0; symi = 16'h1; ofs_q = '0; ofs_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NROW; i++) begin
      symt_in = symt_word(i);
      @(negedge clk);
    end
    symt_in = '0;
    for (int t = 0; t < 3000; t++) begin
      int r = $urandom_range(0, NROW - 1);
      int q = $urandom_range(0, 255), n = $urandom_range(0, 255);
      int ev, en;
      symi = onehot_t'(1 << r); ofs_q = val_t'(q); ofs_in = val_t'(n);
      #1;
      ev = VMIN[r] + (q >> (8 - OL[r]));
      en = ((((q << 8) | n) << OL[r]) >> 8) & 'hFF;
      checks++;
      if (int'(out_val) != ev || int'(n_ofs) != en || int'(ofs_r) != OL[r]) begin
        failures++;
        if (failures < 5) $display("row %0d: out %0d/%0d ofs %h/%h", r, out_val, ev, n_ofs, en);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
