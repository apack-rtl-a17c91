// tb_apack_enc_symbol_lookup: checks the encoder's symbol lookup.
// First, with the reset (uniform) table, then with the example BiLSTM weight
// table loaded, every value 0..255 must select the row whose range holds it
// (one-hot), give that row's offset length and the offset value - v_min.
module tb_apack_enc_symbol_lookup;
  import apack_pkg::*;
  import apack_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  symt_wr_t symt_in;
  val_t in_val;
  onehot_t symi;
  val_t ofs_out;
  logic [OB_W-1:0] ob_out;
  int checks = 0, failures = 0;

  apack_enc_symbol_lookup dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r;
    symt_in = '0; in_val = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 256; v += 7) begin
      in_val = val_t'(v);
      #1;
      checks++;
      if (symi != onehot_t'(1 << (v / 16)) || ob_out != 3'd4 || ofs_out != val_t'(v % 16)) failures++;
    end
    @(negedge clk);
    for (int i = 0; i < NROW; i++) begin
      symt_in = symt_word(i);
      @(negedge clk);
    end
    symt_in = '0;
    for (int v = 0; v < 256; v++) begin
      in_val = val_t'(v);
      #1;
      r = row_of(v);
      checks++;
      if (symi != onehot_t'(1 << r) || int'(ob_out) != OL[r] || int'(ofs_out) != v - VMIN[r]) begin
        failures++;
        if (failures < 5) $display("v=%0d symi=%h ob=%0d ofs=%0d", v, symi, ob_out, ofs_out);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
