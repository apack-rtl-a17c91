// tb_apack_encoder: checks the single-step encoder against the bit-serial
// reference encoder.
//
// Loads the example BiLSTM weight table, codes NVAL values drawn from the
// table's distribution one per cycle, flushes, and rebuilds the symbol stream
// from the encoder's outputs (MSb of code_out, out_u inverted copies, the
// other code bits) and the offset stream from ofs_out/ofs_r. Both streams must
// equal the reference streams bit for bit. It also checks the rate: every
// cycle with in_en yields exactly one out_valid one cycle later.
module tb_apack_encoder;
  import apack_pkg::*;
  import apack_ref_pkg::*;

  localparam int NVAL = 4000;

  logic clk = 0, rst_n = 0;
  range_wr_t hi_in, lo_in;
  symt_wr_t symt_in;
  pcnt_wr_t pcnt_in;
  val_t in_val;
  logic in_en, done;
  logic out_valid, code_v, out_u_v;
  val_t ofs_out;
  logic [3:0] ofs_r, code_c;
  win_t code_out;
  logic [UBC_W-1:0] out_u;

  int checks = 0, failures = 0;
  bit got_code [$];
  bit got_ofs [$];
  int n_out = 0, n_in = 0, n_uf = 0;
  logic en_q;

  apack_encoder dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collect outputs
  always @(posedge clk) begin
    en_q <= in_en | done;
    if (rst_n) begin
      if (out_valid !== en_q) begin
        failures++;
        $display("out_valid timing mismatch");
      end
      if (out_valid) begin
        n_out++;
        if (code_v) begin
          got_code.push_back(code_out[15]);
          if (out_u_v) begin
            n_uf++;
            for (int j = 0; j < out_u; j++) got_code.push_back(~code_out[15]);
          end
          for (int j = 1; j < code_c; j++) got_code.push_back(code_out[15-j]);
        end
        for (int j = int'(ofs_r) - 1; j >= 0; j--) got_ofs.push_back(ofs_out[j]);
      end
    end
  end

  initial begin
    static ref_encoder re = new;
    int v;
    hi_in = '0; lo_in = '0; symt_in = '0; pcnt_in = '0;
    in_val = '0; in_en = 0; done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NROW; i++) begin
      symt_in = symt_word(i);
      pcnt_in = pcnt_word(i);
      @(negedge clk);
    end
    symt_in = '0; pcnt_in = '0;
    hi_in = '{en: 1'b1, val: 16'hFFFF};
    lo_in = '{en: 1'b1, val: 16'h0000};
    @(negedge clk);
    hi_in = '0; lo_in = '0;
    for (int i = 0; i < NVAL; i++) begin
      v = draw_value();
      re.encode(v);
      in_val = val_t'(v);
      in_en = 1;
      n_in++;
      @(negedge clk);
    end
    in_en = 0;
    done = 1;
    re.flush();
    @(negedge clk);
    done = 0;
    repeat (3) @(negedge clk);

    checks++;
    if (n_out != n_in + 1) begin failures++; $display("outputs %0d for %0d inputs", n_out, n_in); end
    checks++;
    if (got_code.size() != re.code_bits.size()) begin
      failures++;
      $display("code stream length %0d, expected %0d", got_code.size(), re.code_bits.size());
    end
    for (int i = 0; i < re.code_bits.size() && i < got_code.size(); i++) begin
      checks++;
      if (got_code[i] != re.code_bits[i]) begin
        failures++;
        if (failures < 5) $display("code bit %0d differs", i);
      end
    end
    checks++;
    if (got_ofs.size() != re.ofs_bits.size()) begin failures++; $display("offset stream length differs"); end
    for (int i = 0; i < re.ofs_bits.size() && i < got_ofs.size(); i++) begin
      checks++;
      if (got_ofs[i] != re.ofs_bits[i]) failures++;
    end
    checks++;
    if (n_uf == 0) begin failures++; $display("no underflow bits were emitted"); end
    $display("code bits %0d, offset bits %0d, underflow emits %0d, max pending %0d",
             got_code.size(), got_ofs.size(), n_uf, re.max_ubc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
