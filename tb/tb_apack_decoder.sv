// tb_apack_decoder: checks the single-step decoder on streams made by the
// bit-serial reference encoder.
//
// The testbench plays the stream supplier: it shows the 16 symbol-stream bits
// and the 8 offset-stream bits that follow the decoder's registers (zeros past
// the end) and advances by code_r / ofs_r every cycle. After one start cycle
// it steps every cycle and checks every decoded value, that out_valid follows
// each step by exactly one cycle, that the consumed bit counts add up to the
// stream lengths, and that each step consumes what the reference decoder
// consumes.
module tb_apack_decoder;
  import apack_pkg::*;
  import apack_ref_pkg::*;

  localparam int NVAL = 4000;

  logic clk = 0, rst_n = 0;
  range_wr_t hi_in, lo_in;
  symt_wr_t symt_in;
  pcnt_wr_t pcnt_in;
  logic start, step;
  win_t code_in;
  val_t ofs_in;
  logic [4:0] code_r;
  logic [3:0] ofs_r;
  val_t out_val;
  logic out_valid, sym_err;

  int checks = 0, failures = 0;
  int vals [$];
  int cpos = 0, opos = 0;
  int n_got = 0;
  logic step_q = 0;
  ref_encoder re;

  apack_decoder dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit cbit(int p);
    return (p < re.code_bits.size()) ? re.code_bits[p] : 1'b0;
  endfunction
  function automatic bit obit(int p);
    return (p < re.ofs_bits.size()) ? re.ofs_bits[p] : 1'b0;
  endfunction

  always_comb begin
    for (int j = 0; j < 16; j++) code_in[15-j] = (re == null) ? 1'b0 : cbit(cpos + j);
    for (int j = 0; j < 8; j++)  ofs_in[7-j]  = (re == null) ? 1'b0 : obit(opos + j);
  end

  always @(posedge clk) begin
    if (rst_n) begin
      cpos <= cpos + int'(code_r);
      opos <= opos + int'(ofs_r);
      step_q <= step;
      if (out_valid !== step_q) begin
        failures++;
        $display("out_valid timing mismatch");
      end
      if (out_valid) begin
        checks++;
        if (int'(out_val) != vals[n_got] || sym_err) begin
          failures++;
          if (failures < 5) $display("value %0d: got %0d expected %0d", n_got, out_val, vals[n_got]);
        end
        n_got++;
      end
    end
  end

  initial begin
    int v;
    re = new;
    hi_in = '0; lo_in = '0; symt_in = '0; pcnt_in = '0;
    start = 0; step = 0;
    for (int i = 0; i < NVAL; i++) begin
      v = draw_value();
      vals.push_back(v);
      re.encode(v);
    end
    re.flush();
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
    start = 1;
    #1;
    checks++;
    if (code_r != 5'd16 || ofs_r != 4'd8) begin failures++; $display("start must take 16 + 8 bits"); end
    @(negedge clk);
    start = 0;
    for (int i = 0; i < NVAL; i++) begin
      step = 1;
      @(negedge clk);
    end
    step = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_got != NVAL) begin failures++; $display("decoded %0d of %0d", n_got, NVAL); end
    // the decoder has read exactly the offset stream, and the symbol stream up
    // to at most 16 bits of look-ahead past its end plus its 16-bit register
    checks++;
    if (opos != re.ofs_bits.size() + 8) begin failures++; $display("offset bits used %0d of %0d", opos - 8, re.ofs_bits.size()); end
    checks++;
    if (cpos < re.code_bits.size() || cpos > re.code_bits.size() + 16) begin
      failures++;
      $display("code bits used %0d, stream %0d", cpos, re.code_bits.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
