// tb_apack_bit_unpacker: checks the decoder-side bit window.
// A random bit stream is offered as 64-bit words with random gaps in word_v;
// the consumer takes a random 0..16 bits whenever win_v. Every window shown
// must equal the stream at the consumer's position, and the consumer must
// reach the end of the stream. clear must empty the buffer.
module tb_apack_bit_unpacker;
  localparam int WIN_W = 16, WORD_W = 64, NWORDS = 400;

  logic clk = 0, rst_n = 0;
  logic clear;
  logic [WORD_W-1:0] word_in;
  logic word_v, word_rdy;
  logic [WIN_W-1:0] win;
  logic win_v;
  logic [4:0] consume;
  int checks = 0, failures = 0;
  bit stream [$];
  int wpos = 0, cpos = 0, n_starved = 0;

  apack_bit_unpacker #(.WIN_W (WIN_W), .WORD_W (WORD_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NWORDS * WORD_W; i++) stream.push_back(bit'($urandom_range(0, 1)));
    clear = 0; word_in = '0; word_v = 0; consume = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (cpos + WIN_W <= NWORDS * WORD_W) begin
      word_v = (wpos < NWORDS) && ($urandom_range(0, 3) != 0);
      for (int j = 0; j < WORD_W; j++) word_in[WORD_W-1-j] = (wpos < NWORDS) ? stream[wpos*WORD_W + j] : 1'b0;
      #1;
      if (win_v) begin
        checks++;
        for (int j = 0; j < WIN_W; j++) if (win[WIN_W-1-j] != stream[cpos + j]) begin
          failures++;
          break;
        end
        consume = 5'($urandom_range(0, WIN_W));
        if (cpos + int'(consume) + WIN_W > NWORDS * WORD_W) consume = 5'(NWORDS * WORD_W - WIN_W - cpos);
      end else begin
        consume = '0;
        n_starved++;
      end
      @(posedge clk);
      if (word_v && word_rdy) wpos++;
      cpos += int'(consume);
      @(negedge clk);
      if (cpos + int'(WIN_W) >= NWORDS * WORD_W) break;
    end
    consume = '0; word_v = 0;
    checks++;
    if (cpos + WIN_W < NWORDS * WORD_W - WIN_W) begin failures++; $display("stopped at %0d", cpos); end
    clear = 1;
    @(negedge clk);
    clear = 0;
    #1;
    checks++;
    if (win_v) begin failures++; $display("clear did not empty the buffer"); end
    $display("starved cycles %0d", n_starved);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
