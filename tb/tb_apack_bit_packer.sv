// tb_apack_bit_packer: checks that bit groups of random length (0..IN_W) are
// concatenated MSb first into 64-bit words with nothing lost or reordered, that
// a flush pads the tail with zeros and raises flush_done, and that a flush that
// completes two words at once emits both.
module tb_apack_bit_packer;
  localparam int IN_W = 48, WORD_W = 64;

  logic clk = 0, rst_n = 0;
  logic [IN_W-1:0] in_bits;
  logic [5:0] in_cnt;
  logic in_v, flush;
  logic [WORD_W-1:0] word;
  logic word_v, flush_done;
  int checks = 0, failures = 0, n_fd = 0, n_words = 0;
  bit sent [$];
  bit got [$];

  apack_bit_packer #(.IN_W (IN_W), .WORD_W (WORD_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (word_v) begin
      n_words++;
      for (int j = WORD_W - 1; j >= 0; j--) got.push_back(word[j]);
    end
    if (flush_done) n_fd++;
  end

  task automatic run_stream(int n, int maxlen, bit last_big);
    int len;
    for (int i = 0; i < n; i++) begin
      len = $urandom_range(0, maxlen);
      if (last_big && i == n - 1) len = IN_W;
      in_bits = {$urandom, $urandom};
      in_cnt = 6'(len);
      in_v = (len != 0) || ($urandom_range(0, 1) == 1);
      if (in_v) for (int j = 0; j < len; j++) sent.push_back(in_bits[IN_W-1-j]);
      flush = last_big && (i == n - 1);
      @(negedge clk);
    end
    in_v = 0;
    if (!last_big) begin
      flush = 1;
      @(negedge clk);
    end
    flush = 0;
    repeat (4) @(negedge clk);
    while (sent.size() % WORD_W != 0) sent.push_back(1'b0);
  endtask

  initial begin
    in_bits = '0; in_cnt = '0; in_v = 0; flush = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_stream(2000, IN_W, 0);
    // a stream whose last group is flushed in the same cycle (two words out)
    run_stream(37, 30, 1);
    checks++;
    if (got.size() != sent.size()) begin failures++; $display("got %0d bits, sent %0d", got.size(), sent.size()); end
    for (int i = 0; i < sent.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != sent[i]) failures++;
    end
    checks++;
    if (n_fd != 2) begin failures++; $display("flush_done seen %0d times", n_fd); end
    $display("words %0d", n_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
