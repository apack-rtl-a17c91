// tb_apack_enc_pipe: checks the pipelined, time-multiplexed encoder against
// one bit-serial reference encoder per stream.
//
// Four streams share the example BiLSTM weight table. Every cycle the driver
// issues, with high probability, a value (or, once a stream has all its values,
// its flush) for a randomly chosen stream other than the one issued in the
// previous cycle, as the issue rule requires. Outputs are sorted by out_sid,
// rebuilt into per-stream symbol and offset bit streams, and compared bit for
// bit with the references. Also checked: every issue gives exactly one output
// two cycles later carrying the same stream number, the unit accepts a value in
// back-to-back cycles, and underflow bits occur.
module tb_apack_enc_pipe;
  import apack_pkg::*;
  import apack_ref_pkg::*;

  localparam int NS   = 4;
  localparam int NVAL = 1500;

  logic clk = 0, rst_n = 0;
  symt_wr_t symt_in;
  pcnt_wr_t pcnt_in;
  val_t in_val;
  logic in_en, done;
  logic [1:0] in_sid, out_sid;
  logic out_valid, code_v, out_u_v;
  val_t ofs_out;
  logic [3:0] ofs_r, code_c;
  win_t code_out;
  logic [UBC_W-1:0] out_u;

  int checks = 0, failures = 0;
  bit got_code [NS][$];
  bit got_ofs [NS][$];
  int n_uf = 0, n_b2b = 0;
  logic       iss_q1, iss_q2;
  logic [1:0] sid_q1, sid_q2;

  apack_enc_pipe #(.NSTR(NS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected output timing and output collection
  always @(posedge clk) begin
    iss_q1 <= rst_n && (in_en || done);
    sid_q1 <= in_sid;
    iss_q2 <= iss_q1;
    sid_q2 <= sid_q1;
    if (rst_n) begin
      if (out_valid !== iss_q2 || (out_valid && out_sid !== sid_q2)) begin
        failures++;
        $display("output timing or stream number wrong");
      end
      if (out_valid) begin
        if (code_v) begin
          got_code[out_sid].push_back(code_out[15]);
          if (out_u_v) begin
            n_uf++;
            for (int j = 0; j < out_u; j++) got_code[out_sid].push_back(~code_out[15]);
          end
          for (int j = 1; j < code_c; j++) got_code[out_sid].push_back(code_out[15-j]);
        end
        for (int j = int'(ofs_r) - 1; j >= 0; j--) got_ofs[out_sid].push_back(ofs_out[j]);
      end
    end
  end

  initial begin
    ref_encoder re [NS];
    int sent [NS];
    bit flushed [NS];
    int last, s, v, nleft;
    for (int i = 0; i < NS; i++) begin re[i] = new; sent[i] = 0; flushed[i] = 0; end
    symt_in = '0; pcnt_in = '0; in_val = '0; in_en = 0; done = 0; in_sid = '0;
    iss_q1 = 0; iss_q2 = 0; sid_q1 = '0; sid_q2 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NROW; i++) begin
      symt_in = symt_word(i);
      pcnt_in = pcnt_word(i);
      @(negedge clk);
    end
    symt_in = '0; pcnt_in = '0;
    last = -1;
    nleft = NS;
    while (nleft > 0) begin
      in_en = 0; done = 0;
      s = int'($urandom_range(NS - 1));
      if ($urandom_range(99) < 90 && s != last && !flushed[s]) begin
        in_sid = 2'(s);
        if (sent[s] < NVAL) begin
          v = draw_value();
          re[s].encode(v);
          in_val = val_t'(v);
          in_en = 1;
          sent[s]++;
        end else begin
          re[s].flush();
          done = 1;
          flushed[s] = 1;
          nleft--;
        end
        if (last >= 0) n_b2b++;
        last = s;
      end else begin
        last = -1;
      end
      @(negedge clk);
    end
    in_en = 0; done = 0;
    repeat (4) @(negedge clk);

    for (int i = 0; i < NS; i++) begin
      checks++;
      if (got_code[i].size() != re[i].code_bits.size()) begin
        failures++;
        $display("stream %0d: code length %0d, expected %0d", i, got_code[i].size(), re[i].code_bits.size());
      end
      for (int k = 0; k < re[i].code_bits.size() && k < got_code[i].size(); k++) begin
        checks++;
        if (got_code[i][k] != re[i].code_bits[k]) failures++;
      end
      checks++;
      if (got_ofs[i].size() != re[i].ofs_bits.size()) begin
        failures++;
        $display("stream %0d: offset length differs", i);
      end
      for (int k = 0; k < re[i].ofs_bits.size() && k < got_ofs[i].size(); k++) begin
        checks++;
        if (got_ofs[i][k] != re[i].ofs_bits[k]) failures++;
      end
    end
    checks++;
    if (n_uf == 0) begin failures++; $display("no underflow bits were emitted"); end
    checks++;
    if (n_b2b == 0) begin failures++; $display("never issued in consecutive cycles"); end
    $display("underflow emits %0d, back-to-back issues %0d", n_uf, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
