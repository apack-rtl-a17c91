// tb_apack_dec_pipe: checks the pipelined, time-multiplexed decoder on four
// interleaved streams.
//
// Four value streams are coded by the bit-serial reference encoder with the
// example BiLSTM weight table. The testbench plays the bit supply: each cycle
// it shows the 16 symbol bits and 8 offset bits that follow the read position
// of the stream named by win_sid (zeros past the end), and advances that
// stream by code_r / ofs_r. Commands (start first, then one step per value)
// go to random streams, never the same stream in two consecutive cycles.
// Checks: every decoded value equals the original in order per stream; each
// step gives one output two cycles later with the right stream number; no
// stream reads past its end plus the 16-bit look-ahead; sym_err stays low;
// commands were issued back to back.
module tb_apack_dec_pipe;
  import apack_pkg::*;
  import apack_ref_pkg::*;

  localparam int NS   = 4;
  localparam int NVAL = 1500;

  logic clk = 0, rst_n = 0;
  symt_wr_t symt_in;
  pcnt_wr_t pcnt_in;
  logic start, step;
  logic [1:0] in_sid, win_sid, out_sid;
  logic win_v;
  win_t code_in;
  val_t ofs_in;
  logic [4:0] code_r;
  logic [3:0] ofs_r;
  val_t out_val;
  logic out_valid, sym_err;

  int checks = 0, failures = 0;
  int expv [NS][$];
  int ngot [NS];
  logic       st_q1, st_q2;
  logic [1:0] sid_q1, sid_q2;

  apack_dec_pipe #(.NSTR(NS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    st_q1 <= rst_n && step;
    sid_q1 <= in_sid;
    st_q2 <= st_q1;
    sid_q2 <= sid_q1;
    if (rst_n) begin
      if (out_valid !== st_q2 || (out_valid && out_sid !== sid_q2)) begin
        failures++;
        $display("output timing or stream number wrong");
      end
      if (out_valid) begin
        checks++;
        if (expv[out_sid].size() == 0 || int'(out_val) != expv[out_sid][0]) begin
          failures++;
          if (failures < 6) $display("stream %0d value %0d: got %0d", out_sid, ngot[out_sid], out_val);
        end
        if (expv[out_sid].size() != 0) void'(expv[out_sid].pop_front());
        ngot[out_sid]++;
        checks++;
        if (sym_err) failures++;
      end
    end
  end

  initial begin
    ref_encoder re [NS];
    int cpos [NS], opos [NS], issued [NS];
    bit started [NS];
    int last, s, v, nleft, n_b2b;
    for (int i = 0; i < NS; i++) begin
      re[i] = new;
      cpos[i] = 0; opos[i] = 0; issued[i] = 0; started[i] = 0; ngot[i] = 0;
      for (int k = 0; k < NVAL; k++) begin
        v = draw_value();
        re[i].encode(v);
        expv[i].push_back(v);
      end
      re[i].flush();
    end
    symt_in = '0; pcnt_in = '0; start = 0; step = 0; in_sid = '0;
    code_in = '0; ofs_in = '0;
    st_q1 = 0; st_q2 = 0; sid_q1 = '0; sid_q2 = '0;
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
    n_b2b = 0;
    while (nleft > 0 || win_v) begin
      // bit supply for the stream in stage 2
      s = int'(win_sid);
      for (int j = 0; j < 16; j++)
        code_in[15-j] = (cpos[s] + j < re[s].code_bits.size()) ? re[s].code_bits[cpos[s] + j] : 1'b0;
      for (int j = 0; j < 8; j++)
        ofs_in[7-j] = (opos[s] + j < re[s].ofs_bits.size()) ? re[s].ofs_bits[opos[s] + j] : 1'b0;
      #1;
      if (win_v) begin
        cpos[s] += int'(code_r);
        opos[s] += int'(ofs_r);
      end
      // next command
      start = 0; step = 0;
      s = int'($urandom_range(NS - 1));
      if (nleft > 0 && $urandom_range(99) < 90 && s != last && issued[s] < NVAL) begin
        in_sid = 2'(s);
        if (!started[s]) begin
          start = 1;
          started[s] = 1;
        end else begin
          step = 1;
          issued[s]++;
          if (issued[s] == NVAL) nleft--;
        end
        if (last >= 0) n_b2b++;
        last = s;
      end else begin
        last = -1;
      end
      @(negedge clk);
    end
    start = 0; step = 0;
    repeat (4) @(negedge clk);

    for (int i = 0; i < NS; i++) begin
      checks++;
      if (ngot[i] != NVAL) begin failures++; $display("stream %0d: %0d values", i, ngot[i]); end
      checks++;
      if (cpos[i] < re[i].code_bits.size() || cpos[i] > re[i].code_bits.size() + 16) begin
        failures++;
        $display("stream %0d: code bits used %0d of %0d", i, cpos[i], re[i].code_bits.size());
      end
    end
    checks++;
    if (n_b2b == 0) begin failures++; $display("never issued in consecutive cycles"); end
    $display("back-to-back commands %0d", n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
