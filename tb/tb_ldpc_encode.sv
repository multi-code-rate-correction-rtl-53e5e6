// tb_ldpc_encode -- encodes random frames at every code rate (and the
// all-zero frame) and compares every parity group with the reference
// encoder; the resulting codewords must satisfy all parity checks. Also
// checks the timing: the first parity group one clock after the last
// information group, then one group per clock, m groups in all, p_last on
// the last, s_ready low while parity is produced (it rises again with the last group).
module tb_ldpc_encode;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  rate_e rate = RATE_2_3;
  grp_t  s_in = '0;
  logic  s_ready, p_last;
  grp_t  p_out;
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  ldpc_encode dut (.clk, .rst_n, .rate, .s_in, .s_ready, .p_out, .p_last);

  initial begin
    cw_t c, got;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 10; f++) begin
      int m, r, cyc;
      r = f % 4;
      m = m_of(r);
      for (int b = 0; b < N*Z; b++) c[b] = (f == 0) ? 1'b0 : 1'($urandom_range(0, 1));
      got = c;
      encode(m, c);
      // information groups, with a gap in the middle of odd frames
      for (int j = 0; j < N - m; j++) begin
        @(negedge clk);
        if (f % 2 == 1 && j == 3) begin s_in.valid = 1'b0; @(negedge clk); end
        checks++;
        if (!s_ready) begin failures++; $display("frame %0d: not ready", f); end
        rate = rate_e'(r);
        s_in.valid = 1'b1;
        s_in.idx = 5'(j);
        for (int b = 0; b < Z; b++) s_in.data[b] = c[j*Z + b];
      end
      @(negedge clk);
      s_in.valid = 1'b0;
      rate = rate_e'((r + 1) % 4);   // must not matter inside a frame
      // parity groups
      cyc = 0;
      for (int i = 0; i < m; i++) begin
        @(posedge clk); #1;
        cyc++;
        checks++;
        if (!p_out.valid || int'(p_out.idx) != N - m + i || p_last != (i == m - 1) || s_ready != (i == m - 1)) begin
          failures++;
          $display("frame %0d parity %0d: valid=%0d idx=%0d last=%0d ready=%0d", f, i, p_out.valid, p_out.idx, p_last, s_ready);
        end
        for (int b = 0; b < Z; b++) got[(N - m + i)*Z + b] = p_out.data[b];
      end
      checks++;
      if (syndrome_weight(m, got) != 0) begin failures++; $display("frame %0d: not a codeword", f); end
      checks++;
      if (got != c) begin failures++; $display("frame %0d: parity differs from reference", f); end
      @(posedge clk); #1;
      checks++;
      if (p_out.valid || !s_ready) begin failures++; $display("frame %0d: extra parity", f); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
