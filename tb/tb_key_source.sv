// tb_key_source -- checks the key generator: group indices cycling over the
// n-m groups of the selected rate, identical keys at error probability 0,
// the injected-error counter equal to the number of differing bits, an
// error fraction within statistical bounds at 6 % and 1 %, a balanced key,
// and nothing emitted while disabled.
module tb_key_source;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::m_of;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        en = 1'b0;
  rate_e       rate = RATE_2_3;
  logic [15:0] ber_thr = '0;
  grp_t        alice, bob;
  logic [10:0] err_count;
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  key_source dut (.clk, .rst_n, .en, .rate, .ber_thr, .alice, .bob, .err_count);

  // Runs nf frames; returns the number of differing bits and of ones.
  task automatic frames(rate_e r, logic [15:0] thr, int nf, output int diffs, output int ones);
    int m, fd;
    diffs = 0; ones = 0;
    m = m_of(int'(r));
    rate = r; ber_thr = thr;
    for (int f = 0; f < nf; f++) begin
      fd = 0;
      for (int g = 0; g < N - m; g++) begin
        @(negedge clk); en = 1'b1;
        @(posedge clk); #1;
        checks++;
        if (!alice.valid || !bob.valid || int'(alice.idx) != g || int'(bob.idx) != g) begin
          failures++; $display("group %0d: valid/idx wrong (%0d)", g, alice.idx);
        end
        fd += $countones(alice.data ^ bob.data);
        ones += $countones(alice.data);
      end
      checks++;
      if (int'(err_count) != fd) begin failures++; $display("err_count %0d, differing bits %0d", err_count, fd); end
      diffs += fd;
    end
    @(negedge clk); en = 1'b0;
    @(posedge clk); #1;
    checks++;
    if (alice.valid) begin failures++; $display("output while disabled"); end
  endtask

  initial begin
    int d, o, bits;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    frames(RATE_2_3, 16'd0, 2, d, o);
    checks++; if (d != 0) begin failures++; $display("errors at probability 0"); end
    bits = 2 * 16 * int'(Z);
    checks++; if (o < bits * 45 / 100 || o > bits * 55 / 100) begin failures++; $display("key not balanced: %0d of %0d", o, bits); end
    frames(RATE_2_3, 16'd3932, 10, d, o);       // 6 %: expect 778 of 12960
    checks++; if (d < 650 || d > 910) begin failures++; $display("6%%: %0d errors of 12960", d); end
    frames(RATE_5_6, 16'd682, 10, d, o);        // 1.04 %: expect 168 of 16200
    checks++; if (d < 115 || d > 225) begin failures++; $display("1.04%%: %0d errors of 16200", d); end
    frames(RATE_1_2, 16'd1000, 3, d, o);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
