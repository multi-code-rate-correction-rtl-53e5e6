// tb_ldpc_decoder -- decodes codewords from the reference encoder, with a
// chosen number of bit errors in the key part, at every code rate. Checks
// that each decoded key equals the original key when success is reported,
// that frames with no error finish without iterating, that a frame with far
// too many errors reports failure after iter_max iterations, and the latency
// from the last input group to done: LAT0 + 169 * iterations + (n - m).
module tb_ldpc_decoder;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;

  localparam int LAT0 = 2 * 81 + 8;    // fill, first variable pass, check, read-out

  logic       clk = 1'b0, rst_n = 1'b0;
  rate_e      rate = RATE_2_3;
  grp_t       din = '0;
  logic       in_ready;
  grp_t       dout;
  logic       dout_last, done, success;
  logic [3:0] iters;
  int unsigned checks = 0, failures = 0;
  int         n_iterated = 0;

  always #5 clk = ~clk;

  ldpc_decoder dut (.clk, .rst_n, .rate, .din, .in_ready, .llr_mag(7'd24), .par_mag(7'd100),
                    .iter_max(4'd10), .dout, .dout_last, .done, .success, .iters);

  task automatic frame(int r, int nerr, bit must_succeed, bit must_fail);
    cw_t  c, y;
    int   m, t0, lat, ngrp;
    bit   key_ok;
    m = m_of(r);
    for (int b = 0; b < N*Z; b++) c[b] = 1'($urandom_range(0, 1));
    encode(m, c);
    y = c;
    for (int e = 0; e < nerr; e++) begin
      int pos;
      pos = $urandom_range(0, (N - m)*Z - 1);
      while (y[pos] != c[pos]) pos = $urandom_range(0, (N - m)*Z - 1);
      y[pos] = !y[pos];
    end
    for (int j = N - 1; j >= 0; j--) begin       // parity groups first
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      rate = rate_e'(r);
      din.valid = 1'b1;
      din.idx = 5'(j);
      for (int b = 0; b < Z; b++) din.data[b] = y[j*Z + b];
    end
    @(negedge clk);
    din.valid = 1'b0;
    t0 = $time;
    key_ok = 1'b1;
    ngrp = 0;
    while (!done) begin
      @(posedge clk); #1;
      if (dout.valid) begin
        ngrp++;
        for (int b = 0; b < Z; b++)
          if (dout.data[b] != c[int'(dout.idx)*Z + b]) key_ok = 1'b0;
      end
    end
    lat = ($time - t0) / 10;
    $display("rate %0d errors %0d: success=%0d iters=%0d key_ok=%0d latency=%0d", r, nerr, success, iters, key_ok, lat);
    checks++;
    if (ngrp != N - m) begin failures++; $display("  %0d groups out", ngrp); end
    checks++;
    if (success && !key_ok) begin failures++; $display("  success with wrong key"); end
    checks++;
    if ((must_succeed && !success) || (must_fail && success)) begin failures++; $display("  unexpected outcome"); end
    checks++;
    if (nerr == 0 && iters != 0) begin failures++; $display("  error-free frame iterated"); end
    checks++;
    if (lat != LAT0 + 169 * int'(iters) + (N - m)) begin failures++; $display("  latency, expected %0d", LAT0 + 169 * int'(iters) + (N - m)); end
    if (iters != 0 && success) n_iterated++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 4; r++) begin
      frame(r, 0, 1, 0);
      frame(r, 5, 1, 0);
      frame(r, 12, 1, 0);
    end
    frame(1, 30, 1, 0);
    frame(1, 400, 0, 1);
    checks++;
    if (n_iterated == 0) begin failures++; $display("no frame was corrected by iterating"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
