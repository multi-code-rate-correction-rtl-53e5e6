// tb_iter_control -- plays the rest of the decoder around the controller:
// answers every chk with chk_done one clock later and a scripted syn_ok,
// and ends the read-out a few clocks after emit. Checks, per frame, the
// number of check-node and variable-node phases, that each phase issues
// k = 0 .. z-1 on consecutive clocks, the 2z+7-clock iteration period, the
// stop on success and at the iteration limit, and the reported outcome.
module tb_iter_control;
  import ldpc_pkg::*;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic [3:0]    iter_max = 4'd10;
  logic          load_done = 1'b0, chk_done = 1'b0, syn_ok = 1'b0, out_last = 1'b0;
  logic          dec_idle, cn_issue, vn_issue, chk, emit, done, success;
  logic [ZW-1:0] k;
  logic [3:0]    iters;
  int unsigned checks = 0, failures = 0;
  int            ok_after;          // check number that succeeds (-1: never)
  int            n_chk, n_cn, n_vn, last_chk_cyc, period, cyc;
  logic          cn_q = 1'b0, vn_q = 1'b0;
  int            kexp;

  always #5 clk = ~clk;

  iter_control dut (.clk, .rst_n, .iter_max, .load_done, .chk_done, .syn_ok, .out_last,
                    .dec_idle, .cn_issue, .vn_issue, .k, .chk, .emit, .done, .success, .iters);

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    cn_q <= cn_issue;
    vn_q <= vn_issue;
    chk_done <= chk;
    if (chk) begin
      syn_ok <= (ok_after >= 0 && n_chk >= ok_after);
      if (n_chk > 0) period <= cyc - last_chk_cyc;
      last_chk_cyc <= cyc;
      n_chk <= n_chk + 1;
    end
    if (cn_issue && !cn_q) begin n_cn <= n_cn + 1; kexp = 0; end
    if (vn_issue && !vn_q) begin n_vn <= n_vn + 1; kexp = 0; end
    if (cn_issue || vn_issue) begin
      if (int'(k) != kexp) begin failures++; $display("k=%0d expected %0d", k, kexp); end
      kexp++;
      if (kexp == int'(Z)) kexp = 0;
    end
    out_last <= emit;
  end

  task automatic frame(int ok_at, int lim);
    int exp_it;
    ok_after = ok_at;
    iter_max = 4'(lim);
    n_chk = 0; n_cn = 0; n_vn = 0; period = 0;
    @(negedge clk);
    checks++;
    if (!dec_idle) begin failures++; $display("not idle"); end
    load_done = 1'b1;
    @(negedge clk);
    load_done = 1'b0;
    while (!done) @(posedge clk);
    #1;
    exp_it = (ok_at >= 0 && ok_at <= lim) ? ok_at : lim;
    checks++;
    if (int'(iters) != exp_it || success != (ok_at >= 0 && ok_at <= lim) ||
        n_cn != exp_it || n_vn != exp_it + 1 || n_chk != exp_it + 1) begin
      failures++;
      $display("ok_at=%0d lim=%0d: iters=%0d success=%0d cn=%0d vn=%0d chk=%0d",
               ok_at, lim, iters, success, n_cn, n_vn, n_chk);
    end
    if (exp_it > 0) begin
      checks++;
      if (period != 2 * int'(Z) + 7) begin failures++; $display("iteration period %0d", period); end
    end
  endtask

  initial begin
    cyc = 0; kexp = 0; last_chk_cyc = 0; n_chk = 0; n_cn = 0; n_vn = 0; period = 0; ok_after = -1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    frame(0, 10);    // right at once
    frame(3, 10);    // after 3 iterations
    frame(-1, 10);   // never: stops at the limit
    frame(5, 4);     // would succeed too late
    frame(2, 2);     // succeeds at the limit
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
