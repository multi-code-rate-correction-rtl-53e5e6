// tb_workload_qber -- runs the two operating points of the reconciliation
// scheme through the whole system at full size: code rate 2/3 at 6 % key
// errors and code rate 5/6 at 1.04 % key errors, FRAMES frames each, with
// Iter_max = 10. Every frame reported as corrected must equal Alice's key,
// every frame that differs from it must be reported as failed, and the time
// from the Init-Array fill to done must be the same constant plus 169 clocks
// per iteration (the constant depending on the rate). It prints the frame error rate, the mean number of
// iterations and the decoding throughput at a 25 MHz clock.
module tb_workload_qber;
  import ldpc_pkg::*;

  localparam int FRAMES = 20;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        run = 1'b0;
  rate_e       rate_in = RATE_2_3;
  logic [15:0] ber_thr = '0;
  grp_t        alice_key, dec_key;
  logic [10:0] err_count;
  logic        dec_last, dec_done, dec_success;
  logic [3:0]  dec_iters;
  logic [15:0] frames;

  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  ldpc_system dut (
    .clk, .rst_n, .run, .rate_in, .ber_thr, .llr_mag(7'd24), .par_mag(7'd100),
    .iter_max(4'd10), .alice_key, .err_count, .dec_key, .dec_last, .dec_done,
    .dec_success, .dec_iters, .frames
  );

  zvec_t       alice_q[$];
  logic        mismatch = 1'b0;
  int unsigned done_frames = 0, ok = 0, it_sum = 0, busy_sum = 0;
  int          t_load = 0, cyc = 0, base = -1;

  always_ff @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (alice_key.valid) alice_q.push_back(alice_key.data);
    if (dut.u_dec.load_done) t_load <= cyc;
    if (dec_key.valid) begin
      zvec_t e;
      e = alice_q.pop_front();
      if (dec_key.data != e) mismatch <= 1'b1;
    end
    if (dec_done) begin
      int busy;
      busy = cyc - t_load - 169 * int'(dec_iters);
      done_frames++;
      busy_sum += cyc - t_load;
      checks++;
      if (dec_success == mismatch) begin
        failures++;
        $display("frame %0d: success=%0d but key %s", done_frames, dec_success, mismatch ? "differs" : "matches");
      end
      if (dec_success) begin ok++; it_sum += dec_iters; end
      checks++;
      if (base < 0) base = busy;
      else if (busy != base) begin failures++; $display("frame %0d: decoding time %0d", done_frames, busy); end
      mismatch <= 1'b0;
    end
  end

  task automatic point(rate_e r, logic [15:0] thr, string name);
    int unsigned d0, ok0, it0, b0, kbits;
    d0 = done_frames; ok0 = ok; it0 = it_sum; b0 = busy_sum;
    base = -1;   // the read-out length depends on the rate
    rate_in = r;
    ber_thr = thr;
    run = 1'b1;
    while (32'(frames) < d0 + FRAMES) @(posedge clk);
    run = 1'b0;
    while (done_frames < 32'(frames)) @(posedge clk);
    kbits = (N - rate_m(r)) * Z;
    $display("%s: frames=%0d corrected=%0d FER=%0d%% mean_iters(corrected)=%0d.%0d decode_cycles/frame=%0d throughput_at_25MHz=%0d Mbps",
             name, done_frames - d0, ok - ok0, 100 * (done_frames - d0 - (ok - ok0)) / (done_frames - d0),
             (ok - ok0) ? (it_sum - it0) / (ok - ok0) : 0,
             (ok - ok0) ? ((it_sum - it0) * 10 / (ok - ok0)) % 10 : 0,
             (busy_sum - b0) / (done_frames - d0),
             kbits * 25 * (done_frames - d0) / (busy_sum - b0));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    point(RATE_2_3, 16'd3932, "rate 2/3, 6% errors");
    point(RATE_5_6, 16'd682,  "rate 5/6, 1.04% errors");
    checks++;
    if (done_frames < 2 * FRAMES) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
