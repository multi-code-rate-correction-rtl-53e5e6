// tb_ldpc_system -- end-to-end test of the reconciliation system.
//
// Runs frames through key source, encoder and decoder at full size (z = 81,
// n = 24) and checks every corrected key group against Alice's key group of
// the same frame. A schedule of (rate, error probability) settings takes the
// design through: all four code rates, frames with no error (decided without
// any iteration), frames corrected after one or more iterations, frames that
// hit the iteration limit at a high error rate (these must report failure,
// and a successful report must always match Alice's key), and a frame being
// loaded while the previous one is still decoded. Each such event is counted
// and a failure is counted for one that never happened.
module tb_ldpc_system;
  import ldpc_pkg::*;

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

  // Alice's key groups, in order, and the settings of each frame.
  zvec_t       alice_q[$];
  rate_e       frame_rate_q[$];
  int unsigned done_frames = 0, ok_frames = 0;
  int unsigned n_zero_iter = 0, n_iter = 0, n_fail = 0, n_overlap = 0;
  int unsigned n_rate [4] = '{0, 0, 0, 0};
  int unsigned grp_in_frame = 0;
  logic        frame_mismatch = 1'b0;
  logic        decoding = 1'b0;
  logic [15:0] frames_q = '0;

  always_ff @(posedge clk) if (rst_n) begin
    frames_q <= frames;
    if (alice_key.valid) alice_q.push_back(alice_key.data);
    if (frames != frames_q) begin
      frame_rate_q.push_back(rate_in);
      if (decoding) n_overlap++;
    end
    if (dut.u_dec.load_done) decoding <= 1'b1;
    if (dec_key.valid) begin
      zvec_t exp_g;
      exp_g = alice_q.pop_front();
      if (dec_key.data != exp_g) frame_mismatch <= 1'b1;
      grp_in_frame++;
    end
    if (dec_done) begin
      rate_e r;
      decoding <= 1'b0;
      r = frame_rate_q.pop_front();
      done_frames++;
      checks++;
      if (grp_in_frame != N - rate_m(r)) begin
        failures++;
        $display("frame %0d: %0d groups out, expected %0d", done_frames, grp_in_frame, N - rate_m(r));
      end
      grp_in_frame = 0;
      checks++;
      if (dec_success) begin
        // a reported success must be the right key
        if (frame_mismatch || (dec_key.valid && dec_key.data != alice_q[0])) begin
          failures++;
          $display("frame %0d: success reported but key differs", done_frames);
        end else begin
          ok_frames++;
          n_rate[r]++;
          if (dec_iters == 0) n_zero_iter++; else n_iter++;
        end
      end else begin
        n_fail++;
      end
      frame_mismatch <= 1'b0;
      $display("frame %0d rate %0d: success=%0d iters=%0d", done_frames, r, dec_success, dec_iters);
    end
  end

  task automatic run_frames(rate_e r, logic [15:0] thr, int unsigned nf);
    int unsigned target;
    target = done_frames + nf;
    rate_in = r;
    ber_thr = thr;
    while (done_frames < target) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    run = 1'b1;
    run_frames(RATE_2_3, 16'd0,    2);   // error free
    run_frames(RATE_2_3, 16'd655,  4);   // 1 %
    run_frames(RATE_1_2, 16'd1311, 3);   // 2 %
    run_frames(RATE_3_4, 16'd400,  3);
    run_frames(RATE_5_6, 16'd200,  3);
    run_frames(RATE_2_3, 16'd3932, 6);   // 6 %, the paper's working point
    run_frames(RATE_5_6, 16'd9000, 2);   // far beyond the code: must fail
    run = 1'b0;
    while (done_frames < 32'(frames)) @(posedge clk);   // drain
    checks++; if (n_zero_iter == 0) begin failures++; $display("no frame decided without iteration"); end
    checks++; if (n_iter == 0)      begin failures++; $display("no frame corrected by iterating"); end
    checks++; if (n_fail == 0)      begin failures++; $display("iteration limit never reached"); end
    checks++; if (n_overlap == 0)   begin failures++; $display("loading never overlapped decoding"); end
    for (int r = 0; r < 4; r++) begin
      checks++;
      if (n_rate[r] == 0) begin failures++; $display("rate %0d never decoded", r); end
    end
    $display("frames=%0d ok=%0d zero_iter=%0d iterated=%0d failed=%0d overlap=%0d",
             done_frames, ok_frames, n_zero_iter, n_iter, n_fail, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
