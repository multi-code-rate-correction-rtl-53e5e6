// tb_global_ctrl -- models the encoder and decoder readiness around the
// global controller and checks, per frame: key_en high for exactly n-m
// consecutive clocks of the latched rate, no frame started while the encoder
// or decoder is busy or run is low, the rate latched at the frame start, and
// the frame counter.
module tb_global_ctrl;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::m_of;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        run = 1'b0;
  rate_e       rate_in = RATE_2_3;
  logic        enc_ready = 1'b1, dec_ready = 1'b1, p_last = 1'b0;
  rate_e       rate;
  logic        key_en;
  logic [15:0] frames;
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  global_ctrl dut (.clk, .rst_n, .run, .rate_in, .enc_ready, .dec_ready, .p_last,
                   .rate, .key_en, .frames);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // not running: nothing happens
    repeat (5) begin
      @(posedge clk); #1;
      checks++; if (key_en) failures++;
    end
    for (int f = 0; f < 8; f++) begin
      int len, r, wait_c;
      r = (f * 3) % 4;
      if (f == 0) begin
        @(negedge clk);
        rate_in = rate_e'(r);
        run = 1'b1;
      end
      wait_c = 0;
      if (!dec_ready) repeat (4) begin
        @(posedge clk); #1;
        if (!dec_ready) begin checks++; if (key_en) begin failures++; $display("frame %0d started while busy", f); end end
      end
      if (!dec_ready) begin
        @(negedge clk);
        dec_ready = 1'b1;
      end
      while (!key_en) begin @(posedge clk); #1; end
      checks++;
      if (rate != rate_e'(r) || int'(frames) != f + 1) begin failures++; $display("frame %0d: rate %0d frames %0d", f, rate, frames); end
      @(negedge clk);
      rate_in = rate_e'((r + 1) % 4);   // change mid-frame: ignored
      len = 1;
      while (1) begin
        @(posedge clk); #1;
        if (!key_en) break;
        len++;
      end
      checks++;
      if (len != N - m_of(r)) begin failures++; $display("frame %0d: key_en for %0d clocks", f, len); end
      // encoder busy until p_last
      repeat (6) begin
        @(posedge clk); #1;
        checks++; if (key_en) begin failures++; $display("frame %0d: key_en before p_last", f); end
      end
      // settings of the next frame; the decoder is held busy for odd frames
      @(negedge clk);
      p_last = 1'b1;
      rate_in = rate_e'(((f + 1) * 3) % 4);
      dec_ready = ((f + 1) % 2 == 0);
      run = (f != 7);
      @(negedge clk);
      p_last = 1'b0;
    end
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
