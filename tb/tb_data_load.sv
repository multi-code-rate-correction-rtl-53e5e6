// tb_data_load -- sends frames of random groups in a shuffled order and
// checks the Init-Array writes: nothing before the decoder is idle, then z
// consecutive writes at addresses 0 .. z-1, each with the sign-magnitude
// channel message {bit, magnitude} of bit k of every group (key magnitude
// for the first n-m groups, parity magnitude for the rest), load_done one
// clock after the last, in_ready low while a full frame waits.
module tb_data_load;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::m_of;

  logic          clk = 1'b0, rst_n = 1'b0;
  rate_e         rate = RATE_2_3;
  grp_t          din = '0;
  logic          in_ready;
  logic [6:0]    llr_mag = 7'd20, par_mag = 7'd99;
  logic          dec_idle = 1'b0;
  rate_e         frame_rate;
  logic          init_we, load_done;
  logic [ZW-1:0] init_addr;
  msg_t          init_data [N];
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  data_load dut (.clk, .rst_n, .rate, .din, .in_ready, .llr_mag, .par_mag, .dec_idle,
                 .frame_rate, .init_we, .init_addr, .init_data, .load_done);

  initial begin
    zvec_t g [N];
    int    order [N];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 4; f++) begin
      int m;
      m = m_of(f);
      for (int j = 0; j < N; j++) begin
        order[j] = j;
        for (int b = 0; b < Z; b++) g[j][b] = 1'($urandom_range(0, 1));
      end
      order.shuffle();
      dec_idle = 1'b0;
      for (int t = 0; t < N; t++) begin
        @(negedge clk);
        rate = rate_e'(f);
        din = '{valid: 1'b1, idx: 5'(order[t]), data: g[order[t]]};
      end
      @(negedge clk);
      din.valid = 1'b0;
      rate = rate_e'((f + 1) % 4);
      repeat (5) begin
        @(posedge clk); #1;
        checks++;
        if (init_we || in_ready) begin failures++; $display("frame %0d: early transfer", f); end
      end
      @(negedge clk);
      dec_idle = 1'b1;
      @(posedge clk); #1;
      for (int k = 0; k < Z; k++) begin
        checks++;
        if (!init_we || int'(init_addr) != k || frame_rate != rate_e'(f)) begin
          failures++; $display("frame %0d step %0d: we=%0d addr=%0d", f, k, init_we, init_addr);
        end
        for (int j = 0; j < N; j++) begin
          msg_t e;
          e = {g[j][k], (j < N - m) ? llr_mag : par_mag};
          checks++;
          if (init_data[j] != e) begin
            failures++;
            if (failures < 10) $display("frame %0d k=%0d j=%0d: got %h expected %h", f, k, j, init_data[j], e);
          end
        end
        @(posedge clk); #1;
      end
      checks++;
      if (init_we || !load_done || !in_ready) begin failures++; $display("frame %0d: end of transfer", f); end
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
