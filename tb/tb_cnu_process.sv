// tb_cnu_process -- feeds random V2C messages for the rate-1/2 and rate-5/6
// base matrices and compares every C2V output with a brute-force
// normalized min-sum: for each block, the minimum magnitude and the sign
// product over all other present blocks of its block row, times alpha =
// 102/256 with rounding. Also checks the one-clock latency of k and valid.
module tb_cnu_process;
  import ldpc_pkg::*;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          in_valid = 1'b0;
  logic [ZW-1:0] k_in = '0;
  rate_e         rate;
  hentry_t       h   [M_MAX][N];
  msg_t          v2c [M_MAX][N];
  logic          out_valid;
  logic [ZW-1:0] k_out;
  msg_t          c2v [M_MAX][N];
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  h_base u_h (.rate, .h);
  cnu_process dut (.clk, .rst_n, .in_valid, .k_in, .h, .v2c, .out_valid, .k_out, .c2v);

  initial begin
    rate = RATE_1_2;
    for (int i = 0; i < M_MAX; i++) for (int j = 0; j < N; j++) v2c[i][j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      msg_t exp_c [M_MAX][N];
      @(negedge clk);
      rate     = (t < 100) ? RATE_1_2 : RATE_5_6;
      in_valid = 1'b1;
      k_in     = ZW'(t % Z);
      for (int i = 0; i < M_MAX; i++) for (int j = 0; j < N; j++) begin
        v2c[i][j] = msg_t'($urandom);
        if (t % 5 == 0 && j == 3) v2c[i][j][6:0] = v2c[i][2][6:0];  // equal minima
      end
      #1;
      for (int i = 0; i < M_MAX; i++) for (int j = 0; j < N; j++) begin
        int mn, sg;
        mn = 127; sg = 0;
        for (int jj = 0; jj < N; jj++)
          if (jj != j && h[i][jj].valid) begin
            if (int'(v2c[i][jj][6:0]) < mn) mn = int'(v2c[i][jj][6:0]);
            sg ^= int'(v2c[i][jj][7]);
          end
        exp_c[i][j] = h[i][j].valid ? {1'(sg), 7'((mn * 102 + 128) / 256)} : '0;
      end
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid || k_out != ZW'(t % Z)) begin
        failures++;
        $display("t=%0d: valid/k wrong", t);
      end
      for (int i = 0; i < M_MAX; i++) for (int j = 0; j < N; j++)
        if (h[i][j].valid) begin
          checks++;
          if (c2v[i][j] != exp_c[i][j]) begin
            failures++;
            if (failures < 10) $display("t=%0d (%0d,%0d): got %h expected %h", t, i, j, c2v[i][j], exp_c[i][j]);
          end
        end
    end
    @(negedge clk);
    in_valid = 1'b0;
    @(posedge clk); #1;
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
