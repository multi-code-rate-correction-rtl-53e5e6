// tb_vnu_process -- feeds random channel and C2V messages (sign-magnitude)
// for the rate-1/2 and rate-3/4 base matrices and compares with an integer
// model: Q = L0 + sum of the column's C2V, V2C = Q - own C2V clipped to
// +-127, hard decision = (Q < 0). Also checks the one-clock latency.
module tb_vnu_process;
  import ldpc_pkg::*;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          in_valid = 1'b0;
  logic [ZW-1:0] k_in = '0;
  rate_e         rate;
  hentry_t       h   [M_MAX][N];
  msg_t          l0  [N];
  msg_t          c2v [M_MAX][N];
  logic          out_valid;
  logic [ZW-1:0] k_out;
  msg_t          v2c [M_MAX][N];
  logic [N-1:0]  hard;
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  h_base u_h (.rate, .h);
  vnu_process dut (.clk, .rst_n, .in_valid, .k_in, .h, .l0, .c2v, .out_valid, .k_out, .v2c, .hard);

  function automatic int sm2int(msg_t v);
    return v[7] ? -int'(v[6:0]) : int'(v[6:0]);
  endfunction

  function automatic msg_t int2sm(int v);
    if (v > 127) v = 127;
    if (v < -127) v = -127;
    return (v < 0) ? {1'b1, 7'(-v)} : {1'b0, 7'(v)};
  endfunction

  initial begin
    rate = RATE_1_2;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      msg_t exp_v [M_MAX][N];
      bit   exp_h [N];
      @(negedge clk);
      rate     = (t < 100) ? RATE_1_2 : RATE_3_4;
      in_valid = 1'b1;
      k_in     = ZW'(t % Z);
      for (int j = 0; j < N; j++) begin
        // small values sometimes, so that the sum lands near zero
        l0[j] = (t % 3 == 0) ? msg_t'({$urandom_range(0,1), 7'($urandom_range(0, 6))}) : msg_t'($urandom);
        if (l0[j] == 8'h80) l0[j] = 8'h00;
        for (int i = 0; i < M_MAX; i++) begin
          c2v[i][j] = (t % 3 == 0) ? msg_t'({$urandom_range(0,1), 7'($urandom_range(0, 6))}) : msg_t'($urandom);
          if (c2v[i][j] == 8'h80) c2v[i][j] = 8'h00;
        end
      end
      #1;
      for (int j = 0; j < N; j++) begin
        int q;
        q = sm2int(l0[j]);
        for (int i = 0; i < M_MAX; i++) if (h[i][j].valid) q += sm2int(c2v[i][j]);
        exp_h[j] = (q < 0);
        for (int i = 0; i < M_MAX; i++)
          exp_v[i][j] = h[i][j].valid ? int2sm(q - sm2int(c2v[i][j])) : '0;
      end
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid || k_out != ZW'(t % Z)) begin failures++; $display("t=%0d valid/k", t); end
      for (int j = 0; j < N; j++) begin
        checks++;
        if (hard[j] != exp_h[j]) begin failures++; if (failures < 10) $display("t=%0d hard %0d", t, j); end
        for (int i = 0; i < M_MAX; i++)
          if (h[i][j].valid) begin
            checks++;
            if (v2c[i][j] != exp_v[i][j]) begin
              failures++;
              if (failures < 10) $display("t=%0d (%0d,%0d): got %h expected %h", t, i, j, v2c[i][j], exp_v[i][j]);
            end
          end
      end
    end
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
