// tb_decode_judge -- loads hard decisions column by column as the
// variable-node processor would and checks the parity-check result: valid
// codewords from the reference encoder pass, the same words with one or a
// few flipped bits fail (for every code rate), and a check result comes one
// clock after chk. Then streams the key out and compares every group.
module tb_decode_judge;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;

  logic          clk = 1'b0, rst_n = 1'b0;
  rate_e         rate;
  hentry_t       h [M_MAX][N];
  logic          vn_valid = 1'b0;
  logic [ZW-1:0] vn_k = '0;
  logic [N-1:0]  vn_hard = '0;
  logic          chk = 1'b0, chk_done, syn_ok, emit = 1'b0;
  logic [4:0]    n_info = 5'd16;
  grp_t          dout;
  logic          dout_last;
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  h_base u_h (.rate, .h);
  decode_judge dut (.clk, .rst_n, .h, .vn_valid, .vn_k, .vn_hard, .chk, .chk_done,
                    .syn_ok, .emit, .n_info, .dout, .dout_last);

  task automatic load(const ref cw_t c);
    for (int k = 0; k < Z; k++) begin
      @(negedge clk);
      vn_valid = 1'b1;
      vn_k = ZW'(k);
      for (int j = 0; j < N; j++) vn_hard[j] = c[j*Z + k];
    end
    @(negedge clk);
    vn_valid = 1'b0;
  endtask

  task automatic check(bit expect_ok, string what);
    @(negedge clk);
    chk = 1'b1;
    @(negedge clk);
    chk = 1'b0;
    checks++;
    if (!chk_done || syn_ok != expect_ok) begin
      failures++;
      $display("%s: chk_done=%0d syn_ok=%0d expected %0d", what, chk_done, syn_ok, expect_ok);
    end
  endtask

  initial begin
    cw_t c;
    rate = RATE_2_3;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 4; r++) begin
      int m;
      rate = rate_e'(r);
      m = m_of(r);
      for (int t = 0; t < 3; t++) begin
        for (int b = 0; b < N*Z; b++) c[b] = $urandom_range(0, 1);
        encode(m, c);
        if (syndrome_weight(m, c) != 0) $display("reference encoder broken");
        load(c);
        check(1'b1, $sformatf("rate %0d valid word", r));
        // read-out of the key part
        n_info = 5'(N - m);
        @(negedge clk); emit = 1'b1; @(negedge clk); emit = 1'b0;
        for (int g = 0; g < N - m; g++) begin
          @(posedge clk); #1;
          checks++;
          if (!dout.valid || int'(dout.idx) != g || dout_last != (g == N - m - 1)) begin
            failures++; $display("rate %0d group %0d framing", r, g);
          end
          for (int b = 0; b < Z; b++)
            if (dout.data[b] != c[g*Z + b]) begin
              failures++; $display("rate %0d group %0d bit %0d", r, g, b); break;
            end
        end
        @(posedge clk); #1;
        checks++;
        if (dout.valid) begin failures++; $display("extra output group"); end
        for (int e = 0; e < t + 1; e++) begin
          int pos;
          pos = $urandom_range(0, N*Z - 1);
          c[pos] = !c[pos];
        end
        load(c);
        check(syndrome_weight(m, c) == 0, $sformatf("rate %0d corrupted word", r));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
