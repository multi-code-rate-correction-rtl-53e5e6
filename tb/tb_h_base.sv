// tb_h_base -- checks the base-matrix table against its definition for all
// four code rates: every block's presence and shift, no block in the unused
// rows, and the column and row structure of the dual-diagonal parity part.
module tb_h_base;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::shift_of;
  import ldpc_ref_pkg::m_of;

  rate_e   rate;
  hentry_t h [M_MAX][N];
  int unsigned checks = 0, failures = 0;

  h_base dut (.rate, .h);

  initial begin
    for (int r = 0; r < 4; r++) begin
      int m, nvalid;
      rate = rate_e'(r);
      #1;
      m = m_of(r);
      nvalid = 0;
      for (int i = 0; i < M_MAX; i++)
        for (int j = 0; j < N; j++) begin
          int e;
          e = shift_of(m, i, j);
          checks++;
          if (h[i][j].valid != (e >= 0) || (e >= 0 && int'(h[i][j].shift) != e)) begin
            failures++;
            $display("rate %0d block (%0d,%0d): got %0d/%0d expected %0d", r, i, j,
                     h[i][j].valid, h[i][j].shift, e);
          end
          if (h[i][j].valid) nvalid++;
        end
      // information part dense, parity part 3 + 2(m-1) blocks
      checks++;
      if (nvalid != m * (N - m) + 3 + 2 * (m - 1)) begin
        failures++;
        $display("rate %0d: %0d blocks present", r, nvalid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
