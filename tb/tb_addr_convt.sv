// tb_addr_convt -- checks the rotated read addresses of every block against
// (k - h) mod z and (k + h) mod z for random shifts and every k, and that
// absent and identity blocks read address k.
module tb_addr_convt;
  import ldpc_pkg::*;

  logic [ZW-1:0] k;
  hentry_t       h [M_MAX][N];
  logic [ZW-1:0] c2v_addr [M_MAX][N];
  logic [ZW-1:0] v2c_addr [M_MAX][N];
  int unsigned checks = 0, failures = 0;

  addr_convt dut (.k, .h, .c2v_addr, .v2c_addr);

  initial begin
    for (int t = 0; t < 4; t++) begin
      for (int i = 0; i < M_MAX; i++)
        for (int j = 0; j < N; j++) begin
          h[i][j].valid = ($urandom_range(0, 3) != 0);
          h[i][j].shift = (t == 0) ? ZW'(0) : ZW'($urandom_range(0, Z - 1));
        end
      for (int kk = 0; kk < int'(Z); kk++) begin
        k = ZW'(kk);
        #1;
        for (int i = 0; i < M_MAX; i++)
          for (int j = 0; j < N; j++) begin
            int hs, e18, e19;
            hs  = h[i][j].valid ? int'(h[i][j].shift) : 0;
            e18 = (kk - hs + int'(Z)) % int'(Z);
            e19 = (kk + hs) % int'(Z);
            checks++;
            if (int'(c2v_addr[i][j]) != e18 || int'(v2c_addr[i][j]) != e19) begin
              failures++;
              if (failures < 10)
                $display("k=%0d h=%0d: got %0d %0d expected %0d %0d", kk, hs,
                         c2v_addr[i][j], v2c_addr[i][j], e18, e19);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
