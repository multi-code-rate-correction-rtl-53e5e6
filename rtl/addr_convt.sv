// addr_convt -- address convert unit of the decoder (combinational).
//
// In the decoder every processor writes its result at the natural address k
// of a block's RAM: a check-node step k writes the C2V message of check row k
// of each block, a variable-node step k writes the V2C message of variable
// column k. The other side must then read a rotated address, different for
// every block (i, j) with shift h = H_{i,j}:
//   c2v_addr (read by the variable-node step k, paper Eq. 18):
//       k' = k - h        if k >= h,   k' = k + z - h   if k < h
//   v2c_addr (read by the check-node step k, paper Eq. 19):
//       k' = k + h        if k < z-h,  k' = k + h - z   if k >= z-h
// and k' = k for an identity block or an all-zero block. The two formulas are
// the paper's; the unit has no clock and no state.
module addr_convt
  import ldpc_pkg::*;
(
  input  logic [ZW-1:0] k,
  input  hentry_t       h        [M_MAX][N],
  output logic [ZW-1:0] c2v_addr [M_MAX][N],
  output logic [ZW-1:0] v2c_addr [M_MAX][N]
);

  for (genvar i = 0; i < M_MAX; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      logic [ZW:0] hs;
      assign hs = {1'b0, h[i][j].shift};
      always_comb begin
        if (!h[i][j].valid || hs == 0) begin
          c2v_addr[i][j] = k;
          v2c_addr[i][j] = k;
        end else begin
          // Eq. 18
          if ({1'b0, k} >= hs) c2v_addr[i][j] = ZW'({1'b0, k} - hs);
          else                 c2v_addr[i][j] = ZW'({1'b0, k} + (ZW+1)'(Z) - hs);
          // Eq. 19
          if ({1'b0, k} < (ZW+1)'(Z) - hs) v2c_addr[i][j] = ZW'({1'b0, k} + hs);
          else                             v2c_addr[i][j] = ZW'({1'b0, k} + hs - (ZW+1)'(Z));
        end
      end
    end
  end

endmodule
