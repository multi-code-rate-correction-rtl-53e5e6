// cnu_process -- check-node processor (CNP), normalized min-sum.
//
// Works on check row k of every block row at once. For block row i it gets
// the V2C message of each block (i, j) that is present (sign-magnitude, read
// from the V2C-Array at the rotated address), and for every such block forms
//   C2V(i,j) = alpha * min_{j' != j} |V2C(i,j')| with sign XOR_{j' != j} sign(V2C(i,j'))
// using the usual two-minimum search: the smallest and second-smallest
// magnitude and the position of the smallest, and the XOR of all signs. The
// normalization factor alpha = 0.4 is the paper's; it is applied as a
// multiplication by 102/256 with rounding (this design's choice). Messages
// stay in sign-magnitude form, so the unit needs comparators, XORs and one
// small constant multiplier per output, as the paper describes.
//
// Timing: one pipeline register. The results for step k_in (with in_valid)
// appear one clock later on c2v with out_valid and k_out, ready to be
// written at address k_out of the C2V-Array.
module cnu_process
  import ldpc_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [ZW-1:0] k_in,
  input  hentry_t       h       [M_MAX][N],
  input  msg_t          v2c     [M_MAX][N],
  output logic          out_valid,
  output logic [ZW-1:0] k_out,
  output msg_t          c2v     [M_MAX][N]
);

  msg_t c2v_d [M_MAX][N];

  for (genvar i = 0; i < M_MAX; i++) begin : g_row
    logic [QW-2:0]        min1, min2;
    logic [$clog2(N)-1:0] idx1;
    logic                 sgn;
    always_comb begin
      min1 = '1;
      min2 = '1;
      idx1 = '0;
      sgn  = 1'b0;
      for (int unsigned j = 0; j < N; j++) begin
        if (h[i][j].valid) begin
          sgn = sgn ^ v2c[i][j][QW-1];
          if (v2c[i][j][QW-2:0] < min1) begin
            min2 = min1;
            min1 = v2c[i][j][QW-2:0];
            idx1 = ($clog2(N))'(j);
          end else if (v2c[i][j][QW-2:0] < min2) begin
            min2 = v2c[i][j][QW-2:0];
          end
        end
      end
    end
    for (genvar j = 0; j < N; j++) begin : g_col
      logic [QW-2:0] mn;
      logic [15:0]   scaled;
      assign mn     = (idx1 == ($clog2(N))'(j)) ? min2 : min1;
      assign scaled = (16'(mn) * 16'(ALPHA_NUM) + 16'(1 << (ALPHA_SH - 1))) >> ALPHA_SH;
      assign c2v_d[i][j] = h[i][j].valid
                         ? {sgn ^ v2c[i][j][QW-1], scaled[QW-2:0]}
                         : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      k_out     <= '0;
    end else begin
      out_valid <= in_valid;
      k_out     <= k_in;
    end
  end

  always_ff @(posedge clk) c2v <= c2v_d;

endmodule
