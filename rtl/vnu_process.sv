// vnu_process -- variable-node processor (VNP).
//
// Works on variable column k of every block column at once. For block column
// j it gets the channel message L0(j,k) from the Init-Array and the C2V
// message of every present block (i, j), read from the C2V-Array at the
// rotated address. Both arrive in sign-magnitude form and are converted to
// two's complement (S2C) for the adders. It forms
//   Q(j)     = L0(j,k) + sum_i C2V(i,j)          posterior, paper Eq. 16
//   V2C(i,j) = Q(j) - C2V(i,j)                    = L0 + sum of the others, Eq. 15
// saturates each V2C to +-127 and converts it back to sign-magnitude (C2S)
// for the V2C-Array. The hard decision of the bit is 1 when Q(j) < 0. The
// adder width (12 bits, enough for 13 terms) and the saturation are this
// design's choice.
//
// The paper words the sums over the messages "of the same block row"; that
// reading does not give a belief-propagation decoder, so the sums here run,
// as in the normalized min-sum algorithm, over the block rows of the same
// block column.
//
// Timing: one pipeline register. Results for step k_in appear one clock later
// with out_valid and k_out, to be written at address k_out of the V2C-Array
// and into the hard-decision register.
module vnu_process
  import ldpc_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [ZW-1:0] k_in,
  input  hentry_t       h       [M_MAX][N],
  input  msg_t          l0      [N],
  input  msg_t          c2v     [M_MAX][N],
  output logic          out_valid,
  output logic [ZW-1:0] k_out,
  output msg_t          v2c     [M_MAX][N],
  output logic [N-1:0]  hard
);

  localparam int unsigned SW = 12;
  typedef logic signed [SW-1:0] sum_t;

  msg_t         v2c_d [M_MAX][N];
  logic [N-1:0] hard_d;

  function automatic msg_t sat_c2s(sum_t v);
    if (v > sum_t'(127))       return c2s(8'sd127);
    else if (v < -sum_t'(127)) return c2s(-8'sd127);
    else                       return c2s(QW'(v));
  endfunction

  for (genvar j = 0; j < N; j++) begin : g_col
    sum_t q;
    sum_t cv [M_MAX];
    always_comb begin
      q = sum_t'(s2c(l0[j]));
      for (int unsigned i = 0; i < M_MAX; i++) begin
        cv[i] = h[i][j].valid ? sum_t'(s2c(c2v[i][j])) : '0;
        q     = q + cv[i];
      end
    end
    assign hard_d[j] = q[SW-1];
    for (genvar i = 0; i < M_MAX; i++) begin : g_row
      assign v2c_d[i][j] = h[i][j].valid ? sat_c2s(q - cv[i]) : '0;
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

  always_ff @(posedge clk) begin
    v2c  <= v2c_d;
    hard <= hard_d;
  end

endmodule
