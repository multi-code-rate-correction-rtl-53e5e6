// h_base -- base-matrix table of the multi-rate IR-QC-LDPC code.
//
// Returns, for the selected code rate, the whole M_MAX x N base matrix: for
// every block a valid flag (the block is a circulant, not the all-zero -1
// block) and its cyclic shift. Each entry is a four-way choice between
// constants worked out at elaboration by ldpc_pkg::hbase, so the block is
// purely combinational (a ROM addressed by the rate), with no clock.
//
// Block rows i >= m of the selected rate are marked invalid, so that the
// processors of a decoder sized for rate 1/2 simply idle them at higher rates.
// The construction (information shifts a^i * b^j mod z, dual-diagonal parity
// part) follows the mother matrix of the code; the numeric values of a, b, d
// and x are this design's choice (see ldpc_pkg).
module h_base
  import ldpc_pkg::*;
(
  input  rate_e   rate,
  output hentry_t h [M_MAX][N]
);

  for (genvar i = 0; i < M_MAX; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      localparam hentry_t E12 = hbase(12, i, j);
      localparam hentry_t E8  = hbase(8,  i, j);
      localparam hentry_t E6  = hbase(6,  i, j);
      localparam hentry_t E4  = hbase(4,  i, j);
      always_comb begin
        case (rate)
          RATE_1_2: h[i][j] = E12;
          RATE_2_3: h[i][j] = E8;
          RATE_3_4: h[i][j] = E6;
          default:  h[i][j] = E4;
        endcase
      end
    end
  end

endmodule
