// ldpc_pkg -- shared constants, types and functions of the multi-rate
// IR-QC-LDPC encoder / decoder.
//
// The code family has n = 24 block columns of z x z circulants (z = 81, so
// a codeword is 1944 bits) and m = 12, 8, 6 or 4 block rows, giving the code
// rates 1/2, 2/3, 3/4 and 5/6. The information part of the base matrix holds
// the shift a^i * b^j mod z in every block (all blocks are circulants); the
// parity part is the dual-diagonal structure whose first column carries the
// shift d in the top and bottom block rows and an identity in block row x.
// The values a = 2, b = 5, d = 1 and x = m/2 are this design's own choice;
// a and b were picked among small primes as the pair giving the fewest
// length-4 cycles for z = 81.
//
// Shift convention: a circulant with shift h maps a z-bit vector v to
// w[r] = v[(r + h) mod z], i.e. check row r of the block is connected to
// variable column (r + h) mod z.
//
// Messages are 8-bit. Channel and variable-to-check messages are kept in
// sign-magnitude form (bit 7 = sign, 1 = negative, i.e. likely a '1' bit);
// the variable-node adders work in two's complement, and c2s / s2c convert
// between the two. A positive log-likelihood ratio means bit value 0.
package ldpc_pkg;

  // Sizes of the mother code.
  localparam int unsigned Z      = 81;   // expansion factor
  localparam int unsigned N      = 24;   // block columns
  localparam int unsigned M_MAX  = 12;   // block rows at rate 1/2
  localparam int unsigned ZW     = $clog2(Z);       // 7
  localparam int unsigned QW     = 8;    // message quantisation
  localparam int unsigned ITER_MAX_DEF = 10;

  // Base-matrix construction constants (this design's choice).
  localparam int unsigned H_A = 2;
  localparam int unsigned H_B = 5;
  localparam int unsigned H_D = 1;

  // Normalisation factor alpha = ALPHA_NUM / 2^ALPHA_SH ~ 0.4.
  localparam int unsigned ALPHA_NUM = 102;
  localparam int unsigned ALPHA_SH  = 8;

  typedef enum logic [1:0] {
    RATE_1_2 = 2'd0,   // m = 12
    RATE_2_3 = 2'd1,   // m = 8  (main configuration)
    RATE_3_4 = 2'd2,   // m = 6
    RATE_5_6 = 2'd3    // m = 4
  } rate_e;

  typedef logic [QW-1:0] msg_t;      // one sign-magnitude message
  typedef logic [Z-1:0]  zvec_t;     // one z-bit sub-block of a codeword

  // One entry of the base matrix: present (non -1) and its shift.
  typedef struct packed {
    logic          valid;
    logic [ZW-1:0] shift;
  } hentry_t;

  // One z-bit group on a frame stream: which group and its bits.
  typedef struct packed {
    logic                   valid;
    logic [$clog2(N)-1:0]   idx;
    zvec_t                  data;
  } grp_t;

  function automatic int unsigned rate_m(rate_e r);
    case (r)
      RATE_1_2: return 12;
      RATE_2_3: return 8;
      RATE_3_4: return 6;
      default:  return 4;
    endcase
  endfunction

  // Base-matrix entry (block row i, block column j) for a code with m block
  // rows. Information columns j < N-m: shift a^i * b^j mod z. Parity columns:
  // dual-diagonal part of the mother matrix.
  function automatic hentry_t hbase(int unsigned m, int unsigned i, int unsigned j);
    hentry_t e;
    int unsigned v;
    int unsigned jp;
    int unsigned x;
    e = '0;
    x = m / 2;
    if (i >= m) return e;
    if (j < N - m) begin
      v = 1;
      for (int unsigned t = 0; t < i; t++) v = (v * H_A) % Z;
      for (int unsigned t = 0; t < j; t++) v = (v * H_B) % Z;
      e.valid = 1'b1;
      e.shift = ZW'(v);
    end else begin
      jp = j - (N - m);
      if (jp == 0) begin
        if (i == 0 || i == m - 1) begin
          e.valid = 1'b1;
          e.shift = ZW'(H_D);
        end else if (i == x) begin
          e.valid = 1'b1;
          e.shift = '0;
        end
      end else if (i == jp - 1 || i == jp) begin
        e.valid = 1'b1;
        e.shift = '0;
      end
    end
    return e;
  endfunction

  // Circulant product: w[r] = v[(r + h) mod z].
  function automatic zvec_t circ(zvec_t v, logic [ZW-1:0] h);
    zvec_t w;
    int unsigned s;
    for (int unsigned r = 0; r < Z; r++) begin
      s = r + int'(h);
      if (s >= Z) s = s - Z;
      w[r] = v[s];
    end
    return w;
  endfunction

  // Two's complement (saturated to +-127) to sign-magnitude.
  function automatic msg_t c2s(logic signed [QW-1:0] v);
    msg_t o;
    if (v < 0) begin
      o[QW-1]   = 1'b1;
      o[QW-2:0] = (v == -128) ? 7'd127 : 7'(-v);
    end else begin
      o = {1'b0, v[QW-2:0]};
    end
    return o;
  endfunction

  // Sign-magnitude to two's complement.
  function automatic logic signed [QW-1:0] s2c(msg_t v);
    logic signed [QW-1:0] mag;
    mag = $signed({1'b0, v[QW-2:0]});
    return v[QW-1] ? -mag : mag;
  endfunction

endpackage
