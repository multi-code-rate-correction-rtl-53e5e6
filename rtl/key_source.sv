// key_source -- test key generator: Alice's and Bob's sifted keys with a
// programmable fraction of discrepancies.
//
// Stands in for the sifted-key output of a QKD link. When enabled it emits one
// z-bit group per clock on both outputs, with group index 0 .. n-m-1 cycling
// for the selected code rate. Bob's group is Alice's group XOR an error
// pattern in which each bit is set with probability ber_thr / 2^16.
//
// Insides (this design's choice; the paper only names the block and what it
// produces): every bit lane k of the group has its own 32-bit xorshift
// generator, seeded from SEED and k. Per clock each lane steps once; bit 31
// of the new state is Alice's key bit and the low 16 bits, compared with
// ber_thr, decide whether Bob's copy of the bit is flipped. err_count counts
// the flipped bits of the current frame (cleared at group 0).
module key_source
  import ldpc_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,          // emit one group this clock
  input  rate_e       rate,
  input  logic [15:0] ber_thr,     // error probability * 2^16
  output grp_t        alice,
  output grp_t        bob,
  output logic [10:0] err_count    // errors injected in this frame so far
);

  logic [31:0] st [Z];
  logic [31:0] nx [Z];
  logic [4:0]  idx;
  zvec_t       key_bits, err_bits;

  function automatic logic [31:0] xs32(logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  function automatic logic [31:0] seed_of(int unsigned k);
    logic [31:0] s;
    s = SEED ^ (32'(k) * 32'h9E37_79B9);
    s = xs32(xs32(s | 32'h1));
    return (s == 0) ? 32'h1 : s;
  endfunction

  always_comb begin
    for (int unsigned k = 0; k < Z; k++) begin
      nx[k]       = xs32(st[k]);
      key_bits[k] = nx[k][31];
      err_bits[k] = (nx[k][15:0] < ber_thr);
    end
  end

  int unsigned err_now;
  always_comb begin
    err_now = 0;
    for (int unsigned k = 0; k < Z; k++) err_now += 32'(err_bits[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned k = 0; k < Z; k++) st[k] <= seed_of(k);
      idx       <= '0;
      alice     <= '0;
      bob       <= '0;
      err_count <= '0;
    end else begin
      alice.valid <= 1'b0;
      bob.valid   <= 1'b0;
      if (en) begin
        for (int unsigned k = 0; k < Z; k++) st[k] <= nx[k];
        alice <= '{valid: 1'b1, idx: idx, data: key_bits};
        bob   <= '{valid: 1'b1, idx: idx, data: key_bits ^ err_bits};
        err_count <= (idx == 0) ? 11'(err_now) : err_count + 11'(err_now);
        idx <= (32'(idx) == N - rate_m(rate) - 1) ? '0 : idx + 1'b1;
      end
    end
  end

endmodule
