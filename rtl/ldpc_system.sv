// ldpc_system -- multi-rate IR-QC-LDPC information reconciliation for QKD:
// key source, Alice's encoder and Bob's decoder on one chip.
//
// The key source produces Alice's sifted key and Bob's copy of it with a
// programmable fraction of bit errors. Alice's key goes through the encoder;
// its parity groups (the check message of the reconciliation) go to the
// decoder together with Bob's key, and the decoder corrects Bob's key towards
// Alice's. The global controller runs frames back to back at the code rate
// chosen on rate_in (1/2, 2/3, 3/4 or 5/6; 2/3 with z = 81 gives frames of
// 1296 key bits in 1944-bit codewords). This chaining is the one of the
// paper's FPGA test system.
//
// Ports: alice_key repeats Alice's key groups (as the reference a user of the
// reconciled key would compare with); dec_key carries Bob's corrected key,
// one z-bit group per clock, followed by dec_done with dec_success (the
// decision satisfies all parity checks) and dec_iters. err_count is the
// number of errors the key source injected into the current frame.
module ldpc_system
  import ldpc_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          run,
  input  rate_e         rate_in,
  input  logic [15:0]   ber_thr,
  input  logic [QW-2:0] llr_mag,
  input  logic [QW-2:0] par_mag,
  input  logic [3:0]    iter_max,
  output grp_t          alice_key,
  output logic [10:0]   err_count,
  output grp_t          dec_key,
  output logic          dec_last,
  output logic          dec_done,
  output logic          dec_success,
  output logic [3:0]    dec_iters,
  output logic [15:0]   frames
);

  rate_e rate;
  logic  key_en, enc_ready, dec_ready, p_last;
  grp_t  alice, bob, parity, dec_in;

  global_ctrl u_gctrl (
    .clk, .rst_n, .run, .rate_in, .enc_ready, .dec_ready, .p_last,
    .rate, .key_en, .frames
  );

  key_source u_keys (
    .clk, .rst_n, .en(key_en), .rate, .ber_thr, .alice, .bob, .err_count
  );

  ldpc_encode u_enc (
    .clk, .rst_n, .rate, .s_in(alice), .s_ready(enc_ready),
    .p_out(parity), .p_last
  );

  // Bob's key groups and Alice's parity groups never arrive in the same clock:
  // the parity follows the last key group.
  assign dec_in = bob.valid ? bob : parity;

  ldpc_decoder u_dec (
    .clk, .rst_n, .rate, .din(dec_in), .in_ready(dec_ready), .llr_mag,
    .par_mag, .iter_max, .dout(dec_key), .dout_last(dec_last),
    .done(dec_done), .success(dec_success), .iters(dec_iters)
  );

  assign alice_key = alice;

  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
    !(bob.valid && parity.valid));

endmodule
