// data_load -- input message unit of the decoder.
//
// Collects one frame for Bob: his n-m sifted-key groups and the m parity
// groups received from Alice (the "check message"), z bits each, in any order
// and at most one per clock, into an n x z bit frame buffer. When all n groups
// are in and the decoder is free (dec_idle), it fills the Init-Array in z
// clocks: at step k it writes, for all n block columns at once, the channel
// message of bit k of group j, initialised as in the paper with one
// sign-magnitude 8-bit word per bit:
//   L0(j,k) = {x(j,k), llr_mag}  for key bits (j < n-m, noisy channel)
//   L0(j,k) = {x(j,k), par_mag}  for parity bits (j >= n-m)
// so bit value 0 gives a positive message. Giving Alice's parity its own
// (large) magnitude reflects that it arrives error-free over the authenticated
// channel. Both magnitudes are run-time inputs, which is this design's
// choice; a natural setting for the key bits is log((1-e)/e), scaled to the
// 8-bit range, for a key error probability e.
//
// Timing: in_ready is high while the buffer accepts groups. The code rate is
// sampled with the first group of a frame and held on frame_rate. After the
// n-th group and dec_idle, init_we is high for z consecutive clocks with
// init_addr = 0 .. z-1; load_done pulses in the clock after the last write.
// The buffer accepts the next frame as soon as the transfer has ended, so
// loading overlaps decoding.
module data_load
  import ldpc_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  rate_e         rate,
  input  grp_t          din,
  output logic          in_ready,
  input  logic [QW-2:0] llr_mag,
  input  logic [QW-2:0] par_mag,
  input  logic          dec_idle,
  output rate_e         frame_rate,
  output logic          init_we,
  output logic [ZW-1:0] init_addr,
  output msg_t          init_data [N],
  output logic          load_done
);

  typedef enum logic [1:0] {FILL, XFER} state_e;

  state_e        state;
  zvec_t         buf_q [N];
  logic [N-1:0]  got;
  logic [ZW-1:0] k;
  int unsigned   n_info;

  assign in_ready = (state == FILL) && !(&got);
  assign n_info   = N - rate_m(frame_rate);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= FILL;
      got        <= '0;
      k          <= '0;
      frame_rate <= RATE_2_3;
      load_done  <= 1'b0;
      for (int unsigned j = 0; j < N; j++) buf_q[j] <= '0;
    end else begin
      load_done <= 1'b0;
      case (state)
        FILL: begin
          if (din.valid && in_ready) begin
            buf_q[din.idx] <= din.data;
            got[din.idx]   <= 1'b1;
            if (got == '0) frame_rate <= rate;
          end
          if ((&got) && dec_idle) begin
            state <= XFER;
            k     <= '0;
          end
        end
        XFER: begin
          if (32'(k) == Z - 1) begin
            state     <= FILL;
            got       <= '0;
            load_done <= 1'b1;
          end else begin
            k <= k + 1'b1;
          end
        end
        default: state <= FILL;
      endcase
    end
  end

  assign init_we   = (state == XFER);
  assign init_addr = k;
  always_comb begin
    for (int unsigned j = 0; j < N; j++)
      init_data[j] = {buf_q[j][k], (j < n_info) ? llr_mag : par_mag};
  end

  // A group is only offered while the buffer can take it.
  a_accept: assert property (@(posedge clk) disable iff (!rst_n)
    din.valid |-> in_ready);

endmodule
