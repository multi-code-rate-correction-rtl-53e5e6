// global_ctrl -- global controller of the reconciliation system.
//
// Runs frames through the chain key source -> encoder (Alice) and key source
// -> decoder (Bob): while run is high and both the encoder and the decoder's
// input buffer are ready, it latches the code rate for a new frame, enables
// the key source for the n-m information groups of the frame, then waits
// until the encoder has sent its last parity group to the decoder. Decoding
// of one frame overlaps the key generation and encoding of the next, since
// the decoder's input buffer is free once its Init-Array has been filled.
// The paper gives only the role of this controller; the sequencing here is
// this design's choice.
//
// Timing: key_en is high for n-m consecutive clocks per frame; frames
// counts the frames started.
module global_ctrl
  import ldpc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  input  rate_e       rate_in,
  input  logic        enc_ready,
  input  logic        dec_ready,
  input  logic        p_last,
  output rate_e       rate,
  output logic        key_en,
  output logic [15:0] frames
);

  typedef enum logic [1:0] {IDLE, KEY, PAR} state_e;

  state_e     state;
  logic [4:0] cnt;

  assign key_en = (state == KEY);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= IDLE;
      cnt    <= '0;
      rate   <= RATE_2_3;
      frames <= '0;
    end else begin
      case (state)
        IDLE: if (run && enc_ready && dec_ready) begin
          rate   <= rate_in;
          cnt    <= '0;
          frames <= frames + 1'b1;
          state  <= KEY;
        end
        KEY: begin
          if (32'(cnt) == N - rate_m(rate) - 1) state <= PAR;
          cnt <= cnt + 1'b1;
        end
        PAR: if (p_last) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

endmodule
