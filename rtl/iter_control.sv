// iter_control -- iteration controller of the decoder.
//
// Sequences one decoding: after the Init-Array has been filled (load_done) it
// runs a variable-node phase (with the C2V-Array cleared this gives V2C = L0
// and the hard decision of the raw key), then the parity check. While the
// check fails and fewer than iter_max iterations have run, it runs one
// iteration, a check-node phase followed by a variable-node phase, and checks
// again. It then has the decoded key streamed out and reports the outcome.
// The flooding schedule and the stop rule (check satisfied, or Iter_max
// iterations, 10 in the paper) follow the paper; the phase timing is this
// design's own.
//
// A phase issues the node index k = 0 .. z-1 on consecutive clocks
// (cn_issue or vn_issue high). With the one-clock RAM read and the one-clock
// processor register, the last result is written z+1 clocks after the first
// issue, so a phase lasts z+2 clocks. The check takes 3 clocks (request,
// result, decision), so an iteration lasts 2z+7 = 169 clocks at z = 81.
//
// Outputs: dec_idle while no frame is being decoded; done pulses with success
// (check satisfied) and iters (iterations used) when the last decoded group
// has been sent.
module iter_control
  import ldpc_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic [3:0]    iter_max,
  input  logic          load_done,
  input  logic          chk_done,
  input  logic          syn_ok,
  input  logic          out_last,
  output logic          dec_idle,
  output logic          cn_issue,
  output logic          vn_issue,
  output logic [ZW-1:0] k,
  output logic          chk,
  output logic          emit,
  output logic          done,
  output logic          success,
  output logic [3:0]    iters
);

  typedef enum logic [2:0] {IDLE, VN, CN, CHK, OUT} state_e;

  state_e       state;
  logic [ZW:0]  cnt;        // clock within a phase, 0 .. z+1
  logic         chk_sent;

  assign dec_idle = (state == IDLE);
  assign cn_issue = (state == CN) && (32'(cnt) < Z);
  assign vn_issue = (state == VN) && (32'(cnt) < Z);
  assign k        = cnt[ZW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      cnt      <= '0;
      chk      <= 1'b0;
      chk_sent <= 1'b0;
      emit     <= 1'b0;
      done     <= 1'b0;
      success  <= 1'b0;
      iters    <= '0;
    end else begin
      chk  <= 1'b0;
      emit <= 1'b0;
      done <= 1'b0;
      case (state)
        IDLE: if (load_done) begin
          state <= VN;
          cnt   <= '0;
          iters <= '0;
        end
        CN, VN: begin
          if (32'(cnt) == Z + 1) begin
            cnt <= '0;
            if (state == CN) begin
              state <= VN;
            end else begin
              state    <= CHK;
              chk_sent <= 1'b0;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        CHK: begin
          if (!chk_sent) begin
            chk      <= 1'b1;
            chk_sent <= 1'b1;
          end else if (chk_done) begin
            if (syn_ok || iters == iter_max) begin
              success <= syn_ok;
              emit    <= 1'b1;
              state   <= OUT;
            end else begin
              iters <= iters + 1'b1;
              state <= CN;
              cnt   <= '0;
            end
          end
        end
        OUT: if (out_last) begin
          done  <= 1'b1;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
