// ldpc_encode -- recursive-accumulate encoder for the dual-diagonal
// IR-QC-LDPC code (Alice's side).
//
// Information groups s_j (z bits each, j = 0 .. n-m-1) arrive one per clock on
// s_in. On every arriving group, all m block rows are updated at once:
// lambda_i ^= H_{i,j} * s_j, where the circulant product is a cyclic rotation
// by the block's shift. After the last information group the parity groups are
// produced, one per clock, on p_out (idx = n-m+i):
//   p_0     = XOR of all lambda_i                        (sum of all rows)
//   p_1     = lambda_0 ^ P^d p_0                         (block row 0)
//   p_{i+1} = lambda_i ^ p_i            for i != 0, x    (block rows 1..m-2)
//   p_{x+1} = lambda_x ^ p_x ^ p_0                       (block row x)
// Block row m-1 (lambda_{m-1} ^ P^d p_0 ^ p_{m-1} = 0) then holds by
// construction. The row accumulation and the one-parity-group-per-clock
// recursion follow the paper; the group-per-clock input width is this
// design's choice.
//
// Timing: the code rate is sampled with the first information group of a
// frame. A frame of n-m information groups is followed, one clock later, by m
// consecutive parity groups; s_ready is low from the last information group
// until the last parity group has been sent. Groups must arrive in index
// order; gaps between them are allowed.
module ldpc_encode
  import ldpc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  rate_e rate,      // sampled with the first group of a frame
  input  grp_t  s_in,      // information group, idx = j
  output logic  s_ready,
  output grp_t  p_out,     // parity group, idx = n-m+i
  output logic  p_last     // with the last parity group of the frame
);

  typedef enum logic [1:0] {ACC, PAR} state_e;

  state_e        state;
  rate_e         rate_q;
  rate_e         rate_eff;
  logic [4:0]    cnt;         // groups received / parity groups sent
  zvec_t         lambda [M_MAX];
  zvec_t         p0_q, pprev_q;
  hentry_t       h [M_MAX][N];
  int unsigned   m_eff, x_eff;

  assign rate_eff = (state == ACC && cnt == 0) ? rate : rate_q;
  assign m_eff    = rate_m(rate_eff);
  assign x_eff    = m_eff / 2;
  assign s_ready  = (state == ACC);

  h_base u_h (.rate(rate_eff), .h(h));

  // Sum of all rows, used for p_0.
  zvec_t lam_sum;
  always_comb begin
    lam_sum = '0;
    for (int unsigned i = 0; i < M_MAX; i++)
      if (i < m_eff) lam_sum ^= lambda[i];
  end

  // Next parity group of the recursion.
  zvec_t p_next;
  always_comb begin
    p_next = '0;
    if (cnt == 0) begin
      p_next = lam_sum;
    end else if (cnt == 1) begin
      p_next = lambda[0] ^ circ(p0_q, ZW'(H_D));
    end else begin
      p_next = lambda[cnt-1] ^ pprev_q;
      if (32'(cnt - 1) == x_eff) p_next ^= p0_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= ACC;
      rate_q  <= RATE_2_3;
      cnt     <= '0;
      p0_q    <= '0;
      pprev_q <= '0;
      p_out   <= '0;
      p_last  <= 1'b0;
      for (int unsigned i = 0; i < M_MAX; i++) lambda[i] <= '0;
    end else begin
      p_out.valid <= 1'b0;
      p_last      <= 1'b0;
      case (state)
        ACC: if (s_in.valid) begin
          if (cnt == 0) rate_q <= rate;
          for (int unsigned i = 0; i < M_MAX; i++)
            if (h[i][s_in.idx].valid)
              lambda[i] <= lambda[i] ^ circ(s_in.data, h[i][s_in.idx].shift);
          if (32'(cnt) == N - m_eff - 1) begin
            cnt   <= '0;
            state <= PAR;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        PAR: begin
          p_out.valid <= 1'b1;
          p_out.idx   <= 5'(N - m_eff + 32'(cnt));
          p_out.data  <= p_next;
          pprev_q     <= p_next;
          if (cnt == 0) p0_q <= p_next;
          if (32'(cnt) == m_eff - 1) begin
            p_last <= 1'b1;
            cnt    <= '0;
            state  <= ACC;
            for (int unsigned i = 0; i < M_MAX; i++) lambda[i] <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= ACC;
      endcase
    end
  end

  // Information groups arrive in index order.
  a_in_order: assert property (@(posedge clk) disable iff (!rst_n)
    (s_in.valid && state == ACC) |-> (32'(s_in.idx) == 32'(cnt)));
  // No information group while parity is being produced.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    s_in.valid |-> s_ready);

endmodule
