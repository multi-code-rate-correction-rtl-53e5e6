// decode_judge -- decoding decision unit.
//
// Holds the hard decision of every codeword bit (n x z flip-flops), written
// by the variable-node processor as it computes the posteriors: bit (j,k) is
// 1 when Q(j,k) < 0 (paper Eq. 17). On a chk pulse it checks the whole
// decision against H * x = 0 (paper Eq. 1) in one clock: every check of every
// present block row is the XOR, over the block columns, of the decision
// vector rotated by the block's shift. The result, syn_ok, is valid with
// chk_done one clock later. After decoding, an emit pulse streams the n_info
// decoded key groups out on dout, one z-bit group per clock, the first two
// clocks after emit, with dout_last on the last one.
//
// The fully parallel check (one XOR tree per check node) is this design's
// choice; the paper says only that the decision is checked against Eq. 1.
module decode_judge
  import ldpc_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  hentry_t       h [M_MAX][N],
  // hard decisions from the variable-node processor
  input  logic          vn_valid,
  input  logic [ZW-1:0] vn_k,
  input  logic [N-1:0]  vn_hard,
  // parity check
  input  logic          chk,
  output logic          chk_done,
  output logic          syn_ok,
  // read-out of the decoded key
  input  logic          emit,
  input  logic [4:0]    n_info,
  output grp_t          dout,
  output logic          dout_last
);

  zvec_t      hd [N];
  logic       all_zero;
  logic       emitting;
  logic [4:0] oidx;

  // Every block contributes its rotated decision vector to its block row.
  zvec_t        rot [M_MAX][N];
  logic [M_MAX-1:0] row_bad;

  for (genvar i = 0; i < M_MAX; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      assign rot[i][j] = h[i][j].valid ? circ(hd[j], h[i][j].shift) : '0;
    end
    always_comb begin
      zvec_t syn;
      syn = '0;
      for (int unsigned j = 0; j < N; j++) syn ^= rot[i][j];
      row_bad[i] = (syn != '0);
    end
  end

  assign all_zero = (row_bad == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned j = 0; j < N; j++) hd[j] <= '0;
      chk_done  <= 1'b0;
      syn_ok    <= 1'b0;
      emitting  <= 1'b0;
      oidx      <= '0;
      dout      <= '0;
      dout_last <= 1'b0;
    end else begin
      if (vn_valid)
        for (int unsigned j = 0; j < N; j++) hd[j][vn_k] <= vn_hard[j];
      chk_done <= chk;
      if (chk) syn_ok <= all_zero;
      dout.valid <= 1'b0;
      dout_last  <= 1'b0;
      if (emit) begin
        emitting <= 1'b1;
        oidx     <= '0;
      end else if (emitting) begin
        dout      <= '{valid: 1'b1, idx: oidx, data: hd[oidx]};
        dout_last <= (oidx == n_info - 1'b1);
        if (oidx == n_info - 1'b1) emitting <= 1'b0;
        oidx <= oidx + 1'b1;
      end
    end
  end

endmodule
