// ldpc_decoder -- layered-RAM normalized min-sum decoder for the multi-rate
// IR-QC-LDPC code (Bob's side).
//
// Structure, as in the paper's overall architecture: an input message unit
// (data_load) fills the Init-Array with one 8-bit channel message per
// codeword bit; two RAM arrays with one z-word RAM per base-matrix block hold
// the check-to-variable (C2V-Array) and variable-to-check (V2C-Array)
// messages; a check-node processor (cnu_process) and a variable-node
// processor (vnu_process) each update one node index k of every block per
// clock, reading through the address convert unit (addr_convt); the decoding
// decision unit (decode_judge) keeps the hard decisions and checks them
// against H; the iteration controller (iter_control) runs the phases.
//
// The arrays are sized for the largest base matrix (m = 12 block rows, code
// rate 1/2). The code rate of a frame is chosen at run time; blocks that are
// -1 in the selected base matrix simply sit idle, so one decoder serves the
// rates 1/2, 2/3, 3/4 and 5/6.
//
// Interface: frame groups (Bob's key groups idx 0..n-m-1, Alice's parity
// groups idx n-m..n-1) enter on din while in_ready is high; rate is sampled
// with the first group. llr_mag / par_mag set the channel-message magnitudes
// and iter_max the iteration limit. The decoded key leaves on dout, one group
// per clock, followed by a done pulse with success and iters.
//
// Timing: z clocks to fill the Init-Array, z+2 clocks for the first
// variable-node phase, 3 clocks per check, 2z+7 clocks per further iteration
// and n-m+2 clocks of output. From the last input group to done it takes
// 2z + 8 + (2z+7) * iterations + (n-m) clocks: 186 + 169 * iterations at
// rate 2/3 and z = 81. The next frame can be loaded while one is decoded.
module ldpc_decoder
  import ldpc_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  rate_e         rate,
  input  grp_t          din,
  output logic          in_ready,
  input  logic [QW-2:0] llr_mag,
  input  logic [QW-2:0] par_mag,
  input  logic [3:0]    iter_max,
  output grp_t          dout,
  output logic          dout_last,
  output logic          done,
  output logic          success,
  output logic [3:0]    iters
);

  // ---------------------------------------------------------------- control
  rate_e         frame_rate, dec_rate;
  logic          dec_idle, load_done;
  logic          init_we;
  logic [ZW-1:0] init_addr;
  msg_t          init_data [N];
  logic          cn_issue, vn_issue, chk, chk_done, syn_ok, emit;
  logic [ZW-1:0] k;
  logic          cn_issue_q, vn_issue_q;
  logic [ZW-1:0] k_q;
  hentry_t       h [M_MAX][N];

  data_load u_load (
    .clk, .rst_n, .rate, .din, .in_ready, .llr_mag, .par_mag,
    .dec_idle, .frame_rate, .init_we, .init_addr, .init_data, .load_done
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dec_rate   <= RATE_2_3;
      cn_issue_q <= 1'b0;
      vn_issue_q <= 1'b0;
      k_q        <= '0;
    end else begin
      if (init_we && init_addr == '0) dec_rate <= frame_rate;
      cn_issue_q <= cn_issue;
      vn_issue_q <= vn_issue;
      k_q        <= k;
    end
  end

  h_base u_h (.rate(dec_rate), .h(h));

  iter_control u_ctrl (
    .clk, .rst_n, .iter_max, .load_done, .chk_done, .syn_ok,
    .out_last(dout_last), .dec_idle, .cn_issue, .vn_issue, .k, .chk, .emit,
    .done, .success, .iters
  );

  // ------------------------------------------------------- address convert
  logic [ZW-1:0] c2v_raddr [M_MAX][N];
  logic [ZW-1:0] v2c_raddr [M_MAX][N];

  addr_convt u_addr (.k, .h, .c2v_addr(c2v_raddr), .v2c_addr(v2c_raddr));

  // ------------------------------------------------------------ Init-Array
  logic          ini_we    [1][N];
  msg_t          ini_wdata [1][N];
  logic [ZW-1:0] ini_raddr [1][N];
  msg_t          ini_rdata [1][N];
  msg_t          l0 [N];

  always_comb begin
    for (int unsigned j = 0; j < N; j++) begin
      ini_we[0][j]    = init_we;
      ini_wdata[0][j] = init_data[j];
      ini_raddr[0][j] = k;
      l0[j]           = ini_rdata[0][j];
    end
  end

  msg_ram_array #(.ROWS(1), .COLS(N), .DEPTH(Z), .W(QW)) u_init_array (
    .clk, .we(ini_we), .wr_addr(init_addr), .wr_data(ini_wdata),
    .rd_addr(ini_raddr), .rd_data(ini_rdata)
  );

  // ------------------------------------------------------ C2V / V2C arrays
  logic          cn_valid, vn_valid;
  logic [ZW-1:0] cn_k, vn_k;
  msg_t          cn_out [M_MAX][N];
  msg_t          vn_out [M_MAX][N];
  logic [N-1:0]  vn_hard;
  msg_t          c2v_rd [M_MAX][N];
  msg_t          v2c_rd [M_MAX][N];

  logic          c2v_we    [M_MAX][N];
  msg_t          c2v_wdata [M_MAX][N];
  logic [ZW-1:0] c2v_waddr;
  logic          v2c_we    [M_MAX][N];

  // The C2V-Array is cleared while the Init-Array is filled, so that the
  // first variable-node phase passes the channel messages on unchanged.
  always_comb begin
    c2v_waddr = init_we ? init_addr : cn_k;
    for (int unsigned i = 0; i < M_MAX; i++)
      for (int unsigned j = 0; j < N; j++) begin
        c2v_we[i][j]    = init_we | cn_valid;
        c2v_wdata[i][j] = init_we ? '0 : cn_out[i][j];
        v2c_we[i][j]    = vn_valid;
      end
  end

  msg_ram_array #(.ROWS(M_MAX), .COLS(N), .DEPTH(Z), .W(QW)) u_c2v_array (
    .clk, .we(c2v_we), .wr_addr(c2v_waddr), .wr_data(c2v_wdata),
    .rd_addr(c2v_raddr), .rd_data(c2v_rd)
  );

  msg_ram_array #(.ROWS(M_MAX), .COLS(N), .DEPTH(Z), .W(QW)) u_v2c_array (
    .clk, .we(v2c_we), .wr_addr(vn_k), .wr_data(vn_out),
    .rd_addr(v2c_raddr), .rd_data(v2c_rd)
  );

  // ------------------------------------------------------------ processors
  cnu_process u_cnu (
    .clk, .rst_n, .in_valid(cn_issue_q), .k_in(k_q), .h, .v2c(v2c_rd),
    .out_valid(cn_valid), .k_out(cn_k), .c2v(cn_out)
  );

  vnu_process u_vnu (
    .clk, .rst_n, .in_valid(vn_issue_q), .k_in(k_q), .h, .l0, .c2v(c2v_rd),
    .out_valid(vn_valid), .k_out(vn_k), .v2c(vn_out), .hard(vn_hard)
  );

  decode_judge u_judge (
    .clk, .rst_n, .h, .vn_valid, .vn_k, .vn_hard, .chk, .chk_done, .syn_ok,
    .emit, .n_info(5'(N - rate_m(dec_rate))), .dout, .dout_last
  );

  // The Init-Array is only refilled while the decoder is idle.
  a_init_idle: assert property (@(posedge clk) disable iff (!rst_n)
    init_we |-> dec_idle);

endmodule
