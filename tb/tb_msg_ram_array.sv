// tb_msg_ram_array -- fills a 2 x 3 array of 81-word RAMs, with every RAM
// written only where its enable is set, and reads them back at independent
// random addresses, checking the one-clock read latency and that a read of a
// word being written returns the old word.
module tb_msg_ram_array;
  localparam int R = 2, C = 3, D = 81, W = 8;

  logic         clk = 1'b0;
  logic         we      [R][C];
  logic [6:0]   wr_addr;
  logic [W-1:0] wr_data [R][C];
  logic [6:0]   rd_addr [R][C];
  logic [W-1:0] rd_data [R][C];
  logic [W-1:0] model [R][C][D];
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  msg_ram_array #(.ROWS(R), .COLS(C), .DEPTH(D), .W(W)) dut (
    .clk, .we, .wr_addr, .wr_data, .rd_addr, .rd_data
  );

  task automatic idle();
    for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) we[i][j] = 1'b0;
  endtask

  initial begin
    idle();
    // fill everything
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_addr = 7'(a);
      for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) begin
        we[i][j] = 1'b1;
        wr_data[i][j] = W'($urandom);
        model[i][j][a] = wr_data[i][j];
      end
    end
    @(negedge clk);
    idle();
    // partial writes while reading at random addresses
    for (int t = 0; t < 400; t++) begin
      logic [W-1:0] exp_d [R][C];
      @(negedge clk);
      wr_addr = 7'($urandom_range(0, D - 1));
      for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) begin
        we[i][j]      = $urandom_range(0, 1) == 1;
        wr_data[i][j] = W'($urandom);
        rd_addr[i][j] = (t % 7 == 0) ? wr_addr : 7'($urandom_range(0, D - 1));
        exp_d[i][j]   = model[i][j][rd_addr[i][j]];
      end
      @(posedge clk);
      for (int i = 0; i < R; i++) for (int j = 0; j < C; j++)
        if (we[i][j]) model[i][j][wr_addr] = wr_data[i][j];
      #1;
      for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) begin
        checks++;
        if (rd_data[i][j] !== exp_d[i][j]) begin
          failures++;
          if (failures < 10) $display("t=%0d RAM(%0d,%0d): got %h expected %h", t, i, j, rd_data[i][j], exp_d[i][j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
