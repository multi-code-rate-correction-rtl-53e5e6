// msg_ram_array -- a ROWS x COLS array of small message RAMs.
//
// Each RAM is DEPTH words of W bits (z = 81 words of 8 bits by default) with
// one write port and one synchronous read port, the shape of a block RAM. All
// RAMs of the array are written at the same address in the same clock (the
// decoder updates node k of every block at once), each with its own data and
// enable; each RAM has its own read address, because the address convert
// unit gives every block a different rotated address.
//
// The decoder uses three such arrays, as the paper arranges its memory: the
// Init-Array (1 x n, channel messages), the C2V-Array and the V2C-Array
// (m x n each, one RAM per base-matrix block). RAM (i, j) is RAM number
// i*COLS + j.
//
// Timing: rd_data is the word at rd_addr of the previous clock. A read and a
// write of the same word in one clock return the old word.
module msg_ram_array #(
  parameter int unsigned ROWS  = 12,
  parameter int unsigned COLS  = 24,
  parameter int unsigned DEPTH = 81,
  parameter int unsigned W     = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we      [ROWS][COLS],
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data [ROWS][COLS],
  input  logic [AW-1:0] rd_addr [ROWS][COLS],
  output logic [W-1:0]  rd_data [ROWS][COLS]
);

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      logic [W-1:0] mem [DEPTH];
      always_ff @(posedge clk) begin
        if (we[i][j]) mem[wr_addr] <= wr_data[i][j];
        rd_data[i][j] <= mem[rd_addr[i][j]];
      end
    end
  end

endmodule
