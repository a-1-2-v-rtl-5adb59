// tm_transpose_unit: the transpose unit of the transpose matrix (TM).
//
// An N x M register matrix. It is written one row of M bits at a time (the
// results of one record for all keys) and read one column of N bits at a
// time (the results of one key for all records), which turns the N x M buffer
// contents into the M x N bitmap index. Writes take effect at the clock edge;
// the column read is combinational. Reset clears the matrix (own choice).
module tm_transpose_unit #(
  parameter int unsigned ROWS = bic_pkg::DEF_RECORDS,  // N
  parameter int unsigned COLS = bic_pkg::DEF_KEYS,     // M
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            wr_en,
  input  logic [RW-1:0]   wr_row,
  input  logic [COLS-1:0] wr_data,
  input  logic [CW-1:0]   col_sel,
  output logic [ROWS-1:0] col_data
);
  logic [COLS-1:0] mat [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned r = 0; r < ROWS; r++) mat[r] <= '0;
    end else if (wr_en) begin
      mat[wr_row] <= wr_data;
    end
  end

  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++) col_data[r] = mat[r][col_sel];
  end
endmodule
