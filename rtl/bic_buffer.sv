// bic_buffer: the N x M match-bit buffer between the CAM and the transpose matrix.
//
// Row j holds the results of record j, bit k the result of key k: 1 when
// record j contains key k. Each CAM result is written as a single bit, one per
// clock, so a row fills up key by key. A separate read port returns a whole
// row, registered, one clock after rd_en; reads and writes can happen in the
// same clock, like the dual-port RAM the paper describes. The default 16 x 8
// buffer is the 128 bits given for the chip. The array is reset to zero (own
// choice).
module bic_buffer #(
  parameter int unsigned ROWS = bic_pkg::DEF_RECORDS,  // N
  parameter int unsigned COLS = bic_pkg::DEF_KEYS,     // M
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            wr_en,
  input  logic [RW-1:0]   wr_row,
  input  logic [CW-1:0]   wr_col,
  input  logic            wr_bit,
  input  logic            rd_en,
  input  logic [RW-1:0]   rd_row,
  output logic [COLS-1:0] rd_data
);
  logic [COLS-1:0] mem [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned r = 0; r < ROWS; r++) mem[r] <= '0;
    end else if (wr_en) begin
      mem[wr_row][wr_col] <= wr_bit;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_data <= '0;
    else if (rd_en) rd_data <= mem[rd_row];
  end
endmodule
