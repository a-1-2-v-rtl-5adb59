// cam_block: one CAM block (CB), WORDS words of WORD_W bits.
//
// The block is built the way a binary CAM is mapped onto a RAM: the RAM is
// addressed by a data value (2**WORD_W rows) and each row holds one bit per CAM
// word (WORDS columns). Bit [v][w] is 1 when CAM word w holds the value v, so
// an 8-bit CAM word costs 256 RAM bits, 32 per CAM bit, and the default block
// is 256 x 32 = 8,192 bits, the figure given for the chip. A search reads the
// row addressed by the key; the key is present in the record when any bit of
// that row is 1.
//
// Writing word w with value v clears column w in every row and sets bit [v][w],
// all in one clock. This is possible because the array is made of registers
// (as on the chip); it is this design's own way of overwriting the previous
// record, the paper does not say how old contents are removed.
//
// Interface and timing:
//   wr_en/wr_col/wr_data : write word wr_col of the record, takes effect at the edge.
//   rd_en/rd_key         : search; rd_match is registered and valid the next clock
//                          (it reflects the array before any write in the same cycle).
//   rst_n                : asynchronous, active low; clears the array and rd_match.
module cam_block #(
  parameter int unsigned WORDS  = bic_pkg::DEF_CB_WORDS,
  parameter int unsigned WORD_W = bic_pkg::DEF_WORD_W,
  localparam int unsigned CW    = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [CW-1:0]     wr_col,
  input  logic [WORD_W-1:0] wr_data,
  input  logic              rd_en,
  input  logic [WORD_W-1:0] rd_key,
  output logic              rd_match
);
  localparam int unsigned ROWS = 2 ** WORD_W;

  logic [WORDS-1:0] mem [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned r = 0; r < ROWS; r++) mem[r] <= '0;
    end else if (wr_en) begin
      for (int unsigned r = 0; r < ROWS; r++)
        mem[r][wr_col] <= (wr_data == WORD_W'(r));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_match <= 1'b0;
    else if (rd_en) rd_match <= |mem[rd_key];
  end
endmodule
