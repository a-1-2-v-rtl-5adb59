// cam: the content-addressable memory of a BIC core.
//
// NUM_CB CAM blocks of CB_WORDS words side by side hold one record of
// NUM_CB*CB_WORDS words. Word address a goes to block a / CB_WORDS, column
// a % CB_WORDS. A key is searched in all blocks at once; match is the OR of the
// blocks' results and, like theirs, arrives one clock after rd_en, as the paper
// states for its CAM. The chip uses a single block (NUM_CB = 1).
//
// Interface: wr_en/wr_addr/wr_data write one record word per clock;
// rd_en/rd_key start a search; match is valid the clock after rd_en.
module cam #(
  parameter int unsigned NUM_CB   = bic_pkg::DEF_NUM_CB,
  parameter int unsigned CB_WORDS = bic_pkg::DEF_CB_WORDS,
  parameter int unsigned WORD_W   = bic_pkg::DEF_WORD_W,
  localparam int unsigned WORDS   = NUM_CB * CB_WORDS,
  localparam int unsigned AW      = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned CW      = (CB_WORDS > 1) ? $clog2(CB_WORDS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [WORD_W-1:0] wr_data,
  input  logic              rd_en,
  input  logic [WORD_W-1:0] rd_key,
  output logic              match
);
  logic [NUM_CB-1:0] cb_match;

  for (genvar b = 0; b < NUM_CB; b++) begin : g_cb
    logic          sel;
    logic [CW-1:0] col;
    assign sel = (32'(wr_addr) / CB_WORDS) == b;
    assign col = CW'(32'(wr_addr) % CB_WORDS);
    cam_block #(.WORDS(CB_WORDS), .WORD_W(WORD_W)) u_cb (
      .clk     (clk),
      .rst_n   (rst_n),
      .wr_en   (wr_en && sel),
      .wr_col  (col),
      .wr_data (wr_data),
      .rd_en   (rd_en),
      .rd_key  (rd_key),
      .rd_match(cb_match[b])
    );
  end

  assign match = |cb_match;
endmodule
