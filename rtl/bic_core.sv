// bic_core: one bitmap index creation (BIC) core.
//
// A batch is N records and M keys. The core takes one stream of WORD_W-bit
// values, per record: its NUM_CB*CB_WORDS words, then the M keys; N such
// groups form a batch. Record words are written into the CAM, one per clock.
// Each key is then searched in the CAM; the match bit comes back the next clock
// and is written into the buffer at row = record, column = key. As soon as the
// last key of a record has entered, the words of the next record are accepted,
// with no gap. When the last match bit of a batch is in the buffer, the
// transpose matrix copies the buffer and outputs the M rows of the batch's
// bitmap index, each N bits wide (bit j = record j).
//
// The order of these steps, the one-clock CAM result and the N x M buffer
// follow the paper. The single byte-wide input stream, the valid/ready
// handshakes and the stall rule are this design's own: while the buffer still
// holds a batch that the transpose matrix has not yet copied (because it is
// still sending out the one before), the keys of the next batch are held off
// (in_ready low, key_stall high); record words are still taken.
//
// Timing with no stalls: a record takes NUM_CB*CB_WORDS + M clocks, a batch
// N times that. out_valid rises N+3 clocks after the edge that took the last
// key of a batch, if the transpose matrix was idle; the M rows then leave one
// per clock while out_ready is high. The buffer is released N+3 clocks after
// the last key, so when N+3 exceeds the record length (not at the default
// sizes) the first keys of the following batch wait N+3-WORDS clocks.
module bic_core
  import bic_pkg::*;
#(
  parameter int unsigned NUM_CB   = bic_pkg::DEF_NUM_CB,
  parameter int unsigned CB_WORDS = bic_pkg::DEF_CB_WORDS,
  parameter int unsigned WORD_W   = bic_pkg::DEF_WORD_W,
  parameter int unsigned KEYS     = bic_pkg::DEF_KEYS,     // M
  parameter int unsigned RECORDS  = bic_pkg::DEF_RECORDS,  // N
  localparam int unsigned WORDS   = NUM_CB * CB_WORDS,
  localparam int unsigned AW      = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned KW      = (KEYS > 1) ? $clog2(KEYS) : 1,
  localparam int unsigned RW      = (RECORDS > 1) ? $clog2(RECORDS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // batch stream in
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [WORD_W-1:0]  in_data,
  output logic               in_batch_last, // the value offered is the batch's last key
  output logic               key_stall,     // keys held off: buffer not yet released
  // bitmap index rows out
  output logic               out_valid,
  input  logic               out_ready,
  output logic [RECORDS-1:0] out_row,
  output logic [KW-1:0]      out_key,
  output logic               out_last
);
  in_phase_e     phase;
  logic [AW-1:0] word_cnt;
  logic [KW-1:0] key_cnt;
  logic [RW-1:0] rec_cnt;
  logic          buf_full;    // buffer holds a complete batch not yet copied

  logic take;
  logic word_take, key_take;
  logic last_word, last_key, last_rec;

  assign last_word = (word_cnt == AW'(WORDS - 1));
  assign last_key  = (key_cnt == KW'(KEYS - 1));
  assign last_rec  = (rec_cnt == RW'(RECORDS - 1));

  assign key_stall     = (phase == PH_KEYS) && buf_full;
  assign in_ready      = !key_stall;
  assign take          = in_valid && in_ready;
  assign word_take     = take && (phase == PH_WORDS);
  assign key_take      = take && (phase == PH_KEYS);
  assign in_batch_last = (phase == PH_KEYS) && last_key && last_rec;

  // Input sequencing: words of a record, then its keys, record after record.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase    <= PH_WORDS;
      word_cnt <= '0;
      key_cnt  <= '0;
      rec_cnt  <= '0;
    end else if (word_take) begin
      if (last_word) begin
        word_cnt <= '0;
        phase    <= PH_KEYS;
      end else begin
        word_cnt <= word_cnt + 1'b1;
      end
    end else if (key_take) begin
      if (last_key) begin
        key_cnt <= '0;
        phase   <= PH_WORDS;
        rec_cnt <= last_rec ? '0 : rec_cnt + 1'b1;
      end else begin
        key_cnt <= key_cnt + 1'b1;
      end
    end
  end

  // CAM: one record.
  logic match;

  cam #(.NUM_CB(NUM_CB), .CB_WORDS(CB_WORDS), .WORD_W(WORD_W)) u_cam (
    .clk    (clk),
    .rst_n  (rst_n),
    .wr_en  (word_take),
    .wr_addr(word_cnt),
    .wr_data(in_data),
    .rd_en  (key_take),
    .rd_key (in_data),
    .match  (match)
  );

  // The match bit arrives one clock after the key: remember where it goes.
  logic          pend_vld, pend_last;
  logic [RW-1:0] pend_row;
  logic [KW-1:0] pend_col;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_vld  <= 1'b0;
      pend_last <= 1'b0;
      pend_row  <= '0;
      pend_col  <= '0;
    end else begin
      pend_vld  <= key_take;
      pend_last <= key_take && last_key && last_rec;
      if (key_take) begin
        pend_row <= rec_cnt;
        pend_col <= key_cnt;
      end
    end
  end

  // Buffer and transpose matrix.
  logic                buf_rd_en, buf_release, tm_idle;
  logic [RW-1:0]       buf_rd_row;
  logic [KEYS-1:0]     buf_rd_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       buf_full <= 1'b0;
    else if (pend_vld && pend_last)   buf_full <= 1'b1;
    else if (buf_release)             buf_full <= 1'b0;
  end

  bic_buffer #(.ROWS(RECORDS), .COLS(KEYS)) u_buf (
    .clk    (clk),
    .rst_n  (rst_n),
    .wr_en  (pend_vld),
    .wr_row (pend_row),
    .wr_col (pend_col),
    .wr_bit (match),
    .rd_en  (buf_rd_en),
    .rd_row (buf_rd_row),
    .rd_data(buf_rd_data)
  );

  transpose_matrix #(.ROWS(RECORDS), .COLS(KEYS)) u_tm (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (buf_full && tm_idle),
    .idle       (tm_idle),
    .buf_release(buf_release),
    .buf_rd_en  (buf_rd_en),
    .buf_rd_row (buf_rd_row),
    .buf_rd_data(buf_rd_data),
    .out_valid  (out_valid),
    .out_ready  (out_ready),
    .out_row    (out_row),
    .out_key    (out_key),
    .out_last   (out_last)
  );

  // A batch's keys never overwrite a buffer the transpose matrix has not copied.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    buf_full |-> !key_take);
endmodule
