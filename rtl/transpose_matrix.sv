// transpose_matrix: the transpose matrix (TM) of a BIC core.
//
// The TM has a control unit and a transpose unit (tm_transpose_unit). When the
// buffer holds a complete batch (start, accepted only while idle), the control
// unit reads the N buffer rows one per clock into the transpose unit. Once the
// last row is in, it pulses buf_release, so the buffer may take the next
// batch, and then sends out the M rows of the bitmap index, row k being the
// N-bit result of key k for records 0..N-1 (bit j = record j).
//
// Timing: start sampled at edge e moves the unit to COPY; reads are issued at
// edges e+1 .. e+N and the buffer returns each row one clock later, so the last
// row is written at edge e+N+1, where buf_release is high and the unit turns to
// OUT. The output is a valid/ready stream: out_row, out_key and out_last stay
// stable while out_valid is high and out_ready low; one row leaves per clock
// when out_ready stays high. The state machine and this handshake are this
// design's own; the paper only splits the TM into its two units.
module transpose_matrix
  import bic_pkg::*;
#(
  parameter int unsigned ROWS = bic_pkg::DEF_RECORDS,  // N
  parameter int unsigned COLS = bic_pkg::DEF_KEYS,     // M
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            idle,
  output logic            buf_release,
  output logic            buf_rd_en,
  output logic [RW-1:0]   buf_rd_row,
  input  logic [COLS-1:0] buf_rd_data,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [ROWS-1:0] out_row,
  output logic [CW-1:0]   out_key,
  output logic            out_last
);
  tm_state_e     state;
  logic [RW-1:0] rd_cnt;     // next buffer row to read
  logic          rd_done;    // all rows have been requested
  logic          cap_vld;    // a buffer row arrives this clock
  logic [RW-1:0] cap_row;    // which row it is
  logic [CW-1:0] key_cnt;    // bitmap index row being sent

  assign idle       = (state == TM_IDLE);
  assign buf_rd_en  = (state == TM_COPY) && !rd_done;
  assign buf_rd_row = rd_cnt;
  assign buf_release = cap_vld && (cap_row == RW'(ROWS - 1));

  assign out_valid = (state == TM_OUT);
  assign out_key   = key_cnt;
  assign out_last  = (key_cnt == CW'(COLS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= TM_IDLE;
      rd_cnt  <= '0;
      rd_done <= 1'b0;
      cap_vld <= 1'b0;
      cap_row <= '0;
      key_cnt <= '0;
    end else begin
      cap_vld <= buf_rd_en;
      cap_row <= rd_cnt;
      unique case (state)
        TM_IDLE: begin
          if (start) begin
            state   <= TM_COPY;
            rd_cnt  <= '0;
            rd_done <= 1'b0;
          end
        end
        TM_COPY: begin
          if (buf_rd_en) begin
            if (rd_cnt == RW'(ROWS - 1)) rd_done <= 1'b1;
            else                         rd_cnt  <= rd_cnt + 1'b1;
          end
          if (buf_release) begin
            state   <= TM_OUT;
            key_cnt <= '0;
          end
        end
        TM_OUT: begin
          if (out_ready) begin
            if (out_last) state <= TM_IDLE;
            else          key_cnt <= key_cnt + 1'b1;
          end
        end
        default: state <= TM_IDLE;
      endcase
    end
  end

  tm_transpose_unit #(.ROWS(ROWS), .COLS(COLS)) u_tu (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (cap_vld),
    .wr_row  (cap_row),
    .wr_data (buf_rd_data),
    .col_sel (key_cnt),
    .col_data(out_row)
  );

  // A row offered on the output stays offered, unchanged, until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_row) && $stable(out_key));
endmodule
