// tb_bic_buffer: self-checking test of the N x M match-bit buffer.
//
// Writes random single bits at random (row, column) positions, with reads of
// random rows in the same clocks, and compares each registered row read (one
// clock after rd_en) with a model array. Checks the reset contents too.
module tb_bic_buffer;
  localparam int unsigned ROWS = 16, COLS = 8;

  logic clk = 1'b0, rst_n = 1'b1;
  logic wr_en = 1'b0, wr_bit = 1'b0, rd_en = 1'b0;
  logic [3:0] wr_row = '0, rd_row = '0;
  logic [2:0] wr_col = '0;
  logic [COLS-1:0] rd_data;
  logic [COLS-1:0] model [ROWS];
  int checks = 0, failures = 0;

  bic_buffer #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [COLS-1:0] exp_q;
    for (int r = 0; r < ROWS; r++) model[r] = '0;
    #1 rst_n = 1'b0;
    #11 rst_n = 1'b1;
    @(posedge clk); #1;
    for (int r = 0; r < ROWS; r++) begin
      rd_en = 1'b1; rd_row = 4'(r);
      @(posedge clk); #1;
      checks++;
      if (rd_data !== '0) begin failures++; $display("FAIL reset row %0d", r); end
    end
    for (int i = 0; i < 3000; i++) begin
      wr_en  = ($urandom_range(0, 3) != 0);
      wr_row = 4'($urandom); wr_col = 3'($urandom); wr_bit = 1'($urandom);
      rd_en  = ($urandom_range(0, 1) == 1);
      rd_row = 4'($urandom);
      exp_q  = model[rd_row];          // read sees the array before this write
      @(posedge clk); #1;
      if (wr_en) model[wr_row][wr_col] = wr_bit;
      if (rd_en) begin
        checks++;
        if (rd_data !== exp_q) begin
          failures++;
          $display("FAIL read row %0d: got %b expected %b", rd_row, rd_data, exp_q);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
