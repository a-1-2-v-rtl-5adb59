// tb_tm_transpose_unit: self-checking test of the transpose unit.
//
// Writes random N x M matrices row by row and reads every column, checking
// that column k holds bit k of every row (bit j of the column = row j).
module tb_tm_transpose_unit;
  localparam int unsigned ROWS = 16, COLS = 8;

  logic clk = 1'b0, rst_n = 1'b1;
  logic wr_en = 1'b0;
  logic [3:0] wr_row = '0;
  logic [COLS-1:0] wr_data = '0;
  logic [2:0] col_sel = '0;
  logic [ROWS-1:0] col_data;
  logic [COLS-1:0] model [ROWS];
  int checks = 0, failures = 0;

  tm_transpose_unit #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 1'b0;
    #11 rst_n = 1'b1;
    @(posedge clk); #1;
    for (int m = 0; m < 50; m++) begin
      for (int r = 0; r < ROWS; r++) begin
        model[r] = (m == 0) ? COLS'(1 << (r % COLS)) : COLS'($urandom);
        wr_en = 1'b1; wr_row = 4'(r); wr_data = model[r];
        @(posedge clk); #1;
      end
      wr_en = 1'b0;
      for (int k = 0; k < COLS; k++) begin
        logic [ROWS-1:0] exp;
        col_sel = 3'(k);
        #1;
        for (int r = 0; r < ROWS; r++) exp[r] = model[r][k];
        checks++;
        if (col_data !== exp) begin
          failures++;
          $display("FAIL matrix %0d column %0d: got %h expected %h", m, k, col_data, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
