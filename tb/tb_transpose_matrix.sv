// tb_transpose_matrix: self-checking test of the transpose matrix.
//
// The testbench plays the buffer: a model array with a registered read port
// (one clock of latency, as in bic_buffer). For each random batch it raises
// start, checks that the unit copies the N rows and releases the buffer
// exactly N+1 clocks after the start edge, and that the M output rows are the
// columns of the buffer, in key order, with out_last on the last one. The
// output is taken under random back-pressure.
module tb_transpose_matrix;
  localparam int unsigned ROWS = 16, COLS = 8;

  logic clk = 1'b0, rst_n = 1'b1;
  logic start = 1'b0, idle, buf_release, buf_rd_en;
  logic [3:0] buf_rd_row;
  logic [COLS-1:0] buf_rd_data;
  logic out_valid, out_ready = 1'b0, out_last;
  logic [ROWS-1:0] out_row;
  logic [2:0] out_key;
  logic [COLS-1:0] bufm [ROWS];
  int checks = 0, failures = 0, stalls = 0;

  transpose_matrix #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  always_ff @(posedge clk) if (buf_rd_en) buf_rd_data <= bufm[buf_rd_row];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    buf_rd_data = '0;
    #1 rst_n = 1'b0;
    #11 rst_n = 1'b1;
    @(posedge clk); #1;
    for (int b = 0; b < 40; b++) begin
      int cyc, k;
      for (int r = 0; r < ROWS; r++) bufm[r] = COLS'($urandom);
      check(idle, "idle before start");
      start = 1'b1;
      @(posedge clk); #1;           // start edge
      start = 1'b0;
      cyc = 0;
      while (!buf_release) begin
        @(posedge clk); #1; cyc++;
        if (cyc > 100) break;
      end
      // buf_release is high in the clock that ends at edge start+N+1
      check(cyc == ROWS, $sformatf("release after %0d clocks, expected %0d", cyc + 1, ROWS + 1));
      // the buffer may change now: the copy is complete
      for (int r = 0; r < ROWS; r++) begin
        logic [COLS-1:0] t;
        t = bufm[r]; bufm[r] = ~t;
      end
      @(posedge clk); #1;
      k = 0;
      while (k < COLS) begin
        out_ready = (b < 5) ? 1'b1 : ($urandom_range(0, 2) != 0);
        #1;
        if (out_valid) begin
          logic [ROWS-1:0] exp;
          for (int r = 0; r < ROWS; r++) exp[r] = ~bufm[r][k];
          if (out_ready) begin
            check(out_row == exp && out_key == 3'(k) && out_last == (k == COLS - 1),
                  $sformatf("batch %0d key %0d: got %h expected %h", b, k, out_row, exp));
            k++;
          end else stalls++;
        end else check(1'b0, "out_valid low during output");
        @(posedge clk); #1;
      end
      out_ready = 1'b0;
      check(idle && !out_valid, "idle after last row");
    end
    check(stalls > 0, "back-pressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
