// tb_bic_core_large: one BIC core at the larger configuration the chip was
// reduced from: records of 256 words (8 CAM blocks), 16 keys, 256 records.
//
// Two random batches are streamed at full rate; every one of the 16 output
// rows (256 bits each) is compared with an index computed here, and each batch
// must take RECORDS * (WORDS + KEYS) clocks of input, plus, for the second,
// the RECORDS + 3 - WORDS clocks its first keys wait for the transpose matrix
// to finish copying the buffer (RECORDS is larger than WORDS here).
module tb_bic_core_large;
  localparam int unsigned NUM_CB = 8, CB_WORDS = 32, W = NUM_CB * CB_WORDS;
  localparam int unsigned M = 16, N = 256, WORD_W = 8, NB = 2;

  logic clk = 1'b0, rst_n = 1'b1;
  logic in_valid = 1'b0, in_ready, in_batch_last, key_stall;
  logic [WORD_W-1:0] in_data = '0;
  logic out_valid, out_ready = 1'b1, out_last;
  logic [N-1:0] out_row;
  logic [3:0] out_key;

  int checks = 0, failures = 0, cycle = 0;
  logic [WORD_W-1:0] rec  [NB][N][W];
  logic [WORD_W-1:0] keys [NB][M];
  logic [N-1:0]      exp_bi [NB][M];

  bic_core #(.NUM_CB(NUM_CB), .CB_WORDS(CB_WORDS), .WORD_W(WORD_W), .KEYS(M), .RECORDS(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : driver
    for (int b = 0; b < NB; b++) begin
      for (int k = 0; k < M; k++) keys[b][k] = WORD_W'($urandom);
      for (int j = 0; j < N; j++)
        for (int w = 0; w < W; w++) rec[b][j][w] = WORD_W'($urandom);
      for (int k = 0; k < M; k++)
        for (int j = 0; j < N; j++) begin
          exp_bi[b][k][j] = 1'b0;
          for (int w = 0; w < W; w++) if (rec[b][j][w] == keys[b][k]) exp_bi[b][k][j] = 1'b1;
        end
    end
    #1 rst_n = 1'b0;
    #11 rst_n = 1'b1;
    @(posedge clk); #1;
    for (int b = 0; b < NB; b++) begin
      int t0, n, exp_cyc;
      t0 = cycle; n = 0;
      for (int j = 0; j < N; j++) begin
        for (int w = 0; w <= W + M - 1; w++) begin
          in_valid = 1'b1;
          in_data = (w < W) ? rec[b][j][w] : keys[b][w - W];
          @(posedge clk); #1;
          if (!in_ready_q) begin w--; end else n++;
        end
      end
      in_valid = 1'b0;
      // a batch that follows another waits N+3-W clocks at its first keys,
      // while the transpose matrix copies the 256 buffer rows of the one before
      exp_cyc = N * (W + M) + ((b > 0 && N + 3 > W) ? N + 3 - W : 0);
      check(cycle - t0 == exp_cyc, $sformatf("batch %0d took %0d clocks, expected %0d", b, cycle - t0, exp_cyc));
    end
  end

  logic in_ready_q;
  always @(posedge clk) in_ready_q <= in_valid && in_ready;

  initial begin : monitor
    int hits = 0;
    for (int b = 0; b < NB; b++) begin
      int k;
      k = 0;
      while (k < M) begin
        @(posedge clk); #2;
        if (out_valid) begin
          check(out_row == exp_bi[b][k] && out_key == 4'(k), $sformatf("batch %0d key %0d", b, k));
          hits += $countones(out_row);
          if (k == M - 1) $display("batch %0d: %0d matches so far", b, hits);
          k++;
        end
      end
    end
    check(hits > 0, "some matches seen");
    $display("matches %0d", hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
