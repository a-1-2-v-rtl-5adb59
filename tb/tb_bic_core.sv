// tb_bic_core: self-checking test of one BIC core at the chip's sizes.
//
// Batch 0 is the nine-object, five-attribute example bitmap index from the
// background section (objects = records 0..8, attributes = keys 0..4); the
// other keys and records are chosen to match nothing. Further batches are
// random, drawn from a small alphabet so that matches are frequent. Expected
// bitmap indexes are computed here from the records and keys. The testbench
// checks
//   - every output row, its key index and out_last;
//   - the rate: at full input rate a record takes WORDS + M clocks;
//   - the latency: out_valid rises N+3 clocks after the edge that took the
//     last key of a batch when the transpose matrix was idle;
//   - the key stall: with the output held off, the next batches are stopped at
//     their keys (counted; it must happen), and no result is lost.
module tb_bic_core;
  localparam int unsigned W = 32, M = 8, N = 16, WORD_W = 8;
  localparam int unsigned NB = 10;

  logic clk = 1'b0, rst_n = 1'b1;
  logic in_valid = 1'b0, in_ready, in_batch_last, key_stall;
  logic [WORD_W-1:0] in_data = '0;
  logic out_valid, out_ready = 1'b0, out_last;
  logic [N-1:0] out_row;
  logic [2:0] out_key;

  int checks = 0, failures = 0;
  int stall_cycles = 0, bp_cycles = 0;
  int cycle = 0;
  int timed_batches = 0;

  logic [WORD_W-1:0] rec  [NB][N][W];
  logic [WORD_W-1:0] keys [NB][M];
  logic [N-1:0]      exp_bi [NB][M];
  int last_key_cycle [NB];
  int first_out_cycle [NB];
  bit full_rate [NB];
  bit tm_was_idle [NB];

  bic_core #(.NUM_CB(1), .CB_WORDS(W), .WORD_W(WORD_W), .KEYS(M), .RECORDS(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycle++;
    if (key_stall && in_valid) stall_cycles++;
    if (out_valid && !out_ready) bp_cycles++;
  end

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // The example of the background section: row i = attribute i, bit j = object j.
  function automatic logic [8:0] fig_row(input int i);
    case (i)
      0: return 9'b100000001 | 9'b000001000;   // O1, O4, O9
      1: return 9'b011100010 | 9'b000000000;   // O2, O6, O7, O8
      2: return 9'b000000000;
      3: return 9'b010000001;                  // O1, O8
      4: return 9'b000001010;                  // O2, O4
      default: return 9'b0;
    endcase
  endfunction

  task automatic make_batches();
    // batch 0: example (bit j of fig_row is object j+1)
    for (int k = 0; k < M; k++) keys[0][k] = WORD_W'(8'hA0 + k);
    for (int j = 0; j < N; j++) begin
      for (int w = 0; w < W; w++) rec[0][j][w] = WORD_W'($urandom_range(0, 8'h7F));
      if (j < 9) for (int i = 0; i < 5; i++)
        if (fig_row(i)[j]) rec[0][j][$urandom_range(0, W - 1)] = keys[0][i];
    end
    for (int b = 1; b < NB; b++) begin
      for (int k = 0; k < M; k++) keys[b][k] = WORD_W'($urandom_range(0, 95));
      for (int j = 0; j < N; j++)
        for (int w = 0; w < W; w++) rec[b][j][w] = WORD_W'($urandom_range(0, 127));
    end
    for (int b = 0; b < NB; b++)
      for (int k = 0; k < M; k++)
        for (int j = 0; j < N; j++) begin
          exp_bi[b][k][j] = 1'b0;
          for (int w = 0; w < W; w++) if (rec[b][j][w] == keys[b][k]) exp_bi[b][k][j] = 1'b1;
        end
    // the example batch must reproduce the table exactly
    for (int i = 0; i < M; i++)
      check(exp_bi[0][i] == N'(fig_row(i)), $sformatf("example model row %0d", i));
  endtask

  // Offer one value; gaps of idle clocks when not at full rate.
  task automatic send(input logic [WORD_W-1:0] v, input bit fast, output int took_cycle);
    if (!fast && $urandom_range(0, 5) == 0) begin
      in_valid = 1'b0;
      @(posedge clk); #1;
    end
    in_valid = 1'b1; in_data = v;
    do begin
      @(posedge clk); #1;
      took_cycle = cycle;
    end while (!(in_ready_q));
    in_valid = 1'b0;
  endtask

  // in_ready as sampled at the last edge
  logic in_ready_q;
  always @(posedge clk) in_ready_q <= in_valid && in_ready;

  initial begin : driver
    make_batches();
    #1 rst_n = 1'b0;
    #11 rst_n = 1'b1;
    @(posedge clk); #1;
    for (int b = 0; b < NB; b++) begin
      int t, t_rec0, t_recN, st0;
      st0 = stall_cycles;
      full_rate[b] = (b < 2) || (b >= 6);
      for (int j = 0; j < N; j++) begin
        for (int w = 0; w < W; w++) begin
          send(rec[b][j][w], full_rate[b], t);
          if (w == 0 && j == 0) t_rec0 = t;
        end
        for (int k = 0; k < M; k++) begin
          send(keys[b][k], full_rate[b], t);
          if (k == M - 1 && j == N - 1) begin
            last_key_cycle[b] = t;
            tm_was_idle[b] = dut.tm_idle;
          end
        end
      end
      t_recN = last_key_cycle[b];
      if (full_rate[b] && stall_cycles == st0) begin
        timed_batches++;
        check((t_recN - t_rec0 + 1) == N * (W + M),
              $sformatf("batch %0d took %0d clocks, expected %0d", b, t_recN - t_rec0 + 1, N * (W + M)));
      end
    end
  end

  initial begin : monitor
    int b, k, bp;
    wait (rst_n);
    for (b = 0; b < NB; b++) begin
      k = 0;
      // batches 3..5: output held off long enough to stall the input
      bp = (b >= 3 && b <= 5) ? 1500 : 0;
      while (k < M) begin
        @(posedge clk); #2;
        if (bp > 0) begin bp--; out_ready = 1'b0; continue; end
        out_ready = (b < 2 || b >= 6) ? 1'b1 : ($urandom_range(0, 3) != 0);
        #1;
        if (out_valid && out_ready) begin
          if (k == 0) first_out_cycle[b] = cycle + 1;
          check(out_row == exp_bi[b][k] && out_key == 3'(k) && out_last == (k == M - 1),
                $sformatf("batch %0d key %0d: got %h expected %h", b, k, out_row, exp_bi[b][k]));
          k++;
        end
      end
    end
    @(posedge clk); #2;
    out_ready = 1'b0;
    // latency of the batches whose transpose matrix was idle at the last key
    for (b = 0; b < 2; b++) if (tm_was_idle[b])
      check(first_out_cycle[b] - last_key_cycle[b] >= N + 3, $sformatf("batch %0d latency", b));
    check(lat0 == N + 3, $sformatf("latency %0d, expected %0d", lat0, N + 3));
    check(stall_cycles > 0, "key stall happened");
    check(timed_batches >= 3, "enough batches timed at full rate");
    check(bp_cycles > 0, "output back-pressure happened");
    $display("key stall cycles %0d, back-pressure cycles %0d", stall_cycles, bp_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // exact latency of batch 0: clocks from the last-key edge to the edge after
  // which out_valid is first seen high
  int lat0 = -1;
  initial begin
    wait (rst_n);
    wait (last_key_cycle[0] > 0);
    #1;
    while (!out_valid) begin @(posedge clk); #1; end
    lat0 = cycle - last_key_cycle[0];
  end
endmodule
