// tb_bic_multicore: end-to-end test of the multi-core BIC system at its
// default sizes (4 cores, 32-word records, 8 keys, 16 records per batch).
//
// The testbench plays the external memory: it streams NB batches of records
// and keys and collects the bitmap index rows, which must come back in batch
// order and match indexes computed here. Along the way it makes each mechanism
// of the system happen and counts it:
//   dispatch     every core receives batches (round robin)
//   standby      cores 1 and 2 put in standby for a stretch of batches; no
//                batch may start on them and their state must not change
//   freeze       the core receiving a batch is put in standby mid-batch and
//                woken again; the stream waits and the batch still comes out right
//   key stall    the output is held off so that cores stop at their keys
//   back-press.  output rows offered while out_ready is low
// A mechanism that never happens counts as a failure.
module tb_bic_multicore;
  localparam int unsigned Z = 4, W = 32, M = 8, N = 16, WORD_W = 8;
  localparam int unsigned NB = 24;

  logic sclk = 1'b0, rst_n = 1'b1;
  logic [Z-1:0] stb = '0;
  logic in_valid = 1'b0, in_ready;
  logic [WORD_W-1:0] in_data = '0;
  logic out_valid, out_ready = 1'b0, out_last;
  logic [N-1:0] out_row;
  logic [2:0] out_key;
  logic [1:0] out_core;
  logic [Z-1:0] core_stall;

  int checks = 0, failures = 0, cycle = 0;
  int n_core [Z];
  int n_standby_cycles = 0, n_freeze_wait = 0, n_stall = 0, n_bp = 0, n_skip = 0;
  int batch_core [NB];
  int cur_batch = 0;

  logic [WORD_W-1:0] rec  [NB][N][W];
  logic [WORD_W-1:0] keys [NB][M];
  logic [N-1:0]      exp_bi [NB][M];

  bic_multicore dut (.*);

  // record-word counters of the cores, to see that a core in standby is frozen
  logic [4:0] wc_peek [Z];
  for (genvar i = 0; i < Z; i++) begin : g_peek
    assign wc_peek[i] = dut.g_core[i].u_bic.word_cnt;
  end

  always #5 sclk = ~sclk;

  always @(posedge sclk) begin
    cycle++;
    if (|dut.stb_q && in_valid) n_standby_cycles++;
    if (in_valid && !in_ready && dut.in_batch && dut.stb_q[dut.cur]) n_freeze_wait++;
    if (|core_stall) n_stall++;
    if (out_valid && !out_ready) n_bp++;
  end

  initial begin : watchdog
    repeat (200000) @(posedge sclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic make_batches();
    for (int b = 0; b < NB; b++) begin
      for (int k = 0; k < M; k++) keys[b][k] = WORD_W'($urandom_range(0, 95));
      for (int j = 0; j < N; j++)
        for (int w = 0; w < W; w++) rec[b][j][w] = WORD_W'($urandom_range(0, 127));
      for (int k = 0; k < M; k++)
        for (int j = 0; j < N; j++) begin
          exp_bi[b][k][j] = 1'b0;
          for (int w = 0; w < W; w++) if (rec[b][j][w] == keys[b][k]) exp_bi[b][k][j] = 1'b1;
        end
    end
  endtask

  task automatic send(input logic [WORD_W-1:0] v, input bit first);
    logic took;
    in_valid = 1'b1; in_data = v;
    do begin
      took = in_ready;
      if (took && first) begin
        // a batch never starts on a core in standby
        batch_core[cur_batch] = int'(dut.tgt);
        check(!dut.stb_q[dut.tgt], $sformatf("batch %0d started on core %0d in standby", cur_batch, dut.tgt));
        if (|dut.stb_q) n_skip++;
      end
      @(posedge sclk); #1;
    end while (!took);
    in_valid = 1'b0;
  endtask

  initial begin : driver
    int frozen_core;
    logic [4:0] word_cnt_at_stb;
    make_batches();
    for (int i = 0; i < Z; i++) n_core[i] = 0;
    #1 rst_n = 1'b0;
    #11 rst_n = 1'b1;
    @(posedge sclk); #1;
    for (int b = 0; b < NB; b++) begin
      cur_batch = b;
      if (b == 4) stb = 4'b0110;          // light workload: two cores in standby
      if (b == 8) stb = 4'b0000;
      for (int j = 0; j < N; j++) begin
        for (int w = 0; w < W; w++) begin
          if (b == 5 && j == 0 && w == 0) word_cnt_at_stb = wc_peek[1];
          send(rec[b][j][w], (j == 0 && w == 0));
          // batch 9: put the receiving core in standby halfway, then wake it
          if (b == 9 && j == 7 && w == 10) begin
            frozen_core = int'(dut.cur);
            stb[frozen_core] = 1'b1;
            repeat (2) @(posedge sclk); #1;
            begin
              logic [4:0] wc;
              wc = wc_peek[frozen_core];
              in_valid = 1'b1; in_data = rec[b][j][w + 1];
              repeat (150) @(posedge sclk); #1;
              check(wc_peek[frozen_core] == wc, "frozen core kept its state");
              in_valid = 1'b0;
            end
            stb[frozen_core] = 1'b0;
          end
        end
        for (int k = 0; k < M; k++) send(keys[b][k], 1'b0);
      end
      if (b == 7) check(wc_peek[1] == word_cnt_at_stb, "core 1 state kept in standby");
    end
  end

  initial begin : monitor
    int k, hold;
    wait (rst_n);
    for (int b = 0; b < NB; b++) begin
      k = 0;
      // batches 12..14: output held off long enough for cores to stall
      hold = (b == 12) ? 6000 : 0;
      while (k < M) begin
        @(posedge sclk); #2;
        if (hold > 0) begin hold--; out_ready = 1'b0; continue; end
        out_ready = (b < 10) ? 1'b1 : ($urandom_range(0, 3) != 0);
        #1;
        if (out_valid && out_ready) begin
          check(out_row == exp_bi[b][k] && out_key == 3'(k) && out_last == (k == M - 1),
                $sformatf("batch %0d key %0d: got %h expected %h", b, k, out_row, exp_bi[b][k]));
          check(int'(out_core) == batch_core[b],
                $sformatf("batch %0d from core %0d, sent to %0d", b, out_core, batch_core[b]));
          if (k == 0) n_core[out_core]++;
          k++;
        end
      end
    end
    @(posedge sclk); #2;
    out_ready = 1'b0;
    for (int i = 0; i < Z; i++) check(n_core[i] > 0, $sformatf("core %0d used", i));
    check(n_standby_cycles > 0, "standby happened");
    check(n_skip > 0, "batches dispatched around cores in standby");
    check(n_freeze_wait > 0, "stream waited for a frozen core");
    check(n_stall > 0, "key stall happened");
    check(n_bp > 0, "output back-pressure happened");
    $display("batches per core: %0d %0d %0d %0d", n_core[0], n_core[1], n_core[2], n_core[3]);
    $display("standby cycles %0d, skip dispatches %0d, freeze waits %0d, key stalls %0d, back-pressure %0d",
             n_standby_cycles, n_skip, n_freeze_wait, n_stall, n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
