// bic_multicore: the multi-core BIC system, CORES clock-gated BIC cores.
//
// Batches (N records with their keys, see bic_core) arrive from external
// memory on one shared WORD_W-bit stream. Each batch is given as a whole to
// one core: the dispatcher picks, at the first word of a batch, the next core
// in round-robin order that is active and free to start one, and routes the
// stream to it until that core reports the batch's last key. The bitmap index
// results go back on one shared output stream in the order the batches came
// in: a small FIFO records which core took each batch, and the collector
// drains the M rows of the core at its head before moving on. out_core names
// the core a row comes from.
//
// Power management: stb[i] = 1 puts core i in standby. Its clock-gating cell
// then holds the core clock high, so the core keeps all its state and resumes
// where it stopped when stb[i] returns to 0. stb is registered on sclk, so a
// change takes effect one sclk edge after it is sampled. The dispatcher does
// not start a batch on a core in standby; a core that enters standby in the
// middle of a batch or of its result holds up the stream to or from it until
// it is woken (this rule, the round-robin choice and the ordering FIFO are
// this design's own; the paper describes batch i going to core i, results
// returned in order, and standby chosen by workload).
//
// Interface: in_valid/in_ready/in_data and out_valid/out_ready/out_row/
// out_key/out_core/out_last are valid/ready streams on sclk. rst_n is
// asynchronous and active low.
module bic_multicore
  import bic_pkg::*;
#(
  parameter int unsigned CORES    = bic_pkg::DEF_CORES,    // Z
  parameter int unsigned NUM_CB   = bic_pkg::DEF_NUM_CB,
  parameter int unsigned CB_WORDS = bic_pkg::DEF_CB_WORDS,
  parameter int unsigned WORD_W   = bic_pkg::DEF_WORD_W,
  parameter int unsigned KEYS     = bic_pkg::DEF_KEYS,     // M
  parameter int unsigned RECORDS  = bic_pkg::DEF_RECORDS,  // N
  localparam int unsigned ZW      = (CORES > 1) ? $clog2(CORES) : 1,
  localparam int unsigned KW      = (KEYS > 1) ? $clog2(KEYS) : 1
) (
  input  logic               sclk,
  input  logic               rst_n,
  input  logic [CORES-1:0]   stb,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [WORD_W-1:0]  in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [RECORDS-1:0] out_row,
  output logic [KW-1:0]      out_key,
  output logic [ZW-1:0]      out_core,
  output logic               out_last,
  output logic [CORES-1:0]   core_stall  // core's keys held off (buffer full)
);
  localparam int unsigned FDEPTH = 3 * CORES;  // batches in flight: up to 3 per core
  localparam int unsigned FW     = $clog2(FDEPTH);

  // ---------------------------------------------------------------- standby
  logic [CORES-1:0] stb_q;

  always_ff @(posedge sclk or negedge rst_n) begin
    if (!rst_n) stb_q <= '0;
    else        stb_q <= stb;
  end

  // ------------------------------------------------------------------ cores
  logic [CORES-1:0]   c_in_valid, c_in_ready, c_batch_last;
  logic [CORES-1:0]   c_out_valid, c_out_ready, c_out_last;
  logic [RECORDS-1:0] c_out_row [CORES];
  logic [KW-1:0]      c_out_key [CORES];

  for (genvar i = 0; i < CORES; i++) begin : g_core
    logic iclk;

    clock_gate u_cg (.sclk(sclk), .stb(stb_q[i]), .iclk(iclk));

    bic_core #(
      .NUM_CB(NUM_CB), .CB_WORDS(CB_WORDS), .WORD_W(WORD_W),
      .KEYS(KEYS), .RECORDS(RECORDS)
    ) u_bic (
      .clk          (iclk),
      .rst_n        (rst_n),
      .in_valid     (c_in_valid[i]),
      .in_ready     (c_in_ready[i]),
      .in_data      (in_data),
      .in_batch_last(c_batch_last[i]),
      .key_stall    (core_stall[i]),
      .out_valid    (c_out_valid[i]),
      .out_ready    (c_out_ready[i]),
      .out_row      (c_out_row[i]),
      .out_key      (c_out_key[i]),
      .out_last     (c_out_last[i])
    );
  end

  // ----------------------------------------------------- order of batches
  logic [ZW-1:0] fifo [FDEPTH];
  logic [FW-1:0] f_wr, f_rd;
  logic [FW:0]   f_cnt;
  logic          f_push, f_pop;

  // ------------------------------------------------------------- dispatch
  logic          in_batch;     // a batch is being streamed
  logic [ZW-1:0] cur;          // its core
  logic [ZW-1:0] rr;           // where the next round-robin search starts
  logic          pick_ok;
  logic [ZW-1:0] pick;
  logic [ZW-1:0] tgt;
  logic          tgt_ok;
  logic          in_take;

  // Next active core from rr on, round robin.
  always_comb begin
    pick_ok = 1'b0;
    pick    = '0;
    for (int unsigned k = 0; k < CORES; k++) begin
      logic [ZW-1:0] c;
      c = ZW'((32'(rr) + k) % CORES);
      if (!pick_ok && !stb_q[c] && c_in_ready[c]) begin
        pick_ok = 1'b1;
        pick    = c;
      end
    end
  end

  assign tgt    = in_batch ? cur : pick;
  assign tgt_ok = in_batch ? !stb_q[cur]
                           : (pick_ok && (f_cnt < (FW + 1)'(FDEPTH)));
  assign in_ready = tgt_ok && c_in_ready[tgt];
  assign in_take  = in_valid && in_ready;
  assign f_push   = in_take && !in_batch;

  always_comb begin
    c_in_valid = '0;
    c_in_valid[tgt] = in_valid && tgt_ok;
  end

  always_ff @(posedge sclk or negedge rst_n) begin
    if (!rst_n) begin
      in_batch <= 1'b0;
      cur      <= '0;
      rr       <= '0;
    end else if (in_take) begin
      if (!in_batch) begin
        cur <= tgt;
        rr  <= (32'(tgt) == CORES - 1) ? '0 : tgt + 1'b1;
      end
      in_batch <= !c_batch_last[tgt];
    end
  end

  // ------------------------------------------------------------ collection
  logic [ZW-1:0] head;
  logic          head_ok;

  assign head     = fifo[f_rd];
  assign head_ok  = (f_cnt != '0) && !stb_q[head];
  assign out_valid = head_ok && c_out_valid[head];
  assign out_row   = c_out_row[head];
  assign out_key   = c_out_key[head];
  assign out_last  = c_out_last[head];
  assign out_core  = head;
  assign f_pop     = out_valid && out_ready && out_last;

  always_comb begin
    c_out_ready = '0;
    c_out_ready[head] = out_ready && head_ok;
  end

  always_ff @(posedge sclk or negedge rst_n) begin
    if (!rst_n) begin
      f_wr  <= '0;
      f_rd  <= '0;
      f_cnt <= '0;
      for (int unsigned k = 0; k < FDEPTH; k++) fifo[k] <= '0;
    end else begin
      if (f_push) begin
        fifo[f_wr] <= tgt;
        f_wr <= (32'(f_wr) == FDEPTH - 1) ? '0 : f_wr + 1'b1;
      end
      if (f_pop) f_rd <= (32'(f_rd) == FDEPTH - 1) ? '0 : f_rd + 1'b1;
      f_cnt <= f_cnt + (FW + 1)'(f_push) - (FW + 1)'(f_pop);
    end
  end

  // A row is held until taken; the stream never feeds a core in standby.
  a_out_hold: assert property (@(posedge sclk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_row) && $stable(out_core));
  a_no_feed_standby: assert property (@(posedge sclk) disable iff (!rst_n)
    in_take |-> !stb_q[tgt]);
endmodule
