// tb_cam: self-checking test of the CAM with two CAM blocks.
//
// Uses NUM_CB = 2 so that a record of 64 words spans two blocks and the OR of
// their results is exercised. Random records are loaded one word per clock;
// keys are searched one per clock back to back, and each match, one clock
// later, is compared with a model of the record.
module tb_cam;
  localparam int unsigned NUM_CB = 2, CB_WORDS = 32, WORD_W = 8;
  localparam int unsigned WORDS = NUM_CB * CB_WORDS;

  logic clk = 1'b0, rst_n = 1'b1;
  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [5:0] wr_addr = '0;
  logic [WORD_W-1:0] wr_data = '0, rd_key = '0;
  logic match;
  int checks = 0, failures = 0, hits = 0;
  logic [WORD_W-1:0] rec [WORDS];

  cam #(.NUM_CB(NUM_CB), .CB_WORDS(CB_WORDS), .WORD_W(WORD_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic contains(input logic [WORD_W-1:0] key);
    for (int w = 0; w < WORDS; w++) if (rec[w] == key) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    logic exp_q;
    #1 rst_n = 1'b0;
    #11 rst_n = 1'b1;
    @(posedge clk); #1;
    for (int r = 0; r < 6; r++) begin
      for (int w = 0; w < WORDS; w++) begin
        rec[w] = WORD_W'($urandom);
        wr_en = 1'b1; wr_addr = 6'(w); wr_data = rec[w];
        @(posedge clk); #1;
      end
      wr_en = 1'b0;
      for (int k = 0; k < 256; k++) begin
        // a key from the record half the time, else the value k
        rd_en = 1'b1;
        rd_key = ($urandom_range(0, 1) == 1) ? rec[$urandom_range(0, WORDS - 1)] : WORD_W'(k);
        exp_q = contains(rd_key);
        @(posedge clk); #1;
        checks++;
        if (match !== exp_q) begin
          failures++;
          $display("FAIL record %0d search %0d: got %0b", r, k, match);
        end
        if (match) hits++;
      end
      rd_en = 1'b0;
    end
    checks++;
    if (hits == 0) begin failures++; $display("FAIL no hit seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
