// tb_cam_block: self-checking test of one CAM block.
//
// Loads random 32-word records (one word per clock), then searches every one
// of the 256 key values and checks the one-clock-late match against a plain
// array model of the record. A second record overwrites the first, so values
// of the old record must no longer match. Also checks that rd_match does not
// change without rd_en and that reset clears the block.
module tb_cam_block;
  localparam int unsigned WORDS  = 32;
  localparam int unsigned WORD_W = 8;

  logic clk = 1'b0, rst_n = 1'b1;
  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [4:0] wr_col = '0;
  logic [WORD_W-1:0] wr_data = '0, rd_key = '0;
  logic rd_match;
  int checks = 0, failures = 0;
  logic [WORD_W-1:0] rec [WORDS];

  cam_block #(.WORDS(WORDS), .WORD_W(WORD_W)) dut (.*);

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

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b", what, got, exp);
    end
  endtask

  task automatic load(input int mode);
    for (int w = 0; w < WORDS; w++) begin
      // mode 0: random; mode 1: few distinct values (repeats)
      rec[w] = (mode == 0) ? WORD_W'($urandom) : WORD_W'($urandom_range(0, 7) * 3);
      wr_en = 1'b1; wr_col = 5'(w); wr_data = rec[w];
      @(posedge clk); #1;
    end
    wr_en = 1'b0;
  endtask

  task automatic search_all();
    for (int k = 0; k < (1 << WORD_W); k++) begin
      rd_en = 1'b1; rd_key = WORD_W'(k);
      @(posedge clk); #1;
      rd_en = 1'b0;
      check(rd_match, contains(WORD_W'(k)), $sformatf("key %0d", k));
    end
  endtask

  initial begin
    #1 rst_n = 1'b0;
    #11 rst_n = 1'b1;
    @(posedge clk); #1;
    // after reset nothing matches
    rd_en = 1'b1; rd_key = 8'd0; @(posedge clk); #1; rd_en = 1'b0;
    check(rd_match, 1'b0, "after reset");
    for (int r = 0; r < 4; r++) begin
      load(r % 2);
      search_all();
    end
    // result holds while rd_en is low
    rd_en = 1'b1; rd_key = rec[3]; @(posedge clk); #1; rd_en = 1'b0;
    rd_key = ~rec[3];
    repeat (3) @(posedge clk); #1;
    check(rd_match, 1'b1, "hold without rd_en");
    // a write in the same clock as a search does not affect that search
    rd_en = 1'b1; rd_key = rec[5]; wr_en = 1'b1; wr_col = 5'd5; wr_data = ~rec[5];
    begin
      int n = 0;
      for (int w = 0; w < WORDS; w++) if (rec[w] == rec[5]) n++;
      @(posedge clk); #1;
      check(rd_match, 1'b1, "search before same-clock write");
      rec[5] = ~rec[5];
      wr_en = 1'b0; rd_key = ~rec[5];
      @(posedge clk); #1;
      check(rd_match, (n > 1), "old value gone after overwrite");
    end
    rd_en = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
