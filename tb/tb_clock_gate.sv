// tb_clock_gate: self-checking test of the clock-gating cell.
//
// stb comes from a register on the rising edge of sclk, as in the system. The
// testbench counts rising edges of iclk and of sclk: after a change of stb made
// at edge e, edge e+1 must already follow the new value (no iclk edge while in
// standby, one iclk edge per sclk edge when active). It also checks that iclk
// is held at 1 in standby and equals sclk when active, so no glitch occurs.
module tb_clock_gate;
  logic sclk = 1'b0, stb_d = 1'b0, stb = 1'b0, iclk;
  int checks = 0, failures = 0, iedges = 0, standby_cycles = 0;

  clock_gate dut (.sclk(sclk), .stb(stb), .iclk(iclk));

  always #5 sclk = ~sclk;
  always_ff @(posedge sclk) stb <= stb_d;
  always @(posedge iclk) iedges++;

  initial begin : watchdog
    repeat (5000) @(posedge sclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic stb_now;
    repeat (2) @(posedge sclk);
    for (int i = 0; i < 2000; i++) begin
      int n_prev;
      #2;
      stb_d = (i % 50 < 20) ? 1'b0 : ($urandom_range(0, 3) != 0);
      stb_now = stb;           // the value that gates the next edge
      n_prev = iedges;
      @(negedge sclk); #1;
      checks++;
      if (stb_now ? (iclk !== 1'b1) : (iclk !== 1'b0)) begin
        failures++; $display("FAIL iclk level in low phase, stb=%0b", stb_now);
      end
      @(posedge sclk); #1;
      checks++;
      if ((iedges - n_prev) != (stb_now ? 0 : 1)) begin
        failures++; $display("FAIL cycle %0d: %0d iclk edges with stb=%0b", i, iedges - n_prev, stb_now);
      end
      if (stb_now) standby_cycles++;
    end
    checks++;
    if (standby_cycles == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
