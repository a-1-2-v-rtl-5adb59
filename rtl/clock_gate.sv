// clock_gate: the clock-gating (CG) cell placed in front of each BIC core.
//
// While stb is 0 the core clock iclk follows the system clock sclk; while stb
// is 1 iclk is held at 1 and the core, with all its state, is frozen. This is
// the "1" input of the multiplexer drawn in the paper's multi-core figure. To
// keep iclk free of glitches, stb passes through a latch that is open only
// while sclk is high, when iclk is 1 anyway; the latch is this design's own
// addition and is the intended latch reported by lint and synthesis.
//
// Timing: when stb comes from a register clocked by the rising edge of sclk,
// a change made at edge e applies from edge e+1 on: with stb raised at edge e,
// edge e+1 is the first edge iclk no longer shows; with stb cleared at edge e,
// iclk rises again at edge e+1.
module clock_gate (
  input  logic sclk,
  input  logic stb,
  output logic iclk
);
  logic stb_l;

  always_latch begin
    if (sclk) stb_l = stb;
  end

  assign iclk = sclk | stb_l;
endmodule
