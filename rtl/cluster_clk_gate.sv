// cluster_clk_gate: clock gate for the follower cores' fetch stages and
// private instruction caches.
//
// Standard glitch-free gate: the enable is captured by a latch that is
// transparent while the clock is low, and the clock is passed only while the
// latched enable is high. A change of en_i therefore takes effect at the next
// rising edge and never cuts a high clock phase short. test_en_i forces the
// clock on (scan). On silicon this is a library clock-gating cell; the latch
// reported by lint is intended.
module cluster_clk_gate (
  input  logic clk_i,
  input  logic en_i,
  input  logic test_en_i,
  output logic clk_o
);

  logic en_latched;

  always_latch begin
    if (!clk_i) en_latched = en_i | test_en_i;
  end

  assign clk_o = clk_i & en_latched;

endmodule
