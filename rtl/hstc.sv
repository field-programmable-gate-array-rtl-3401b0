// hstc: High-Speed Time Counter.
//
// A free-running binary counter clocked by the 500 MHz PLL clock. One count
// is one 2 ns tick, which is the time resolution of every timestamp in the
// design. Pulse capture and the PPS timer sample `count` in the same clock
// domain, so no synchroniser is needed on this bus.
//
// Interface: clk_hs, rst_hs (synchronous, active high), count[TS_W-1:0].
// Timing: count is 0 in the first cycle after reset is released and rises by
// one on every clk_hs edge, wrapping at 2^TS_W (about 1170 years at 64 bits).
// The 500 MHz rate and the 64-bit width come from the source architecture;
// the reset value is this design's choice.
module hstc #(
  parameter int unsigned TS_W = 64
) (
  input  logic            clk_hs,
  input  logic            rst_hs,
  output logic [TS_W-1:0] count
);
  always_ff @(posedge clk_hs) begin
    if (rst_hs) count <= '0;
    else        count <= count + 1'b1;
  end
endmodule
