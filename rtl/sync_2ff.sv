// sync_2ff: two-flip-flop synchroniser for slow level signals or for
// individual bits whose changes are far apart compared with the clock period.
// Interface: clk, rst (synchronous, active high), d[W-1:0] asynchronous in,
// q[W-1:0] out. Timing: q follows d two clk edges later; reset value RST_VAL.
// A standard structure, chosen by this design; the source does not describe
// its clock-domain crossings.
module sync_2ff #(
  parameter int unsigned W       = 1,
  parameter logic        RST_VAL = 1'b0
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] meta;
  always_ff @(posedge clk) begin
    if (rst) begin
      meta <= {W{RST_VAL}};
      q    <= {W{RST_VAL}};
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
