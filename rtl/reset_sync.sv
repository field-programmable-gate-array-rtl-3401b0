// reset_sync: reset synchroniser. The reset asserts at once (asynchronously)
// and is released two clock edges after rst_in goes low, in step with clk.
// Interface: clk, rst_in (active high, asynchronous), rst_out (active high).
// Reset handling is not described by the source design; this is a standard
// choice.
module reset_sync (
  input  logic clk,
  input  logic rst_in,
  output logic rst_out
);
  logic r1;
  always_ff @(posedge clk or posedge rst_in) begin
    if (rst_in) begin
      r1      <= 1'b1;
      rst_out <= 1'b1;
    end else begin
      r1      <= 1'b0;
      rst_out <= r1;
    end
  end
endmodule
