// threshold_dac_model: behavioural model (not synthesizable logic) of one
// 16-bit serial threshold DAC. While cs_n is low it shifts sdi in on each
// rising sclk edge, MSB first; when cs_n rises it updates its output to
// vout = code * VREF / 2^16. The part and its reference voltage are assumed.
module threshold_dac_model #(
  parameter real VREF = 3.3
) (
  input  logic sclk,
  input  logic sdi,
  input  logic cs_n,
  output real  vout
);
  logic [15:0] sh = '0;
  logic [15:0] code = '0;
  always @(posedge sclk) if (!cs_n) sh <= {sh[14:0], sdi};
  always @(posedge cs_n) code <= sh;
  always_comb vout = real'(code) * VREF / 65536.0;
endmodule
