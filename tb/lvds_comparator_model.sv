// lvds_comparator_model: behavioural model (not synthesizable logic) of one
// FPGA LVDS input pair used as a voltage comparator: `out` is high while the
// voltage on the positive pin (the PMT pulse) is above the voltage on the
// negative pin (a DAC threshold). Ideal: no offset, hysteresis or delay.
module lvds_comparator_model (
  input  real  vp,
  input  real  vn,
  output logic out
);
  always_comb out = (vp > vn);
endmodule
