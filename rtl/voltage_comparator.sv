// voltage_comparator: behavioural model of the decoder's voltage comparator.
//
// Behavioural model of an analog circuit. The real part is a
// seven-transistor comparator: a differential pair (M1 on Vref, M3 on Vin)
// with a current-mirror load (M2, M4) and tail device M7, followed by an
// output stage (M5, M6). Here both inputs are integer millivolt values and
// the output is the digital decision: out = 1 when vin > vref. The polarity
// follows the reference decoding table, where a fully precharged RBL
// (MAC count 0) reads as all ones. Offset, noise and delay are not modelled.
// Purely combinational.
module voltage_comparator (
  input  imc_pkg::mv_t vin,
  input  imc_pkg::mv_t vref,
  output logic         out
);

  assign out = (vin > vref);

endmodule
