// mac_decoder: behavioural model of one column's MAC decoder.
//
// Behavioural model of an analog flash-style decoder: eight voltage
// comparators all watch the same RBL, comparator k against reference VRef k,
// and together they turn the RBL voltage into an 8-bit thermometer code.
// mac[k] is comparator k's output (MACk). References come from
// imc_pkg::vref_mv: each sits half-way between two adjacent RBL levels
// (the publication says only that each threshold is set from the RBL voltage
// of one MAC result). The resulting code for MAC count n, written MSB first,
// is the published one: all ones for 0, one more leading zero per count, all
// zeros for 8. The VREF parameter lets the references be re-tuned, as the
// publication suggests for larger arrays or process corners.
// Purely combinational.
module mac_decoder #(
  parameter int unsigned NCMP = imc_pkg::ROWS,
  parameter imc_pkg::mv_t [NCMP-1:0] VREF = {
    imc_pkg::vref_mv(7), imc_pkg::vref_mv(6), imc_pkg::vref_mv(5),
    imc_pkg::vref_mv(4), imc_pkg::vref_mv(3), imc_pkg::vref_mv(2),
    imc_pkg::vref_mv(1), imc_pkg::vref_mv(0)}
) (
  input  imc_pkg::mv_t    v_rbl,
  output logic [NCMP-1:0] mac
);

  for (genvar k = 0; k < NCMP; k++) begin : g_vc
    voltage_comparator u_vc (
      .vin (v_rbl),
      .vref(VREF[k]),
      .out (mac[k])
    );
  end

endmodule
