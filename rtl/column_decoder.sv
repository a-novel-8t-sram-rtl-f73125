// column_decoder: 3:8 column decoder of the 8x8 array.
//
// Decodes the 3-bit column address into a one-hot column select. The write
// driver uses it to steer the data bit onto one column's BL/BLbar pair, and
// the read path uses it to pick that column's result. All outputs are 0
// while en is 0. Purely combinational. The publication names a 3:8 column
// decoder; the enable is this design's choice.
module column_decoder #(
  parameter int unsigned AW   = imc_pkg::ADDR_W,
  parameter int unsigned COLS = 2**AW
) (
  input  logic            en,
  input  logic [AW-1:0]   col_addr,
  output logic [COLS-1:0] col_sel
);

  onehot_decoder #(.AW(AW)) u_dec (
    .en  (en),
    .addr(col_addr),
    .out (col_sel)
  );

endmodule
