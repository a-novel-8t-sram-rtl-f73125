// write_driver: write driver and column multiplexers of the 8x8 array.
//
// While wen is 1 the column picked by the one-hot col_sel gets BL = d and
// BLbar = ~d, which overwrites the cell whose WL is high. Every other column,
// and every column while wen is 0, keeps BL = BLbar = 1 (both bit lines
// high), which leaves its cells unchanged. The publication says only that the
// write driver reaches the cells through multiplexers; holding idle bit lines
// high is this design's choice. Purely combinational.
module write_driver #(
  parameter int unsigned COLS = imc_pkg::COLS
) (
  input  logic            d,
  input  logic            wen,
  input  logic [COLS-1:0] col_sel,
  output logic [COLS-1:0] bl,
  output logic [COLS-1:0] blb
);

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      if (wen && col_sel[c]) begin
        bl[c]  = d;
        blb[c] = ~d;
      end else begin
        bl[c]  = 1'b1;
        blb[c] = 1'b1;
      end
    end
  end

endmodule
