// imc_pkg: constants shared by the 8T SRAM in-memory-computing macro.
//
// The macro is an 8x8 array of 8T SRAM cells. A MAC result appears as an
// analog read-bit-line (RBL) voltage, which this RTL carries as an unsigned
// integer number of millivolts (mv_t). The RBL level reached for each MAC
// count 0..8 is the simulated value of the reference design (Table I of the
// source publication); the precharge level is 1.8 V. The comparator reference
// voltages are not published: this design places each one half-way between
// the two RBL levels it has to separate (integer millivolts, rounded down).
//
// Thermometer convention used throughout: decoded code bit k is the output of
// comparator k (VRef k -> MACk). Bit k is 1 when the RBL is above VRef k.
// Written MSB first, the 8-bit code for MAC count n is the string listed in
// the reference table: n=0 -> 8'b1111_1111, n=1 -> 8'b0111_1111, ...,
// n=8 -> 8'b0000_0000. So comparator 7 separates counts 0 and 1 and
// comparator 0 separates counts 7 and 8.
package imc_pkg;

  // Array geometry (8 rows x 8 columns, 3-bit row and column addresses).
  localparam int unsigned ROWS   = 8;
  localparam int unsigned COLS   = 8;
  localparam int unsigned ADDR_W = 3;
  // Width of a count 0..ROWS.
  localparam int unsigned CNT_W  = 4;

  // Voltages in millivolts.
  localparam int unsigned MV_W = 11;
  typedef logic [MV_W-1:0] mv_t;

  // RBL precharge level: 1.8 V.
  localparam mv_t VPRE_MV = mv_t'(1800);

  // RBL voltage after the 0.7 ns evaluation window for `n` conducting cells.
  function automatic mv_t rbl_level_mv(input logic [CNT_W-1:0] n);
    unique case (n)
      4'd0:    return mv_t'(1758);
      4'd1:    return mv_t'(1528);
      4'd2:    return mv_t'(1308);
      4'd3:    return mv_t'(1096);
      4'd4:    return mv_t'(895);
      4'd5:    return mv_t'(712);
      4'd6:    return mv_t'(552);
      4'd7:    return mv_t'(418);
      default: return mv_t'(310);   // 8 (counts above 8 cannot occur)
    endcase
  endfunction

  // Reference voltage of comparator k (0..7): midpoint of the RBL levels for
  // counts 7-k and 8-k.
  function automatic mv_t vref_mv(input int unsigned k);
    int unsigned hi;
    int unsigned lo;
    hi = int'(rbl_level_mv(CNT_W'(7 - k)));
    lo = int'(rbl_level_mv(CNT_W'(8 - k)));
    return mv_t'((hi + lo) / 2);
  endfunction

endpackage
