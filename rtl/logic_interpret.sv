// logic_interpret: reads the MAC count and the MAC-derived logic functions
// off one column's decoded thermometer code.
//
// mac[k] is comparator k of the MAC decoder (1 while the RBL is above
// VRef k); see imc_pkg for the convention. The number of cells that
// discharged the RBL is the number of comparators that went low:
//   count = 8 - popcount(mac).
// For a two-operand logic operation the two operand bits are stored in two
// rows of the column and both RWLs are raised; then, as in the publication:
//   NOR = (count == 0)  -> comparator 7 still high
//   AND = (count >= 2)  -> comparator 6 low       (carry of a 1-bit add)
//   XOR = (count == 1)  -> comparator 7 low, 6 high (sum of a 1-bit add)
// with OR, NAND and XNOR their complements. Reading AND and NOR from single
// comparators, and XOR from two, is this design's choice of how to carry out
// the publication's interpretation rules. NOR and NAND are therefore wired
// straight to comparators 7 and 6: the functions come from the decoder with
// no extra gates, which is the point of the scheme. Purely combinational.
module logic_interpret #(
  parameter int unsigned NCMP  = imc_pkg::ROWS,
  parameter int unsigned CNT_W = imc_pkg::CNT_W
) (
  input  logic [NCMP-1:0]  mac,
  output logic [CNT_W-1:0] count,
  output logic             and_o,
  output logic             nand_o,
  output logic             or_o,
  output logic             nor_o,
  output logic             xor_o,
  output logic             xnor_o
);

  always_comb begin
    count = CNT_W'(NCMP);
    for (int k = 0; k < NCMP; k++) count = count - CNT_W'(mac[k]);
  end

  assign nor_o  = mac[NCMP-1];
  assign or_o   = ~nor_o;
  assign and_o  = ~mac[NCMP-2];
  assign nand_o = ~and_o;
  assign xor_o  = ~mac[NCMP-1] & mac[NCMP-2];
  assign xnor_o = ~xor_o;

endmodule
