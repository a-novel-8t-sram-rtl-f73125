// row_decoder: drives the word lines (WL) and read word lines (RWL) of the
// 8x8 array.
//
// The reference design names a 3:8 row decoder that selects the row written
// or read. This block decodes the 3-bit row address with a 3:8 decoder:
//  - write:  WL of the addressed row is raised while wen is 1.
//  - read:   RWL of the addressed row is raised while rd_en is 1 (an ordinary
//            single-row read through the decoupled read port).
//  - MAC:    while mac_en is 1 the operand pattern rwl_pattern (operand A,
//            one bit per row) is put on the RWLs, all rows at once.
// mac_en takes priority over rd_en. Routing the MAC operand through this
// block, and the priority, are this design's choices; the publication only
// states that the bits of A are applied to the RWLs of the rows.
// Purely combinational.
module row_decoder #(
  parameter int unsigned AW   = imc_pkg::ADDR_W,
  parameter int unsigned ROWS = 2**AW
) (
  input  logic [AW-1:0]   row_addr,
  input  logic            wen,
  input  logic            rd_en,
  input  logic            mac_en,
  input  logic [ROWS-1:0] rwl_pattern,
  output logic [ROWS-1:0] wl,
  output logic [ROWS-1:0] rwl
);

  logic [ROWS-1:0] row_sel;

  onehot_decoder #(.AW(AW)) u_dec (
    .en  (1'b1),
    .addr(row_addr),
    .out (row_sel)
  );

  always_comb begin
    wl = wen ? row_sel : '0;
    if (mac_en)      rwl = rwl_pattern;
    else if (rd_en)  rwl = row_sel;
    else             rwl = '0;
  end

endmodule
