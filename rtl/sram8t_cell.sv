// sram8t_cell: behavioural model of one 8T SRAM bit cell.
//
// Behavioural model of a transistor-level cell. The real cell is a
// cross-coupled 6T core (M1-M6) written through the access transistors M5/M6
// from BL and BLbar while WL is high, plus a decoupled two-transistor read
// stack: M7 has its gate on the storage node Q and M8 is gated by RWL, so the
// stack conducts from RBL to ground only while RWL is high and Q is 1. The
// read path never touches Q, which is why many RWLs can be raised at once.
//
// Model: the write is sampled on the rising clock edge. With WL high and
// BL/BLbar driven complementary (BL != BLbar), Q takes BL. With both bit
// lines high (the idle, precharged state of an unselected column) the cell
// keeps its value, as a real half-selected cell does. `rbl_pd` is 1 while the
// read stack conducts; the read bit-line model adds up these pull-downs.
// The clocked write is this model's abstraction; the storage is not reset,
// like any SRAM.
//
// Ports: clk; wl, bl, blb (write port); rwl (read word line);
// q (stored value, for observation); rbl_pd (read stack conducting).
module sram8t_cell (
  input  logic clk,
  input  logic wl,
  input  logic bl,
  input  logic blb,
  input  logic rwl,
  output logic q,
  output logic rbl_pd
);

  always_ff @(posedge clk) begin
    if (wl && (bl != blb)) q <= bl;
  end

  // M7 (gate = Q) in series with M8 (gate = RWL).
  assign rbl_pd = rwl & q;

endmodule
