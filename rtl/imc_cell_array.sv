// imc_cell_array: behavioural model of the 8x8 array of 8T SRAM cells.
//
// Behavioural model built from sram8t_cell instances. Following the array
// organisation of the reference design, every row shares one write word line
// (WL) and one read word line (RWL), and every column shares BL, BLbar and
// one read bit-line (RBL). The RBL itself is analog and lives in rbl_column;
// this block hands it, per column, the set of cells whose read stacks
// conduct (pd[c][r] = RWL[r] & Q[c][r]).
//
// Ports: clk; wl[r], rwl[r] per row; bl[c], blb[c] per column;
// pd[c][r] read pull-down of cell (r,c); q[c][r] stored bits, for observation.
// Timing: writes take effect on the clock edge (see sram8t_cell); pd is
// combinational in rwl.
module imc_cell_array #(
  parameter int unsigned ROWS = imc_pkg::ROWS,
  parameter int unsigned COLS = imc_pkg::COLS
) (
  input  logic                           clk,
  input  logic [ROWS-1:0]                wl,
  input  logic [ROWS-1:0]                rwl,
  input  logic [COLS-1:0]                bl,
  input  logic [COLS-1:0]                blb,
  output logic [COLS-1:0][ROWS-1:0]      pd,
  output logic [COLS-1:0][ROWS-1:0]      q
);

  for (genvar c = 0; c < COLS; c++) begin : g_col
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      sram8t_cell u_cell (
        .clk   (clk),
        .wl    (wl[r]),
        .bl    (bl[c]),
        .blb   (blb[c]),
        .rwl   (rwl[r]),
        .q     (q[c][r]),
        .rbl_pd(pd[c][r])
      );
    end
  end

endmodule
