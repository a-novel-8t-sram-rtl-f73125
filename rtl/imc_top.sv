// imc_top: 8x8 8T-SRAM in-memory-computing macro.
//
// One 8x8 array of 8T SRAM cells that works as an ordinary memory and, with
// several read word lines raised at once, as eight parallel 8-bit
// multiply-accumulate (MAC) units. In column c the MAC result is
//   count[c] = sum over rows r of A[r] & B[c][r],
// where B[c] is the column's stored word and A the pattern on the RWLs. Each
// conducting cell pulls the column's precharged read bit-line further down;
// eight comparators per column turn the voltage into a thermometer code, and
// the count and the logic functions AND/NAND, OR/NOR, XOR/XNOR (and the sum
// and carry of a 1-bit add, which equal XOR and AND) are read off that code.
//
// Blocks: row_decoder and column_decoder (3:8), write_driver,
// imc_cell_array (8x8 sram8t_cell), one rbl_column (precharge + RBL) and one
// mac_decoder (8 voltage_comparators) per column, and one logic_interpret
// per column. The analog parts are behavioural models with voltages in
// integer millivolts.
//
// Operation (one control word per clock; the reference clock is 142.85 MHz,
// 7 ns):
//   write:     wen=1, row_addr, col_addr, d   -> cell (row,col) <= d at the
//              clock edge. Loading an 8-bit operand takes 8 write cycles.
//   precharge: blpc=1 for one cycle          -> every RBL at 1.8 V.
//   MAC:       mac_en=1, rwl_pattern=A        -> in that same cycle mac_therm,
//              mac_count and the logic outputs of all columns are valid.
//   precharged[c] is 1 from a precharge until the next evaluation.
//   read:      after a precharge, rd_en=1 and row_addr -> rdata is the bit
//              at (row_addr, col_addr), and row_q[c] the whole row.
// Load (8 cycles) + precharge (1) = 63 ns, after which the result is
// available in the evaluation cycle: one operation per 63 ns, matching the
// published throughput of about 15.8 M operations/s. Only one of wen, blpc,
// rd_en/mac_en should be active in a cycle; the RBL model asserts that
// precharge and evaluation do not overlap.
//
// Follows the publication: array organisation, per-column precharge and MAC
// decoder, 3:8 decoders, the RBL levels and the decoded code per count, the
// logic interpretation rules. This design's choices: the clocked write, the
// comparator references (midpoints), reading a single row through the RWL
// port and the MAC decoder, the priority of mac_en over rd_en, and the
// synchronous active-low reset of the RBL state.
// Size: the RBL levels and default references are those of an 8-row column.
// AW sets both address widths, so ROWS = COLS = 2**AW; another size needs
// its own levels in imc_pkg and its own VREF.
module imc_top #(
  parameter int unsigned AW   = imc_pkg::ADDR_W,
  parameter int unsigned ROWS = imc_pkg::ROWS,
  parameter int unsigned COLS = imc_pkg::COLS,
  // Comparator references, VREF[k] for comparator k (mV); shared by all
  // columns. The publication re-tunes these for larger arrays and corners.
  parameter imc_pkg::mv_t [ROWS-1:0] VREF = {
    imc_pkg::vref_mv(7), imc_pkg::vref_mv(6), imc_pkg::vref_mv(5),
    imc_pkg::vref_mv(4), imc_pkg::vref_mv(3), imc_pkg::vref_mv(2),
    imc_pkg::vref_mv(1), imc_pkg::vref_mv(0)}
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // write port
  input  logic                              wen,
  input  logic [AW-1:0]                     row_addr,
  input  logic [AW-1:0]                     col_addr,
  input  logic                              d,
  // precharge / evaluate
  input  logic                              blpc,
  input  logic                              rd_en,
  input  logic                              mac_en,
  input  logic [ROWS-1:0]                   rwl_pattern,
  // results, one entry per column
  output imc_pkg::mv_t [COLS-1:0]           v_rbl,
  output logic [COLS-1:0][ROWS-1:0]         mac_therm,
  output logic [COLS-1:0][imc_pkg::CNT_W-1:0] mac_count,
  output logic [COLS-1:0]                   and_o,
  output logic [COLS-1:0]                   nand_o,
  output logic [COLS-1:0]                   or_o,
  output logic [COLS-1:0]                   nor_o,
  output logic [COLS-1:0]                   xor_o,
  output logic [COLS-1:0]                   xnor_o,
  // single-row read
  output logic [COLS-1:0]                   precharged,
  output logic [COLS-1:0]                   row_q,
  output logic                              rdata
);

  logic [ROWS-1:0]            wl;
  logic [ROWS-1:0]            rwl;
  logic [COLS-1:0]            col_sel;
  logic [COLS-1:0]            bl;
  logic [COLS-1:0]            blb;
  logic [COLS-1:0][ROWS-1:0]  pd;
  logic                       rwl_active;

  row_decoder #(.AW(AW), .ROWS(ROWS)) u_row_dec (
    .row_addr   (row_addr),
    .wen        (wen),
    .rd_en      (rd_en),
    .mac_en     (mac_en),
    .rwl_pattern(rwl_pattern),
    .wl         (wl),
    .rwl        (rwl)
  );

  column_decoder #(.AW(AW), .COLS(COLS)) u_col_dec (
    .en      (1'b1),
    .col_addr(col_addr),
    .col_sel (col_sel)
  );

  write_driver #(.COLS(COLS)) u_wdrv (
    .d      (d),
    .wen    (wen),
    .col_sel(col_sel),
    .bl     (bl),
    .blb    (blb)
  );

  imc_cell_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk(clk),
    .wl (wl),
    .rwl(rwl),
    .bl (bl),
    .blb(blb),
    .pd (pd),
    .q  ()
  );

  // The evaluation window opens whenever a read or MAC is requested, even if
  // the applied pattern is all zeros (the RBL then keeps its count-0 level).
  assign rwl_active = rd_en | mac_en;

  for (genvar c = 0; c < COLS; c++) begin : g_col
    rbl_column #(.ROWS(ROWS)) u_rbl (
      .clk       (clk),
      .rst_n     (rst_n),
      .blpc      (blpc),
      .rwl_active(rwl_active),
      .pd        (pd[c]),
      .v_rbl     (v_rbl[c]),
      .precharged(precharged[c])
    );

    mac_decoder #(.NCMP(ROWS), .VREF(VREF)) u_mdec (
      .v_rbl(v_rbl[c]),
      .mac  (mac_therm[c])
    );

    logic_interpret #(.NCMP(ROWS)) u_interp (
      .mac   (mac_therm[c]),
      .count (mac_count[c]),
      .and_o (and_o[c]),
      .nand_o(nand_o[c]),
      .or_o  (or_o[c]),
      .nor_o (nor_o[c]),
      .xor_o (xor_o[c]),
      .xnor_o(xnor_o[c])
    );

    // A single raised RWL gives count 1 for a stored 1 and 0 for a stored 0.
    assign row_q[c] = or_o[c];
  end

  always_comb begin
    rdata = 1'b0;
    for (int c = 0; c < COLS; c++) if (col_sel[c]) rdata = row_q[c];
  end

endmodule
