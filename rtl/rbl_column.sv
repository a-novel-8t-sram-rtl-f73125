// rbl_column: behavioural model of one column's pre-charge circuit and read
// bit-line (RBL).
//
// Behavioural model of an analog node. The RBL voltage is carried as an
// integer number of millivolts (imc_pkg::mv_t). Sequence, as in the reference
// design:
//  1. precharge: while blpc is 1 the RBL is held at 1.8 V.
//  2. evaluate:  while rwl_active is 1 (any RWL raised) every cell with
//     RWL = 1 and Q = 1 discharges the RBL during a short (0.7 ns) window.
//     The line settles at the simulated level for that many conducting cells
//     (imc_pkg::rbl_level_mv: 1.758 V for 0 ... 0.310 V for 8).
//  3. afterwards the line keeps the level it reached until the next
//     precharge.
// The window is far shorter than the 7 ns clock, so the model treats the
// discharge as complete within the evaluation cycle: v_rbl is combinational
// in pd during that cycle, and the level is stored at the clock edge that
// ends it. A second evaluation without a precharge can only lower the line
// further (this model takes the lower of the stored and the new level; the
// publication does not cover that case). Reset leaves the line discharged
// (0 mV); the publication does not say what reset does.
//
// Ports: clk, rst_n (active-low, synchronous); blpc precharge enable;
// rwl_active; pd[r] read pull-down of each cell of the column;
// v_rbl RBL voltage in mV; precharged (1 from a precharge until the next
// evaluation).
// Rules checked by assertions: precharge and evaluation never overlap, and
// an evaluation follows a precharge.
module rbl_column #(
  parameter int unsigned ROWS = imc_pkg::ROWS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            blpc,
  input  logic            rwl_active,
  input  logic [ROWS-1:0] pd,
  output imc_pkg::mv_t    v_rbl,
  output logic            precharged
);
  import imc_pkg::*;

  mv_t              v_q;
  logic [CNT_W-1:0] n_on;
  mv_t              v_eval;

  always_comb begin
    n_on = '0;
    for (int r = 0; r < ROWS; r++) n_on = n_on + CNT_W'(pd[r]);
  end

  always_comb begin
    v_eval = rbl_level_mv(n_on);
    if (v_q < v_eval) v_eval = v_q;
  end

  always_comb begin
    if (blpc)            v_rbl = VPRE_MV;
    else if (rwl_active) v_rbl = v_eval;
    else                 v_rbl = v_q;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_q        <= '0;
      precharged <= 1'b0;
    end else if (blpc) begin
      v_q        <= VPRE_MV;
      precharged <= 1'b1;
    end else if (rwl_active) begin
      v_q        <= v_eval;
      precharged <= 1'b0;
    end
  end

  // Sequencing rules, checked at every clock edge out of reset.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_no_overlap : assert (!(blpc && rwl_active))
        else $error("rbl_column: precharge and RWL active in the same cycle");
      a_eval_after_pc : assert (!(rwl_active && !blpc) || precharged)
        else $error("rbl_column: evaluation without a preceding precharge");
    end
  end

endmodule
