// tb_imc_cell_array: self-checking test of the 8x8 cell array model.
// Writes every cell one at a time (one WL high, one column driven
// complementary, the others with both bit lines high), checks that only the
// addressed cell changed, then applies random RWL patterns and checks every
// column's pull-down set pd[c][r] = RWL[r] & B[c][r].
module tb_imc_cell_array;
  localparam int R = 8, C = 8;
  logic clk = 1'b0;
  logic [R-1:0] wl, rwl;
  logic [C-1:0] bl, blb;
  logic [C-1:0][R-1:0] pd, q;
  logic [C-1:0][R-1:0] ref_b;
  int checks = 0, failures = 0;

  imc_cell_array dut (.clk, .wl, .rwl, .bl, .blb, .pd, .q);

  always #3.5ns clk = ~clk;

  initial begin
    #50000ns;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_cell(input int r, input int c, input logic v);
    wl = '0; wl[r] = 1'b1;
    bl = '1; blb = '1;
    bl[c] = v; blb[c] = ~v;
    @(posedge clk); #1ns;
    wl = '0; bl = '1; blb = '1;
    ref_b[c][r] = v;
  endtask

  initial begin
    wl = '0; rwl = '0; bl = '1; blb = '1;
    for (int pass = 0; pass < 3; pass++) begin
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          write_cell(r, c, (pass == 0) ? 1'b0 : ($urandom_range(0, 1) == 1));
          if (pass > 0) begin
            checks++;
            if (q !== ref_b) begin
              failures++;
              $display("array contents differ after write (%0d,%0d)", r, c);
            end
          end
        end
      for (int t = 0; t < 20; t++) begin
        rwl = R'($urandom);
        #1ns;
        for (int c = 0; c < C; c++) begin
          checks++;
          if (pd[c] !== (rwl & ref_b[c])) begin
            failures++;
            $display("pd col %0d: got %b exp %b", c, pd[c], rwl & ref_b[c]);
          end
        end
        @(posedge clk); #1ns;
      end
      rwl = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
