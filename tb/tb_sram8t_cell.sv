// tb_sram8t_cell: self-checking test of the 8T bit-cell model.
// Drives random WL/BL/BLbar/RWL for 400 cycles and checks Q and the read
// pull-down against a reference: a write happens only with WL high and
// BL != BLbar; the pull-down is RWL & Q and never disturbs Q.
module tb_sram8t_cell;
  logic clk = 1'b0;
  logic wl, bl, blb, rwl, q, rbl_pd;
  logic ref_q;
  int checks = 0, failures = 0;

  sram8t_cell dut (.clk, .wl, .bl, .blb, .rwl, .q, .rbl_pd);

  always #3.5ns clk = ~clk;

  initial begin
    #20000ns;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Initialise with an explicit write of 0.
    wl = 1; bl = 0; blb = 1; rwl = 0;
    @(posedge clk); #1ns;
    ref_q = 1'b0;
    for (int i = 0; i < 400; i++) begin
      wl  = $urandom_range(0, 1) == 1;
      bl  = $urandom_range(0, 1) == 1;
      blb = $urandom_range(0, 1) == 1;
      rwl = $urandom_range(0, 1) == 1;
      #0.5ns;
      checks++;
      if (rbl_pd !== (rwl & ref_q)) begin
        failures++;
        $display("pd mismatch at %0d: rwl=%b q=%b pd=%b", i, rwl, ref_q, rbl_pd);
      end
      @(posedge clk); #1ns;
      if (wl && (bl != blb)) ref_q = bl;
      checks++;
      if (q !== ref_q) begin
        failures++;
        $display("q mismatch at %0d: wl=%b bl=%b blb=%b q=%b exp=%b", i, wl, bl, blb, q, ref_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
