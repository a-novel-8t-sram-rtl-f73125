// tb_write_driver: exhaustive self-checking test of the write driver.
// The selected column gets BL=d, BLbar=~d while wen is 1; every other column
// and every column while wen is 0 keeps both bit lines high.
module tb_write_driver;
  logic d, wen;
  logic [7:0] col_sel, bl, blb;
  logic [7:0] exp_bl, exp_blb;
  int checks = 0, failures = 0;

  write_driver dut (.d, .wen, .col_sel, .bl, .blb);

  initial begin
    #10000ns;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int dd = 0; dd < 2; dd++)
      for (int w = 0; w < 2; w++)
        for (int c = 0; c < 8; c++) begin
          d = (dd == 1); wen = (w == 1); col_sel = 8'b1 << c;
          #1ns;
          exp_bl = 8'hFF; exp_blb = 8'hFF;
          if (wen) begin
            exp_bl[c] = d; exp_blb[c] = ~d;
          end
          checks++;
          if (bl !== exp_bl || blb !== exp_blb) begin
            failures++;
            $display("d=%b wen=%b col=%0d bl=%b blb=%b", d, wen, c, bl, blb);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
