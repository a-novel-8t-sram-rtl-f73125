// tb_column_decoder: exhaustive self-checking test of the 3:8 column decoder.
module tb_column_decoder;
  logic en;
  logic [2:0] col_addr;
  logic [7:0] col_sel;
  int checks = 0, failures = 0;

  column_decoder dut (.en, .col_addr, .col_sel);

  initial begin
    #10000ns;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 8; a++) begin
        en = (e == 1);
        col_addr = 3'(a);
        #1ns;
        checks++;
        if (col_sel !== (en ? (8'b1 << a) : 8'h00)) begin
          failures++;
          $display("en=%b addr=%0d sel=%b", en, a, col_sel);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
