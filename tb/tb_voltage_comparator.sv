// tb_voltage_comparator: self-checking test of the comparator model.
// Random and edge-case input pairs; out must be 1 exactly when vin > vref.
module tb_voltage_comparator;
  imc_pkg::mv_t vin, vref;
  logic out;
  int checks = 0, failures = 0;

  voltage_comparator dut (.vin, .vref, .out);

  initial begin
    #100000ns;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      int a, b;
      a = $urandom_range(0, 2000);
      case (i % 3)
        0: b = a;
        1: b = a + 1;
        default: b = $urandom_range(0, 2000);
      endcase
      if (b > 2047) b = 2047;
      vin = 11'(a); vref = 11'(b);
      #1ns;
      checks++;
      if (out !== (a > b)) begin
        failures++;
        $display("vin=%0d vref=%0d out=%b", a, b, out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
