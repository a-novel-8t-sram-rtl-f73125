// tb_logic_interpret: self-checking test of the MAC-count and logic read-out.
// For every thermometer code of the reference table (count n -> 8'hFF >> n)
// checks the count, and for the two-operand cases of the logic table
// (operand pairs 00, 01, 10, 11 -> counts 0, 1, 1, 2) checks AND/NAND,
// OR/NOR, XOR/XNOR, which are also the carry and sum of a 1-bit add.
module tb_logic_interpret;
  logic [7:0] mac;
  logic [3:0] count;
  logic and_o, nand_o, or_o, nor_o, xor_o, xnor_o;
  int checks = 0, failures = 0;

  logic_interpret dut (.mac, .count, .and_o, .nand_o, .or_o, .nor_o, .xor_o, .xnor_o);

  initial begin
    #10000ns;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n <= 8; n++) begin
      mac = 8'hFF >> n;
      #1ns;
      checks++;
      if (int'(count) != n) begin
        failures++;
        $display("code %b: count %0d expected %0d", mac, count, n);
      end
      checks++;
      // Rules: AND when count >= 2, NOR when count == 0, XOR when count == 1.
      if (and_o !== (n >= 2) || nor_o !== (n == 0) || xor_o !== (n == 1) ||
          nand_o !== (n < 2) || or_o !== (n != 0) || xnor_o !== (n != 1)) begin
        failures++;
        $display("count %0d: and=%b nand=%b or=%b nor=%b xor=%b xnor=%b",
                 n, and_o, nand_o, or_o, nor_o, xor_o, xnor_o);
      end
    end
    // Two-operand table: a, b -> 1-bit sum and carry.
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++) begin
        mac = 8'hFF >> (a + b);
        #1ns;
        checks++;
        if (xor_o !== 1'(a ^ b) || and_o !== 1'(a & b) || nor_o !== 1'(!(a | b))) begin
          failures++;
          $display("a=%0d b=%0d: sum=%b carry=%b nor=%b", a, b, xor_o, and_o, nor_o);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
