// tb_imc_tables: workload test that replays the two published tables on the
// full 8x8 macro (default parameters, 7 ns clock).
//
// Table "RBL voltage vs MAC count": for n = 0..8, column operand B has ones
// in its first n positions (B pattern 10000000, 11000000, ...), operand A
// has ones in those positions and don't-care bits (x) elsewhere. Position i
// of a pattern string, counted from the left, is row i here. Every x is
// filled with a random bit in each of several trials, and every column gets
// the same B. Expected: count n, RBL level and decoded code from the table.
// Table "AND, NOR, XOR": RWL pattern 11 on rows 0 and 1, data 00/01/10/11,
// with the expected decoded count, RBL level, AND/carry, NOR, XOR/sum.
module tb_imc_tables;
  // Reference table values, in millivolts and as printed code strings.
  localparam int          TAB_MV   [0:8] = '{1758, 1528, 1308, 1096, 895, 712, 552, 418, 310};
  localparam logic [7:0]  TAB_CODE [0:8] = '{8'b11111111, 8'b01111111, 8'b00111111,
                                             8'b00011111, 8'b00001111, 8'b00000111,
                                             8'b00000011, 8'b00000001, 8'b00000000};

  logic clk = 1'b0;
  logic rst_n, wen, d, blpc, rd_en, mac_en;
  logic [2:0] row_addr, col_addr;
  logic [7:0] rwl_pattern;
  imc_pkg::mv_t [7:0] v_rbl;
  logic [7:0][7:0] mac_therm;
  logic [7:0][3:0] mac_count;
  logic [7:0] and_o, nand_o, or_o, nor_o, xor_o, xnor_o, precharged, row_q;
  logic rdata;
  int checks = 0, failures = 0;

  imc_top dut (.*);

  always #3.5ns clk = ~clk;

  initial begin
    #100us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Write bit string position i (from the left) of w into row i of every column.
  task automatic load_all_columns(input logic [7:0] w);
    for (int c = 0; c < 8; c++)
      for (int i = 0; i < 8; i++) begin
        wen = 1; row_addr = 3'(i); col_addr = 3'(c); d = w[7-i];
        @(posedge clk); #1ns;
        wen = 0;
      end
  endtask

  task automatic precharge();
    blpc = 1; @(posedge clk); #1ns; blpc = 0;
  endtask

  // String (MSB = leftmost = row 0) to RWL vector (bit r = row r).
  function automatic logic [7:0] to_rows(input logic [7:0] s);
    logic [7:0] v;
    for (int i = 0; i < 8; i++) v[i] = s[7-i];
    return v;
  endfunction

  initial begin
    rst_n = 0; wen = 0; d = 0; blpc = 0; rd_en = 0; mac_en = 0;
    row_addr = '0; col_addr = '0; rwl_pattern = '0;
    repeat (2) @(posedge clk);
    #1ns; rst_n = 1;

    for (int n = 0; n <= 8; n++) begin
      logic [7:0] b_str, care;
      care  = ~(8'hFF >> n);   // first n positions
      b_str = care;
      load_all_columns(b_str);
      for (int t = 0; t < 6; t++) begin
        logic [7:0] a_str;
        a_str = care | (8'($urandom) & ~care);
        precharge();
        mac_en = 1; rwl_pattern = to_rows(a_str); #1ns;
        for (int c = 0; c < 8; c++) begin
          check(int'(mac_count[c]) == n, $sformatf("MAC %0d: col %0d count %0d", n, c, mac_count[c]));
          check(int'(v_rbl[c]) == TAB_MV[n], $sformatf("MAC %0d: col %0d RBL %0d mV", n, c, v_rbl[c]));
          check(mac_therm[c] == TAB_CODE[n], $sformatf("MAC %0d: col %0d code %b", n, c, mac_therm[c]));
        end
        @(posedge clk); #1ns; mac_en = 0;
      end
    end

    // Logic table: data bits in rows 0 and 1 of every column, RWL pattern 11.
    for (int dv = 0; dv < 4; dv++) begin
      logic a, b;
      int n;
      a = dv[1]; b = dv[0];
      n = int'(a) + int'(b);
      load_all_columns({a, b, 6'b0});
      precharge();
      mac_en = 1; rwl_pattern = 8'b0000_0011; #1ns;
      for (int c = 0; c < 8; c++) begin
        check(int'(mac_count[c]) == n && int'(v_rbl[c]) == TAB_MV[n],
              $sformatf("data %b%b: col %0d count %0d RBL %0d", a, b, c, mac_count[c], v_rbl[c]));
        check(and_o[c] == (a & b) && nor_o[c] == !(a | b) && xor_o[c] == (a ^ b),
              $sformatf("data %b%b: col %0d and=%b nor=%b xor=%b", a, b, c, and_o[c], nor_o[c], xor_o[c]));
      end
      @(posedge clk); #1ns; mac_en = 0;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
