// tb_imc_top: end-to-end self-checking test of the 8x8 IMC macro at its
// default size, clocked at 7 ns (142.85 MHz).
//
// 1. The 8-bit MAC of two all-ones operands: eight write cycles load
//    11111111 into column 0, one precharge cycle, then the evaluation. The
//    result must be count 8 and code 00000000, available 63 ns (9 cycles)
//    after the first write edge.
// 2. Every MAC count 0..8 on every column in parallel: column c is loaded
//    with c ones, A = 11111111; then random operands B (all columns) and A.
//    Each column's count, code and RBL level are checked against
//    popcount(A & B[c]) and the reference table.
// 3. Bitwise 8-bit logic and 1-bit addition: two 8-bit words stored in two
//    rows, both RWLs raised; AND/NAND, OR/NOR, XOR/XNOR of every column.
// 4. Ordinary reads of single rows through the read word lines.
// Every mechanism (write, precharge, MAC, each count 0..8, AND/NOR/XOR
// being true, read) is counted and must happen at least once.
module tb_imc_top;
  localparam int LEVEL [0:8] = '{1758, 1528, 1308, 1096, 895, 712, 552, 418, 310};

  logic clk = 1'b0;
  logic rst_n, wen, d, blpc, rd_en, mac_en;
  logic [2:0] row_addr, col_addr;
  logic [7:0] rwl_pattern;
  imc_pkg::mv_t [7:0] v_rbl;
  logic [7:0][7:0] mac_therm;
  logic [7:0][3:0] mac_count;
  logic [7:0] and_o, nand_o, or_o, nor_o, xor_o, xnor_o, precharged, row_q;
  logic rdata;

  logic [7:0][7:0] B;   // reference copy: B[c][r]
  int checks = 0, failures = 0;
  int n_write = 0, n_precharge = 0, n_mac = 0, n_read = 0;
  int n_and1 = 0, n_nor1 = 0, n_xor1 = 0;
  int count_seen [0:8];

  imc_top dut (.*);

  always #3.5ns clk = ~clk;   // 7 ns period

  int cyc = 0;   // clock edges seen
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  task automatic do_write(input int r, input int c, input logic v);
    wen = 1; row_addr = 3'(r); col_addr = 3'(c); d = v;
    @(posedge clk); #1ns;
    wen = 0;
    B[c][r] = v;
    n_write++;
  endtask

  task automatic do_precharge();
    blpc = 1;
    @(posedge clk); #1ns;
    blpc = 0;
    n_precharge++;
    check(precharged == 8'hFF, "all columns precharged");
  endtask

  function automatic int popcnt(input logic [7:0] v);
    int n = 0;
    for (int i = 0; i < 8; i++) n += int'(v[i]);
    return n;
  endfunction

  // Evaluate with pattern A and check all columns during the cycle.
  task automatic do_mac(input logic [7:0] a);
    mac_en = 1; rwl_pattern = a;
    #1ns;
    n_mac++;
    for (int c = 0; c < 8; c++) begin
      int n = popcnt(a & B[c]);
      count_seen[n]++;
      check(int'(mac_count[c]) == n,
            $sformatf("col %0d count %0d expected %0d", c, mac_count[c], n));
      check(mac_therm[c] == (8'hFF >> n),
            $sformatf("col %0d code %b expected %b", c, mac_therm[c], 8'hFF >> n));
      check(int'(v_rbl[c]) == LEVEL[n],
            $sformatf("col %0d RBL %0d mV expected %0d", c, v_rbl[c], LEVEL[n]));
    end
    @(posedge clk); #1ns;
    mac_en = 0;
  endtask

  task automatic load_column(input int c, input logic [7:0] w);
    for (int r = 0; r < 8; r++) do_write(r, c, w[r]);
  endtask

  initial begin
    int c0;
    for (int n = 0; n <= 8; n++) count_seen[n] = 0;
    rst_n = 0; wen = 0; d = 0; blpc = 0; rd_en = 0; mac_en = 0;
    row_addr = '0; col_addr = '0; rwl_pattern = '0;
    B = '0;
    repeat (2) @(posedge clk);
    #1ns;
    // Give every cell a known value.
    for (int c = 0; c < 8; c++) load_column(c, 8'h00);
    rst_n = 1;

    // 1. 8-bit MAC, both operands 11111111, timed.
    // t0: the clock edge that opens the first write cycle.
    @(posedge clk); #1ns; c0 = cyc;
    for (int r = 0; r < 8; r++) do_write(r, 0, 1'b1);
    do_precharge();
    // result valid from this clock edge on: 9 cycles of 7 ns = 63 ns
    check(cyc - c0 == 9,
          $sformatf("load + precharge took %0d cycles, expected 9 (63 ns)", cyc - c0));
    mac_en = 1; rwl_pattern = 8'hFF; #1ns;
    check(mac_count[0] == 4'd8 && mac_therm[0] == 8'h00,
          "all-ones 8-bit MAC gives count 8, code 00000000");
    @(posedge clk); #1ns; mac_en = 0; n_mac++; count_seen[8]++;

    // 2a. Column c holds c ones, A = 11111111: counts 0..7 side by side.
    for (int c = 0; c < 8; c++) load_column(c, 8'((16'h00FF << c) >> 8));
    do_precharge();
    do_mac(8'hFF);
    // 2b. Random operands.
    for (int t = 0; t < 20; t++) begin
      for (int c = 0; c < 8; c++) load_column(c, 8'($urandom));
      for (int k = 0; k < 4; k++) begin
        do_precharge();
        do_mac(8'($urandom));
      end
    end

    // 3. Bitwise logic on two 8-bit words stored in rows 2 and 5.
    for (int t = 0; t < 12; t++) begin
      logic [7:0] x, y;
      x = 8'($urandom); y = 8'($urandom);
      if (t == 0) begin x = 8'b0011_0101; y = 8'b0101_0011; end
      for (int c = 0; c < 8; c++) begin
        do_write(2, c, x[c]);
        do_write(5, c, y[c]);
      end
      do_precharge();
      mac_en = 1; rwl_pattern = 8'b0010_0100; #1ns;
      n_mac++;
      check(and_o == (x & y),   $sformatf("AND %b expected %b", and_o, x & y));
      check(nand_o == ~(x & y), "NAND");
      check(or_o == (x | y),    $sformatf("OR %b expected %b", or_o, x | y));
      check(nor_o == ~(x | y),  "NOR");
      check(xor_o == (x ^ y),   $sformatf("XOR/sum %b expected %b", xor_o, x ^ y));
      check(xnor_o == ~(x ^ y), "XNOR");
      for (int c = 0; c < 8; c++) begin
        // 1-bit add: {carry, sum} = x + y
        check({and_o[c], xor_o[c]} == 2'(x[c] + y[c]), $sformatf("1-bit add col %0d", c));
        n_and1 += int'(and_o[c]); n_nor1 += int'(nor_o[c]); n_xor1 += int'(xor_o[c]);
      end
      @(posedge clk); #1ns; mac_en = 0;
    end

    // 4. Single-row reads.
    for (int r = 0; r < 8; r++) begin
      logic [7:0] row;
      for (int c = 0; c < 8; c++) row[c] = B[c][r];
      do_precharge();
      rd_en = 1; row_addr = 3'(r); col_addr = 3'($urandom_range(0, 7)); #1ns;
      n_read++;
      check(row_q == row, $sformatf("read row %0d: %b expected %b", r, row_q, row));
      check(rdata == row[col_addr], $sformatf("rdata row %0d col %0d", r, col_addr));
      @(posedge clk); #1ns; rd_en = 0;
    end

    // Mechanism coverage.
    $display("writes=%0d precharges=%0d macs=%0d reads=%0d and1=%0d nor1=%0d xor1=%0d",
             n_write, n_precharge, n_mac, n_read, n_and1, n_nor1, n_xor1);
    check(n_write > 0 && n_precharge > 0 && n_mac > 0 && n_read > 0, "basic operations happened");
    check(n_and1 > 0 && n_nor1 > 0 && n_xor1 > 0, "AND, NOR and XOR each seen true");
    for (int n = 0; n <= 8; n++) begin
      $display("MAC count %0d seen %0d times", n, count_seen[n]);
      check(count_seen[n] > 0, $sformatf("MAC count %0d never produced", n));
    end
    $display("one operation = 9 cycles x 7 ns = 63 ns (%0.2f M operations/s)", 1000.0 / 63.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
