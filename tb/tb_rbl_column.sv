// tb_rbl_column: self-checking test of the precharge / read-bit-line model.
// Checks: the line reads 0 mV after reset; 1.8 V while precharging; for every
// number of conducting cells 0..8 (random choice of which rows) the level
// from the reference table during and after evaluation; that the level is
// held until the next precharge.
module tb_rbl_column;
  localparam int LEVEL [0:8] = '{1758, 1528, 1308, 1096, 895, 712, 552, 418, 310};
  logic clk = 1'b0;
  logic rst_n, blpc, rwl_active, precharged;
  logic [7:0] pd;
  imc_pkg::mv_t v_rbl;
  int checks = 0, failures = 0;

  rbl_column dut (.clk, .rst_n, .blpc, .rwl_active, .pd, .v_rbl, .precharged);

  always #3.5ns clk = ~clk;

  initial begin
    #20000ns;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_v(input int exp, input string what);
    checks++;
    if (int'(v_rbl) != exp) begin
      failures++;
      $display("%s: v_rbl=%0d mV, expected %0d mV", what, v_rbl, exp);
    end
  endtask

  function automatic logic [7:0] rand_ones(input int n);
    logic [7:0] v = '0;
    int placed = 0;
    while (placed < n) begin
      int r = $urandom_range(0, 7);
      if (!v[r]) begin v[r] = 1'b1; placed++; end
    end
    return v;
  endfunction

  initial begin
    rst_n = 0; blpc = 0; rwl_active = 0; pd = '0;
    @(posedge clk); @(posedge clk); #1ns;
    expect_v(0, "after reset");
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++)
      for (int n = 0; n <= 8; n++) begin
        blpc = 1; #1ns;
        expect_v(1800, "precharge");
        @(posedge clk); #1ns;
        blpc = 0;
        checks++;
        if (!precharged) begin failures++; $display("precharged flag not set"); end
        expect_v(1800, "after precharge");
        rwl_active = 1; pd = rand_ones(n); #1ns;
        expect_v(LEVEL[n], $sformatf("evaluate n=%0d", n));
        @(posedge clk); #1ns;
        rwl_active = 0; pd = '0; #1ns;
        expect_v(LEVEL[n], $sformatf("hold n=%0d", n));
        @(posedge clk); #1ns;
        expect_v(LEVEL[n], $sformatf("hold2 n=%0d", n));
      end
    // Reset in the middle of a held level discharges the line again.
    rst_n = 0; @(posedge clk); #1ns; rst_n = 1;
    expect_v(0, "second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
