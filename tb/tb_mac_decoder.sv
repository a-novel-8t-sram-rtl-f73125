// tb_mac_decoder: self-checking test of the 8-comparator MAC decoder.
// Applies the RBL level of every MAC count 0..8 and the precharge level and
// checks the thermometer code against the reference table (count n ->
// 8'hFF >> n). Then sweeps the whole 0..2000 mV range and checks each
// comparator against the midpoint references listed below.
module tb_mac_decoder;
  localparam int LEVEL [0:8] = '{1758, 1528, 1308, 1096, 895, 712, 552, 418, 310};
  // VRef k = midpoint of levels 7-k and 8-k, rounded down.
  localparam int VREF [0:7] = '{364, 485, 632, 803, 995, 1202, 1418, 1643};
  imc_pkg::mv_t v_rbl;
  logic [7:0] mac;
  logic [7:0] exp_code;
  int checks = 0, failures = 0;

  mac_decoder dut (.v_rbl, .mac);

  initial begin
    #100000ns;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n <= 8; n++) begin
      v_rbl = 11'(LEVEL[n]);
      #1ns;
      checks++;
      if (mac !== (8'hFF >> n)) begin
        failures++;
        $display("count %0d (%0d mV): code %b expected %b", n, LEVEL[n], mac, 8'hFF >> n);
      end
    end
    v_rbl = 11'd1800; #1ns;
    checks++;
    if (mac !== 8'hFF) begin failures++; $display("precharge level: code %b", mac); end
    for (int v = 0; v <= 2000; v += 3) begin
      v_rbl = 11'(v);
      #1ns;
      for (int k = 0; k < 8; k++) exp_code[k] = (v > VREF[k]);
      checks++;
      if (mac !== exp_code) begin
        failures++;
        $display("%0d mV: code %b expected %b", v, mac, exp_code);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
