// tb_row_decoder: exhaustive self-checking test of the row decoder.
// For every address, every combination of wen/rd_en/mac_en and random RWL
// patterns, checks WL (one-hot while writing) and RWL (pattern for MAC,
// one-hot for a read, zero otherwise).
module tb_row_decoder;
  logic [2:0] row_addr;
  logic wen, rd_en, mac_en;
  logic [7:0] rwl_pattern, wl, rwl;
  logic [7:0] exp_wl, exp_rwl;
  int checks = 0, failures = 0;

  row_decoder dut (.row_addr, .wen, .rd_en, .mac_en, .rwl_pattern, .wl, .rwl);

  initial begin
    #100000ns;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 8; a++)
      for (int m = 0; m < 8; m++)
        for (int t = 0; t < 4; t++) begin
          row_addr = 3'(a);
          {wen, rd_en, mac_en} = 3'(m);
          rwl_pattern = 8'($urandom);
          #1ns;
          exp_wl  = wen ? (8'b1 << a) : 8'h00;
          exp_rwl = mac_en ? rwl_pattern : (rd_en ? (8'b1 << a) : 8'h00);
          checks++;
          if (wl !== exp_wl || rwl !== exp_rwl) begin
            failures++;
            $display("a=%0d m=%b: wl=%b exp %b, rwl=%b exp %b", a, m[2:0], wl, exp_wl, rwl, exp_rwl);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
