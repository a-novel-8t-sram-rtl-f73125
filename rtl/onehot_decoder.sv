// onehot_decoder: AW-to-2^AW binary decoder with enable.
//
// out[i] is 1 when en is 1 and addr equals i; all outputs are 0 when en is 0.
// With AW=3 this is the 3:8 decoder that both the row and the column decoder
// of the macro are built from. Purely combinational.
module onehot_decoder #(
  parameter int unsigned AW = 3
) (
  input  logic              en,
  input  logic [AW-1:0]     addr,
  output logic [2**AW-1:0]  out
);

  always_comb begin
    out = '0;
    if (en) out[addr] = 1'b1;
  end

endmodule
