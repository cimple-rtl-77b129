// write_decoder: decodes the 8-bit write address WA into 256 write word lines.
//
// When we is high exactly one WWL is high and its WWLB low; otherwise all WWL
// are low and all WWLB high. Combinational. The word-line count follows the
// paper (WA 8b, WWL/WWLB 256b); the meaning of the address bits is defined by
// cim_core as {block, row[5:0], column group}.
module write_decoder #(
  parameter int AW = 8
) (
  input  logic            we,
  input  logic [AW-1:0]   wa,
  output logic [2**AW-1:0] wwl,
  output logic [2**AW-1:0] wwlb
);
  always_comb begin
    wwl = '0;
    if (we) wwl[wa] = 1'b1;
    wwlb = ~wwl;
  end
endmodule
