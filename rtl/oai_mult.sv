// oai_mult: bit-level multiplier of the CIM array, one OAI per weight bit.
//
// Each OAI is shared by a bank-0 and a bank-1 bitcell. The cells present their
// inverted stored bit (WB) and the read word lines are active low (RWLB), driven
// with the inverted activation bit of the selected bank. An OR-AND-invert then
// gives prod = ~((WB0 | RWLB0) & (WB1 | RWLB1)) = (w0 & x0) | (w1 & x1), i.e. the
// 1b x NIB product of whichever bank is read. At most one RWLB may be low.
// Purely combinational. The gate function and signal names follow the paper;
// the nibble grouping is this implementation's.
module oai_mult #(
  parameter int NIB = 4
) (
  input  logic [NIB-1:0] wb0,   // inverted weight bits, bank 0
  input  logic [NIB-1:0] wb1,   // inverted weight bits, bank 1
  input  logic [1:0]     rwlb,  // active-low read word lines, bank 0 / bank 1
  output logic [NIB-1:0] prod
);
  always_comb begin
    for (int k = 0; k < NIB; k++)
      prod[k] = ~((wb0[k] | rwlb[0]) & (wb1[k] | rwlb[1]));
  end
endmodule
