// recip_lut: reciprocal LUT of the split softmax.
//
// Gives the mantissa of 1/S for a denominator S normalised to 1.idx (idx the
// 8 bits below its leading one): rec = round(2^23 / (256 + idx)), a 16-bit
// value between 16416 and 32768. The quantization unit applies the exponent of
// S as a shift. The table is built at elaboration from that formula and reads
// combinationally. The paper has a reciprocal LUT; its size and indexing are
// this design's.
module recip_lut #(
  parameter int IDX_W = 8,
  parameter int REC_W = 16
) (
  input  logic [IDX_W-1:0] idx,
  output logic [REC_W-1:0] rec
);
  localparam int N   = 2**IDX_W;
  localparam int NUM = 2**(IDX_W + REC_W - 1);   // 2^23

  logic [REC_W-1:0] table_q [N];

  for (genvar i = 0; i < N; i++) begin : g_tab
    assign table_q[i] = REC_W'((NUM + (N + i) / 2) / (N + i));
  end

  assign rec = table_q[idx];
endmodule
