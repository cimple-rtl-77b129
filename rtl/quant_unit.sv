// quant_unit: 32b-to-8b quantization unit with the softmax multiplier.
//
// LANES identical lanes, one register stage (q_valid one cycle after in_valid).
// Two modes, chosen per beat:
//  * Q_LINEAR : q = sat8( (x * mult + 2^(shift-1)) >>> shift )
//               requantizes an INT32 sum (projection, QK^T score) to INT8.
//  * Q_SOFTNRM: the denominator S of the lane (scale, from the softmax ACC) is
//               normalised to 1.idx * 2^p; the reciprocal LUT gives
//               M = round(2^23/(256+idx)) and q = sat8( round(x * M / 2^(15+p)) ),
//               i.e. x / S: the second half of the split softmax, (e^z V M)_Q8b.
//               S = 0 yields 0.
// Saturation is to [-128, 127]. The unit and its place follow the paper; the
// formulas, rounding and saturation are this design's.
module quant_unit
  import cimple_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [LANES-1:0][ACC_W-1:0] in_data,
  input  qmode_e                      mode,
  input  logic [15:0]                 mult,
  input  logic [5:0]                  shift,
  input  logic [LANES-1:0][ACC_W-1:0] scale,
  output logic                        q_valid,
  output logic [LANES-1:0][Q_W-1:0]   q_out
);
  logic [LANES-1:0][7:0]  idx;
  logic [LANES-1:0][15:0] rec;
  logic [LANES-1:0][5:0]  pos;
  logic [LANES-1:0][Q_W-1:0] q_nxt;

  for (genvar k = 0; k < LANES; k++) begin : g_lane
    recip_lut u_rec (.idx(idx[k]), .rec(rec[k]));
  end

  function automatic logic [Q_W-1:0] sat8(input longint v);
    if (v > 127)       return 8'sd127;
    else if (v < -128) return 8'h80;
    else               return Q_W'(v);
  endfunction

  // leading one of the denominator and the mantissa bits below it
  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      pos[k] = '0;
      for (int b = 0; b < ACC_W; b++)
        if (scale[k][b]) pos[k] = 6'(b);
      if (pos[k] >= 6'd8) idx[k] = 8'(scale[k] >> (pos[k] - 6'd8));
      else                idx[k] = 8'(scale[k] << (6'd8 - pos[k]));
    end
  end

  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      longint x, prod, rnd;
      int     sh;

      x = longint'($signed(in_data[k]));
      if (mode == Q_LINEAR) begin
        prod = x * longint'({1'b0, mult});
        sh   = int'(shift);
      end else begin
        prod = x * longint'({1'b0, rec[k]});
        sh   = 15 + int'(pos[k]);
      end
      rnd = (sh == 0) ? 64'sd0 : (64'sd1 <<< (sh - 1));
      if (mode == Q_SOFTNRM && scale[k] == '0) q_nxt[k] = '0;
      else                                     q_nxt[k] = sat8((prod + rnd) >>> sh);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_valid <= 1'b0;
      q_out   <= '0;
    end else begin
      q_valid <= in_valid;
      if (in_valid) q_out <= q_nxt;
    end
  end
endmodule
