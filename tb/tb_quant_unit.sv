// tb_quant_unit: random beats in both modes. Linear results are compared with
// round(x * mult / 2^shift) evaluated in real arithmetic and saturated to INT8.
// Softmax-normalised results are compared with x * M / 2^(15+p), M taken from
// 2^23/(256+idx), evaluated in real arithmetic, and must also lie within one
// step plus 0.5% of the exact quotient x / S.
//
// Clocked, one beat per cycle, results checked one cycle later. The 32b-to-8b
// unit and the reciprocal multiply are published; both formulas are this
// design's. A cycle watchdog ends a stuck run.
module tb_quant_unit;
  import cimple_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [3:0][31:0] in_data = '0, scale = '0;
  qmode_e mode = Q_LINEAR;
  logic [15:0] mult = '0;
  logic [5:0] shift = '0;
  logic q_valid;
  logic [3:0][7:0] q_out;
  quant_unit dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data), .mode(mode),
    .mult(mult), .shift(shift), .scale(scale), .q_valid(q_valid), .q_out(q_out));
  always #5 clk = ~clk;

  function automatic int sat(input real r);
    real f;
    f = $floor(r + 0.5);
    if (f > 127.0) return 127;
    if (f < -128.0) return -128;
    return int'(f);
  endfunction

  initial begin
    int exp_q [4];
    int nsat = 0, nlin = 0, nnorm = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      in_valid = 1;
      mode = qmode_e'(t % 2);
      mult = 16'($urandom_range(1, 65535));
      shift = 6'($urandom_range(10, 40));
      for (int k = 0; k < 4; k++) begin
        real r;
        if (mode == Q_LINEAR) begin
          in_data[k] = 32'($signed(24'($urandom)));
          r = real'($signed(in_data[k])) * real'(mult) / (2.0 ** shift);
          exp_q[k] = sat(r);
          nlin++;
        end else begin
          int p, idx;
          real m, exact;
          scale[k] = 32'($urandom_range(1, 1 << $urandom_range(1, 24)));
          // weighted mean of INT8 values times S keeps the quotient in range
          in_data[k] = 32'(int'($signed(8'($urandom))) * int'(scale[k]) / 128);
          p = 0;
          for (int b = 0; b < 32; b++) if (scale[k][b]) p = b;
          idx = (p >= 8) ? int'((scale[k] >> (p - 8)) & 32'hff) : int'((scale[k] << (8 - p)) & 32'hff);
          m = $floor(8388608.0 / (256.0 + idx) + 0.5);
          r = real'($signed(in_data[k])) * m / (2.0 ** (15 + p));
          exp_q[k] = sat(r);
          exact = real'($signed(in_data[k])) / real'(scale[k]);
          checks++;
          if ((exp_q[k] - exact) > 1.0 + 0.005 * 128 || (exact - exp_q[k]) > 1.0 + 0.005 * 128) failures++;
          nnorm++;
        end
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!q_valid) failures++;
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (int'($signed(q_out[k])) != exp_q[k]) begin
          failures++;
          if (failures < 6) $display("FAIL t=%0d mode=%0d lane %0d got %0d exp %0d x=%0d s=%0d", t, mode, k, $signed(q_out[k]), exp_q[k], $signed(in_data[k]), scale[k]);
        end
        if (exp_q[k] == 127 || exp_q[k] == -128) nsat++;
      end
    end
    // zero denominator gives zero
    @(negedge clk);
    in_valid = 1; mode = Q_SOFTNRM; scale = '0; in_data = {4{32'd1000}};
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (q_out !== '0) failures++;
    checks++;
    if (nsat == 0 || nlin == 0 || nnorm == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
