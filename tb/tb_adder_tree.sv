// tb_adder_tree: random and extreme input vectors for the unsigned (LSB) and
// signed (MSB) 64 x 4b trees, compared with a running sum.
// Combinational: inputs are applied, then checked after a 1-time-unit settle;
// no clock. The 64 x 4b / 10b sizes are the published ones; the signed
// variant for the high nibble is this design's two's-complement choice.
// A watchdog ends the run with a failure if it does not finish.
module tb_adder_tree;
  int checks = 0, failures = 0;
  logic [255:0] v;
  logic [9:0] su, ss;
  adder_tree #(.N(64), .IN_W(4), .OUT_W(10), .SIGNED_IN(1'b0)) dut_u (.in_vec(v), .sum(su));
  adder_tree #(.N(64), .IN_W(4), .OUT_W(10), .SIGNED_IN(1'b1)) dut_s (.in_vec(v), .sum(ss));
  initial begin
    for (int i = 0; i < 300; i++) begin
      int eu, es;
      if (i == 0) v = '1;
      else if (i == 1) v = {64{4'h8}};
      else if (i == 2) v = {64{4'h7}};
      else for (int w = 0; w < 8; w++) v[w*32 +: 32] = $urandom;
      eu = 0; es = 0;
      for (int k = 0; k < 64; k++) begin
        eu += int'(v[k*4 +: 4]);
        es += int'($signed(v[k*4 +: 4]));
      end
      #1;
      checks += 2;
      if (int'(su) != eu) begin failures++; if (failures < 5) $display("FAIL unsigned %0d exp %0d", su, eu); end
      if (int'($signed(ss)) != es) begin failures++; if (failures < 5) $display("FAIL signed %0d exp %0d", $signed(ss), es); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
