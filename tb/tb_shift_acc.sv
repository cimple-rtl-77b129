// tb_shift_acc: feeds the 8 plane sums of random signed activations times a
// random 15-bit partial and checks the accumulated 23-bit result after the
// 8th plane against x * p computed directly.
//
// Clocked, one plane per cycle, stimulus at the falling edge. The MSB-first
// <<1 accumulate and the 15b/23b widths are the published ones; subtracting
// the sign plane is this design's. A cycle watchdog ends a stuck run.
module tb_shift_acc;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [14:0] in_val;
  logic [22:0] acc;
  shift_acc #(.IN_W(15), .OUT_W(23)) dut (.clk(clk), .rst_n(rst_n), .en(en), .first(first), .in_val(in_val), .acc(acc));
  always #5 clk = ~clk;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      logic signed [7:0]  x;
      logic signed [14:0] p;
      int expv;
      x = 8'($urandom); p = 15'($urandom);
      if (t == 0) begin x = -128; p = -16384; end
      if (t == 1) begin x = 127;  p = 16383;  end
      for (int b = 7; b >= 0; b--) begin
        @(negedge clk);
        en = 1; first = (b == 7);
        in_val = x[b] ? p : 15'd0;
        if (b == 3 && t % 7 == 0) begin   // a stall cycle in the middle
          en = 0;
          @(negedge clk);
          en = 1;
        end
      end
      @(negedge clk);
      en = 0;
      expv = int'(x) * int'(p);
      checks++;
      if (int'($signed(acc)) != expv) begin
        failures++;
        if (failures < 5) $display("FAIL x=%0d p=%0d acc=%0d exp=%0d", x, p, $signed(acc), expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
