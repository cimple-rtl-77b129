// tb_oai_mult: exhaustive check of the OAI multiplier.
// For every pair of 4-bit weights and each read word-line state (bank 0 read,
// bank 1 read, none) the product must be the selected weight (or zero).
//
// Combinational, checked after a short settle. The gate function comes from the
// published OAI cell; the expected values are worked out here independently.
// A watchdog ends a run that does not finish.
module tb_oai_mult;
  int checks = 0, failures = 0;
  logic [3:0] wb0, wb1, prod;
  logic [1:0] rwlb;
  oai_mult #(.NIB(4)) dut (.wb0(wb0), .wb1(wb1), .rwlb(rwlb), .prod(prod));
  initial begin
    for (int a = 0; a < 16; a++)
      for (int b = 0; b < 16; b++)
        for (int s = 0; s < 3; s++) begin
          logic [3:0] w0, w1, exp_p;
          w0 = 4'(a); w1 = 4'(b);
          wb0 = ~w0; wb1 = ~w1;
          rwlb = (s == 0) ? 2'b10 : (s == 1) ? 2'b01 : 2'b11;
          exp_p = (s == 0) ? w0 : (s == 1) ? w1 : 4'd0;
          #1;
          checks++;
          if (prod !== exp_p) begin
            failures++;
            if (failures < 5) $display("FAIL w0=%h w1=%h rwlb=%b prod=%h exp=%h", w0, w1, rwlb, prod, exp_p);
          end
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
