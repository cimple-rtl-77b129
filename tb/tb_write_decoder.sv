// tb_write_decoder: every address with write enable high gives exactly that
// word line (and its complement); with enable low no line is active.
// Combinational, checked after a short settle for each input. The 8-bit
// address and 256 word lines are the published sizes; the one-hot decode is
// this design's. A watchdog ends a run that does not finish.
module tb_write_decoder;
  int checks = 0, failures = 0;
  logic we;
  logic [7:0] wa;
  logic [255:0] wwl, wwlb;
  write_decoder #(.AW(8)) dut (.we(we), .wa(wa), .wwl(wwl), .wwlb(wwlb));
  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 256; a++) begin
        logic [255:0] exp_l;
        we = e[0]; wa = 8'(a);
        exp_l = '0;
        if (e == 1) exp_l[a] = 1'b1;
        #1;
        checks++;
        if (wwl !== exp_l || wwlb !== ~exp_l) begin
          failures++;
          if (failures < 5) $display("FAIL we=%0d wa=%0d", we, wa);
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
