// tb_recip_lut: every entry against 2^23/(256+idx) evaluated in real
// arithmetic and rounded to nearest.
// Combinational: each index is applied and checked after a short settle.
// The table formula is this design's choice (the published design only
// names a reciprocal LUT). A watchdog ends a run that does not finish.
module tb_recip_lut;
  int checks = 0, failures = 0;
  logic [7:0] idx;
  logic [15:0] rec;
  recip_lut dut (.idx(idx), .rec(rec));
  initial begin
    for (int i = 0; i < 256; i++) begin
      real r;
      int e;
      idx = 8'(i);
      r = 8388608.0 / (256.0 + i);
      e = int'($floor(r + 0.5));
      #1;
      checks++;
      if (int'(rec) != e) begin
        failures++;
        if (failures < 5) $display("FAIL idx=%0d rec=%0d exp=%0d", i, rec, e);
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
