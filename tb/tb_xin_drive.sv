// tb_xin_drive: random bit planes; the selected block's read word lines must
// equal the inverted input, the other block's (and both when disabled) stay high.
// Combinational, checked after a short settle. Gating by block select
// follows the published description (only one block active on a read); the
// enable input is this design's. A watchdog ends a run that does not finish.
module tb_xin_drive;
  int checks = 0, failures = 0;
  logic en, blk_sel;
  logic [63:0] xinlb, r0, r1;
  xin_drive #(.N_ROWS(64)) dut (.en(en), .blk_sel(blk_sel), .xinlb(xinlb), .rwlb_blk0(r0), .rwlb_blk1(r1));
  initial begin
    for (int i = 0; i < 400; i++) begin
      logic [63:0] e0, e1;
      en = 1'($urandom); blk_sel = 1'($urandom); xinlb = {$urandom, $urandom};
      e0 = (en && !blk_sel) ? xinlb : '1;
      e1 = (en &&  blk_sel) ? xinlb : '1;
      #1;
      checks++;
      if (r0 !== e0 || r1 !== e1) begin
        failures++;
        if (failures < 5) $display("FAIL en=%0d sel=%0d", en, blk_sel);
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
