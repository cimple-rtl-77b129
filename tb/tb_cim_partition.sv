// tb_cim_partition: writes random INT8 weights into both blocks through the
// word lines, then applies random bit planes to one block at a time and checks
// that the 15-bit result equals the sum of the signed weights of the rows whose
// activation bit is 1. Also checks that a write to one block in the same cycle
// as a read of the other does not disturb the read.
//
// Clocked for writes; reads are combinational and checked after a settle.
// The OAI, the two nibble trees and the <<4 combine follow the published
// design; flip-flop storage and signed weights are this design's. A watchdog
// ends a run that does not finish.
module tb_cim_partition;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [127:0] wwl;
  logic [7:0]   wbl;
  logic [63:0]  r0, r1;
  logic [14:0]  mac;
  logic signed [7:0] w [2][64];
  cim_partition #(.N_ROWS(64)) dut (.clk(clk), .wwl(wwl), .wbl(wbl), .rwlb_blk0(r0), .rwlb_blk1(r1), .mac(mac));
  always #5 clk = ~clk;

  task automatic write_w(input int b, input int r, input logic [7:0] d);
    @(negedge clk);
    wwl = '0; wwl[b*64 + r] = 1'b1; wbl = d;
    @(negedge clk);
    wwl = '0;
  endtask

  initial begin
    wwl = '0; r0 = '1; r1 = '1; wbl = '0;
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < 64; r++) begin
        w[b][r] = 8'($urandom);
        if (r == 0) w[b][r] = -128;
        if (r == 1) w[b][r] = 127;
        write_w(b, r, w[b][r]);
      end
    for (int t = 0; t < 200; t++) begin
      logic [63:0] x;
      int b, e;
      b = t % 2;
      x = {$urandom, $urandom};
      if (t < 2) x = '1;
      @(negedge clk);
      r0 = (b == 0) ? ~x : '1;
      r1 = (b == 1) ? ~x : '1;
      // write into the other block in the same cycle
      if (t % 5 == 0) begin
        int rr;
        rr = $urandom_range(0, 63);
        w[1-b][rr] = 8'($urandom);
        wwl = '0; wwl[(1-b)*64 + rr] = 1'b1; wbl = w[1-b][rr];
      end
      e = 0;
      for (int r = 0; r < 64; r++) if (x[r]) e += int'(w[b][r]);
      #1;
      checks++;
      if (int'($signed(mac)) != e) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d blk=%0d mac=%0d exp=%0d", t, b, $signed(mac), e);
      end
      @(posedge clk); #1 wwl = '0;
    end
    // no block read: result zero
    @(negedge clk); r0 = '1; r1 = '1; #1;
    checks++;
    if (mac !== '0) failures++;
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
