// tb_xin_buffer: loads random vectors through the 64-bit port, streams them
// (some back to back, using ready in the last plane) and checks each of the
// 8 planes: inverted bit of every row, MSB first, xin_first on bit 7 only, the
// first plane one cycle after start, and no gap for back-to-back starts.
//
// Clocked, stimulus at the falling edge. The buffer's role and its 64-bit
// plane output are published; depth, write port and ready timing are this
// design's. A cycle watchdog ends a stuck run.
module tb_xin_buffer;
  import cimple_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic we = 0, start = 0;
  logic [6:0] waddr = '0;
  logic [63:0] wdata = '0;
  logic [3:0] vec = '0;
  logic ready, xin_en, xin_first;
  logic [63:0] xinlb;
  logic [7:0] m [16][64];
  xin_buffer dut (.clk(clk), .rst_n(rst_n), .we(we), .waddr(waddr), .wdata(wdata),
    .start(start), .vec(vec), .ready(ready), .xin_en(xin_en), .xin_first(xin_first), .xinlb(xinlb));
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 16; v++)
      for (int g = 0; g < 8; g++) begin
        @(negedge clk);
        we = 1; waddr = {v[3:0], g[2:0]};
        for (int j = 0; j < 8; j++) begin
          m[v][8*g + j] = 8'($urandom);
          wdata[j*8 +: 8] = m[v][8*g + j];
        end
      end
    @(negedge clk); we = 0;
    checks++;
    if (!ready || xin_en) failures++;
    for (int t = 0; t < 40; t++) begin
      int v;
      v = $urandom_range(0, 15);
      // wait for ready, then start
      while (!ready) @(negedge clk);
      start = 1; vec = 4'(v);
      @(negedge clk);
      start = 0;
      for (int b = 7; b >= 0; b--) begin
        logic [63:0] e;
        for (int r = 0; r < 64; r++) e[r] = ~m[v][r][b];
        checks++;
        if (!xin_en || xin_first != (b == 7) || xinlb !== e) begin
          failures++;
          if (failures < 5) $display("FAIL t=%0d bit %0d en=%0d first=%0d", t, b, xin_en, xin_first);
        end
        checks++;
        if (ready != (b == 0)) failures++;
        if (b != 0) @(negedge clk);
      end
      // every other operation: idle cycle in between
      if (t % 2 == 1) begin
        @(negedge clk);
        checks++;
        if (xin_en) failures++;
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
