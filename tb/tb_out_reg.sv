// tb_out_reg: streams operations of 8 beats to the CIM and XIN destinations
// and checks the packed 128-bit and 64-bit words, their position fields and
// that they are valid exactly one cycle after the completing beat.
//
// Clocked, stimulus driven at the falling edge. The 128b and 64b widths are the
// published ones; the byte packing order and the half/group fields are this
// design's. A cycle watchdog ends a run that does not finish.
module tb_out_reg;
  import cimple_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [3:0][7:0] in_data = '0;
  logic [2:0] sel = '0;
  dst_e dst = DST_NONE;
  logic wr_valid, wr_half, xin_valid;
  logic [127:0] wr_data;
  logic [63:0] xin_data;
  logic [1:0] xin_grp;
  out_reg dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data), .sel(sel), .dst(dst),
    .wr_valid(wr_valid), .wr_data(wr_data), .wr_half(wr_half),
    .xin_valid(xin_valid), .xin_data(xin_data), .xin_grp(xin_grp));
  always #5 clk = ~clk;

  initial begin
    int nwr = 0, nxin = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int op = 0; op < 30; op++) begin
      logic [7:0] col [32];
      dst_e d;
      d = dst_e'(op % 3);
      for (int c = 0; c < 32; c++) col[c] = 8'($urandom);
      for (int c = 0; c < 8; c++) begin
        @(negedge clk);
        in_valid = 1; sel = 3'(c); dst = d;
        for (int k = 0; k < 4; k++) in_data[k] = col[4*c + k];
        @(negedge clk);
        in_valid = 0;
        // outputs of the beat just taken
        checks++;
        if (wr_valid != (d == DST_CIM && c % 4 == 3) || xin_valid != (d == DST_XIN && c % 2 == 1)) begin
          failures++;
          if (failures < 5) $display("FAIL valid op=%0d c=%0d", op, c);
        end
        if (wr_valid) begin
          logic [127:0] e;
          for (int j = 0; j < 16; j++) e[j*8 +: 8] = col[16*(c/4) + j];
          checks++; nwr++;
          if (wr_data !== e || wr_half != (c/4 == 1)) begin failures++; $display("FAIL wr op=%0d c=%0d", op, c); end
        end
        if (xin_valid) begin
          logic [63:0] e;
          for (int j = 0; j < 8; j++) e[j*8 +: 8] = col[8*(c/2) + j];
          checks++; nxin++;
          if (xin_data !== e || xin_grp != 2'(c/2)) begin failures++; $display("FAIL xin op=%0d c=%0d", op, c); end
        end
      end
    end
    checks++;
    if (nwr == 0 || nxin == 0) failures++;
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
