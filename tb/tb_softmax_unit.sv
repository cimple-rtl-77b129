// tb_softmax_unit: loads a random e^x table, then feeds random INT8 score
// beats with random slots and restart flags. Checks the looked-up numerators
// (address z + 128) one cycle later, every per-slot denominator and the total
// against a model kept in the testbench.
//
// Clocked (100 time-unit period, so several settle steps fit in a cycle),
// stimulus at the falling edge. The 256 x 8b e^x table per lane and the
// z_quant_max offset follow the published design; the slots, the total and
// the load port are this design's. A watchdog ends a stuck run.
module tb_softmax_unit;
  import cimple_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic lut_we = 0;
  logic [7:0] lut_addr = '0, lut_wdata = '0;
  logic in_valid = 0, first = 0;
  logic [2:0] slot = '0, sum_slot = '0;
  logic [3:0][7:0] z = '0;
  logic e_valid;
  logic [3:0][7:0] e_out;
  logic [3:0][31:0] sum_out;
  logic [31:0] sum_total;
  logic [7:0] tab [256];
  longint msum [4][8];
  longint mtot;
  softmax_unit dut (.clk(clk), .rst_n(rst_n), .lut_we(lut_we), .lut_addr(lut_addr), .lut_wdata(lut_wdata),
    .in_valid(in_valid), .acc_en(1'b1), .first(first), .slot(slot), .z(z),
    .e_valid(e_valid), .e_out(e_out), .sum_slot(sum_slot), .sum_out(sum_out), .sum_total(sum_total));
  always #50 clk = ~clk;

  initial begin
    logic [7:0] exp_e [4];
    logic exp_v;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      tab[a] = 8'($urandom_range(0, 127));
      lut_we = 1; lut_addr = 8'(a); lut_wdata = tab[a];
    end
    @(negedge clk); lut_we = 0;
    for (int s = 0; s < 8; s++) for (int k = 0; k < 4; k++) msum[k][s] = 0;
    mtot = 0;
    exp_v = 0;
    for (int t = 0; t < 800; t++) begin
      @(negedge clk);
      checks++;
      if (e_valid != exp_v) failures++;
      if (exp_v) for (int k = 0; k < 4; k++) begin
        checks++;
        if (e_out[k] !== exp_e[k]) begin failures++; if (failures < 5) $display("FAIL e t=%0d", t); end
      end
      // check all slot sums and the total
      for (int s = 0; s < 8; s++) begin
        sum_slot = 3'(s); #1;
        for (int k = 0; k < 4; k++) begin
          checks++;
          if (longint'(sum_out[k]) != msum[k][s]) begin
            failures++;
            if (failures < 5) $display("FAIL sum t=%0d k=%0d s=%0d got %0d exp %0d", t, k, s, sum_out[k], msum[k][s]);
          end
        end
      end
      checks++;
      if (longint'(sum_total) != mtot) begin failures++; if (failures < 5) $display("FAIL total"); end
      // next beat
      in_valid = ($urandom_range(0, 5) != 0);
      slot = 3'(t % 8);
      first = (t % 64) < 8;
      for (int k = 0; k < 4; k++) z[k] = 8'($urandom);
      if (t == 5) z = {4{8'h7f}};
      if (t == 6) z = {4{8'h80}};
      exp_v = in_valid;
      if (in_valid) begin
        longint bs;
        bs = 0;
        for (int k = 0; k < 4; k++) begin
          exp_e[k] = tab[int'($signed(z[k])) + 128];
          msum[k][slot] = (first ? 0 : msum[k][slot]) + longint'(exp_e[k]);
          bs += longint'(exp_e[k]);
        end
        mtot = ((first && slot == 0) ? 0 : mtot) + bs;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
