// tb_cim_core: full-size core. Random INT8 weights are written into both
// blocks through the 128-bit write port, random INT8 activation vectors are
// applied as 8 inverted bit planes (MSB first), and each of the 32 column
// results read out over the 8 output cycles (lane k, cycle c = column 4c+k)
// is compared with the dot product computed in the testbench. Operations run
// back to back, alternate blocks, overlap writes into the idle block, and the
// latency from the first plane to the first output (9 cycles) is checked.
//
// Clocked, stimulus at the falling edge. Sizes, the counter and the output
// multiplexers are the published ones; the column order, the address map and
// the cycle timing are this design's. A cycle watchdog ends a stuck run.
module tb_cim_core;
  import cimple_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic we = 0;
  logic [7:0] wa = '0;
  logic [127:0] wbl = '0;
  logic xin_en = 0, xin_first = 0, blk_sel = 0;
  logic [63:0] xinlb = '1;
  logic res_load, out_valid;
  logic [2:0] out_sel;
  logic [3:0][22:0] cim_out;
  logic signed [7:0] w [2][64][32];   // [block][row][column]

  cim_core dut (.clk(clk), .rst_n(rst_n), .we(we), .wa(wa), .wbl(wbl),
    .xin_en(xin_en), .xin_first(xin_first), .blk_sel(blk_sel), .xinlb(xinlb),
    .res_load(res_load), .out_valid(out_valid), .out_sel(out_sel), .cim_out(cim_out));
  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc++;

  // expected results queue: one entry per operation
  int exp_q [$];
  int start_q [$];
  int nops = 0;

  task automatic wr_row(input int b, input int r, input int g);
    logic [127:0] d;
    for (int j = 0; j < 16; j++) d[j*8 +: 8] = w[b][r][16*g + j];
    we = 1; wa = {b[0], r[5:0], g[0]}; wbl = d;
  endtask

  // output checker
  int cur [32];
  int out_cnt = 0;
  always @(negedge clk) if (rst_n && out_valid) begin
    if (out_sel == 0) begin
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else begin
        int st;
        for (int c = 0; c < 32; c++) cur[c] = exp_q.pop_front();
        st = start_q.pop_front();
        checks++;
        if (cyc - st != 9) begin failures++; $display("FAIL latency %0d", cyc - st); end
      end
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (int'($signed(cim_out[k])) != cur[4*out_sel + k]) begin
        failures++;
        if (failures < 8) $display("FAIL col %0d got %0d exp %0d", 4*out_sel + k, $signed(cim_out[k]), cur[4*out_sel + k]);
      end
    end
    out_cnt++;
  end

  initial begin
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < 64; r++)
        for (int c = 0; c < 32; c++) w[b][r][c] = 8'($urandom);
    w[0][0][0] = -128; w[0][1][0] = -128;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load both blocks
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < 64; r++)
        for (int g = 0; g < 2; g++) begin
          @(negedge clk); wr_row(b, r, g);
        end
    @(negedge clk); we = 0;
    // operations
    for (int op = 0; op < 24; op++) begin
      logic signed [7:0] x [64];
      int e [32];
      int b;
      b = (op / 3) % 2;
      for (int r = 0; r < 64; r++) x[r] = 8'($urandom);
      if (op == 0) for (int r = 0; r < 64; r++) x[r] = -128;
      // gap between some operations
      if (op % 4 == 3) begin @(negedge clk); xin_en = 0; xin_first = 0; we = 0; repeat (2) @(negedge clk); end
      for (int bit_i = 7; bit_i >= 0; bit_i--) begin
        @(negedge clk);
        xin_en = 1; xin_first = (bit_i == 7); blk_sel = b[0];
        for (int r = 0; r < 64; r++) xinlb[r] = ~x[r][bit_i];
        if (bit_i == 7) begin
          for (int c = 0; c < 32; c++) begin
            e[c] = 0;
            for (int r = 0; r < 64; r++) e[c] += int'(x[r]) * int'(w[b][r][c]);
          end
          for (int c = 0; c < 32; c++) exp_q.push_back(e[c]);
          start_q.push_back(cyc);
        end
        // rewrite a row of the other block while this one computes
        if (bit_i == 4) begin
          int rr, gg;
          rr = $urandom_range(0, 63); gg = $urandom_range(0, 1);
          for (int j = 0; j < 16; j++) w[1-b][rr][16*gg + j] = 8'($urandom);
          wr_row(1 - b, rr, gg);
        end else we = 0;
      end
      nops++;
    end
    @(negedge clk); xin_en = 0; xin_first = 0; we = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (out_cnt != 24 * 8 || exp_q.size() != 0) begin failures++; $display("FAIL beats %0d", out_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
