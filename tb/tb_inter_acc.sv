// tb_inter_acc: random store / accumulate / emit beats on random rows,
// compared with a model of the buffer kept in the testbench; emitted sums
// must appear one cycle after the beat.
//
// Clocked (10 time-unit period), stimulus driven at the falling edge. The
// store/add/emit behaviour follows the published ACC and buffer; the depth,
// addressing and one-cycle latency are this design's. A cycle watchdog ends
// a run that does not finish with a failure.
module tb_inter_acc;
  import cimple_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0, emit = 0;
  logic [3:0][22:0] in_data = '0;
  logic [5:0] addr = '0;
  logic out_valid;
  logic [3:0][31:0] out_data;
  longint model [64][4];
  bit     init  [64];
  inter_acc dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data), .addr(addr),
    .first(first), .emit(emit), .out_valid(out_valid), .out_data(out_data));
  always #5 clk = ~clk;

  initial begin
    int nemit = 0;
    logic exp_v;
    longint exp_d [4];
    repeat (2) @(posedge clk);
    rst_n = 1;
    exp_v = 0;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      // check last cycle's emit
      checks++;
      if (out_valid != exp_v) begin failures++; $display("FAIL valid t=%0d", t); end
      if (exp_v) for (int k = 0; k < 4; k++) begin
        checks++;
        if (longint'($signed(out_data[k])) != exp_d[k]) begin
          failures++;
          if (failures < 5) $display("FAIL t=%0d lane %0d got %0d exp %0d", t, k, $signed(out_data[k]), exp_d[k]);
        end
      end
      in_valid = ($urandom_range(0, 9) != 0);
      addr = 6'($urandom_range(0, 7));
      first = !init[addr] || ($urandom_range(0, 7) == 0);
      emit = ($urandom_range(0, 2) == 0);
      for (int k = 0; k < 4; k++) in_data[k] = 23'($urandom);
      exp_v = in_valid && emit;
      if (in_valid) begin
        init[addr] = 1;
        for (int k = 0; k < 4; k++) begin
          longint s;
          s = (first ? 0 : model[addr][k]) + longint'($signed(in_data[k]));
          s = longint'($signed(32'(s)));
          model[addr][k] = s;
          exp_d[k] = s;
        end
        if (emit) nemit++;
      end
    end
    checks++;
    if (nemit == 0) failures++;
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
