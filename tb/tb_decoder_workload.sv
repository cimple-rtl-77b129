// tb_decoder_workload: one autoregressive decoder attention step at the
// attention-head size of the model used in the published accuracy study
// (TinyLlama: head dimension 64, context up to 2048 tokens), run on the
// accelerator at its default size.
//
// The new query Q_n sits in the XIN buffer. The cached keys and values are
// processed in tiles of 32: K^T of the tile is written into block 0 (row d,
// column j), and one operation gives the 32 scores. They are quantized,
// looked up in the e^x table, added to the running total and written back by
// the Reg as the lower half of an XIN vector whose upper half is zero. The
// tile's V is written into rows 0..31 of block 1, dimensions 0..31 first,
// then 32..63, and the numerator vector streams against each; the A'V sums
// of the two halves are added in the intermediate ACC across all tiles. The
// last tile emits them, normalised by the total over all keys. Every score
// and output is compared with a bit-exact model, and the outputs also with a
// floating-point softmax.
//
// Timing: operations are issued one at a time and the host reloads the
// weights between them (write ports are 128 bits per cycle), so this flow is
// bound by the weight writes; the cycle count is printed. The tiling and the
// command sequence are this testbench's; the head dimension comes from the
// published evaluation model and the context length from that model's
// configuration. A watchdog ends a run that does not finish with a failure.
module tb_decoder_workload;
  import cimple_pkg::*;

  localparam int HD  = 64;     // head dimension
  localparam int NK  = 2048;   // cached tokens
  localparam int KT  = 32;     // keys per tile (CIM columns)
  localparam int NT  = NK / KT;
  localparam real LUT_S = 1.0 / 48.0;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cmd_valid = 0;
  cmd_t        cmd = '0;
  logic        cmd_ready;
  logic        ext_we = 0;
  logic [7:0]  ext_wa = '0;
  logic [127:0] ext_wdata = '0;
  logic        ext_wready;
  logic        xin_we = 0;
  logic [6:0]  xin_waddr = '0;
  logic [63:0] xin_wdata = '0;
  logic        xin_wready;
  logic        lut_we = 0;
  logic [7:0]  lut_addr = '0, lut_wdata = '0;
  logic [15:0] q_mult = 16'd1;
  logic [5:0]  q_shift = 6'd5;
  logic        score_valid;
  logic [2:0]  score_sel;
  logic [3:0][7:0] score;

  cimple_top dut (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid(cmd_valid), .cmd(cmd), .cmd_ready(cmd_ready),
    .ext_we(ext_we), .ext_wa(ext_wa), .ext_wdata(ext_wdata), .ext_wready(ext_wready),
    .xin_we(xin_we), .xin_waddr(xin_waddr), .xin_wdata(xin_wdata), .xin_wready(xin_wready),
    .lut_we(lut_we), .lut_addr(lut_addr), .lut_wdata(lut_wdata),
    .q_mult(q_mult), .q_shift(q_shift),
    .score_valid(score_valid), .score_sel(score_sel), .score(score));

  int cyc = 0;
  always @(posedge clk) cyc++;

  // ------------------------------------------------------------------
  // reference arithmetic
  // ------------------------------------------------------------------
  int tab [256];

  function automatic int sat8(input longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  function automatic int qlin(input longint x, input int m, input int sh);
    real r;
    r = real'(x) * real'(m) / (2.0 ** sh);
    return sat8(longint'($floor(r + 0.5)));
  endfunction

  function automatic int qnorm(input longint x, input longint s);
    int p, idx;
    real mm, r;
    if (s == 0) return 0;
    p = 0;
    for (int b = 0; b < 32; b++) if (s[b]) p = b;
    idx = (p >= 8) ? int'((s >> (p - 8)) & 255) : int'((s << (8 - p)) & 255);
    mm = $floor(8388608.0 / (256.0 + idx) + 0.5);
    r = real'(x) * mm / (2.0 ** (15 + p));
    return sat8(longint'($floor(r + 0.5)));
  endfunction

  int qv [HD];
  int Km [NK][HD];
  int Vm [NK][HD];
  int Zm [NK];
  int Em [NK];
  longint St;
  int Om [HD];
  real maxerr = 0.0;

  // ------------------------------------------------------------------
  // expected score beats (32 columns per operation that produces output)
  // ------------------------------------------------------------------
  int exp_cols [$];
  int cur [32];
  int n_beats = 0;
  always @(negedge clk) if (rst_n && score_valid) begin
    if (score_sel == 0) begin
      if (exp_cols.size() < 32) begin
        failures++;
        $display("FAIL unexpected score beat at cycle %0d", cyc);
        for (int c = 0; c < 32; c++) cur[c] = 0;
      end else
        for (int c = 0; c < 32; c++) cur[c] = exp_cols.pop_front();
    end
    n_beats++;
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (int'($signed(score[k])) != cur[4*score_sel + k]) begin
        failures++;
        if (failures < 10) $display("FAIL score col %0d got %0d exp %0d (cycle %0d)",
                                    4*score_sel + k, int'($signed(score[k])), cur[4*score_sel + k], cyc);
      end
    end
  end

  // ------------------------------------------------------------------
  // host side
  // ------------------------------------------------------------------
  task automatic ext_write(input logic [7:0] a, input logic [127:0] d);
    ext_we = 1; ext_wa = a; ext_wdata = d;
    #1;
    while (!ext_wready) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    ext_we = 0;
  endtask

  task automatic xin_write(input logic [6:0] a, input logic [63:0] d);
    xin_we = 1; xin_waddr = a; xin_wdata = d;
    #1;
    while (!xin_wready) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    xin_we = 0;
  endtask

  task automatic issue(input cmd_t c);
    @(negedge clk);
    cmd_valid = 1; cmd = c;
    #1;
    while (!cmd_ready) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  function automatic cmd_t base_cmd();
    cmd_t c;
    c = '0;
    c.qmode = Q_LINEAR;
    c.dst = DST_NONE;
    return c;
  endfunction

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int a = 0; a < 256; a++) begin
      tab[a] = int'($floor(127.0 * $exp(LUT_S * real'(a - 255)) + 0.5));
      @(negedge clk);
      lut_we = 1; lut_addr = 8'(a); lut_wdata = 8'(tab[a]);
    end
    @(negedge clk); lut_we = 0;

    for (int d = 0; d < HD; d++) qv[d] = $urandom_range(0, 48) - 24;
    for (int j = 0; j < NK; j++) for (int d = 0; d < HD; d++) begin
      Km[j][d] = $urandom_range(0, 48) - 24;
      Vm[j][d] = $urandom_range(0, 255) - 128;
    end

    // model
    St = 0;
    for (int j = 0; j < NK; j++) begin
      longint s;
      s = 0;
      for (int d = 0; d < HD; d++) s += longint'(qv[d] * Km[j][d]);
      Zm[j] = qlin(s, 1, 5);
      Em[j] = tab[Zm[j] + 128];
      St += longint'(Em[j]);
    end
    for (int d = 0; d < HD; d++) begin
      longint a;
      real fr, den;
      a = 0; fr = 0.0; den = 0.0;
      for (int j = 0; j < NK; j++) begin
        a += longint'(Em[j] * Vm[j][d]);
        fr += $exp(LUT_S * real'(Zm[j] - 127)) * real'(Vm[j][d]);
        den += $exp(LUT_S * real'(Zm[j] - 127));
      end
      Om[d] = qnorm(a, St);
      fr = fr / den;
      if (real'(Om[d]) - fr > maxerr) maxerr = real'(Om[d]) - fr;
      if (fr - real'(Om[d]) > maxerr) maxerr = fr - real'(Om[d]);
    end

    // query in vector 0; numerator vector 1 with its upper half zero
    for (int g = 0; g < 8; g++) begin
      logic [63:0] dd;
      for (int j = 0; j < 8; j++) dd[j*8 +: 8] = 8'(qv[8*g + j]);
      xin_write({4'd0, 3'(g)}, dd);
      xin_write({4'd1, 3'(g)}, 64'd0);
    end
    // rows 32..63 of block 1 stay zero
    for (int r = 32; r < 64; r++)
      for (int h = 0; h < 2; h++) ext_write({1'b1, 6'(r), 1'(h)}, 128'd0);

    t0 = cyc;
    for (int t = 0; t < NT; t++) begin
      cmd_t c;
      // K^T of the tile into block 0, V dimensions 0..31 into block 1
      for (int r = 0; r < HD; r++)
        for (int h = 0; h < 2; h++) begin
          logic [127:0] dd;
          for (int j = 0; j < 16; j++) dd[j*8 +: 8] = 8'(Km[KT*t + 16*h + j][r]);
          ext_write({1'b0, 6'(r), 1'(h)}, dd);
        end
      for (int r = 0; r < KT; r++)
        for (int h = 0; h < 2; h++) begin
          logic [127:0] dd;
          for (int j = 0; j < 16; j++) dd[j*8 +: 8] = 8'(Vm[KT*t + r][16*h + j]);
          ext_write({1'b1, 6'(r), 1'(h)}, dd);
        end
      // scores -> numerators into vector 1, lower half
      c = base_cmd(); c.blk = 1'b0; c.xin_vec = 4'd0;
      c.sm_en = 1'b1; c.sm_first = (t == 0); c.reg_src_sm = 1'b1;
      c.dst = DST_XIN; c.dst_vec = 4'd1; c.dst_half = 1'b0;
      for (int j = 0; j < KT; j++) exp_cols.push_back(Zm[KT*t + j]);
      issue(c);
      repeat (24) @(negedge clk);
      // A'V, dimensions 0..31 (ACC group 0)
      c = base_cmd(); c.blk = 1'b1; c.xin_vec = 4'd1;
      c.use_acc = 1'b1; c.acc_first = (t == 0); c.acc_emit = (t == NT - 1); c.acc_grp = 3'd0;
      c.qmode = Q_SOFTNRM; c.norm_total = 1'b1;
      if (t == NT - 1) for (int d = 0; d < 32; d++) exp_cols.push_back(Om[d]);
      issue(c);
      repeat (8) @(negedge clk);
      // V dimensions 32..63 into block 1 rows 0..31, then A'V (ACC group 1)
      for (int r = 0; r < KT; r++)
        for (int h = 0; h < 2; h++) begin
          logic [127:0] dd;
          for (int j = 0; j < 16; j++) dd[j*8 +: 8] = 8'(Vm[KT*t + r][32 + 16*h + j]);
          ext_write({1'b1, 6'(r), 1'(h)}, dd);
        end
      c.acc_grp = 3'd1;
      if (t == NT - 1) for (int d = 32; d < 64; d++) exp_cols.push_back(Om[d]);
      issue(c);
      repeat (8) @(negedge clk);
    end
    repeat (40) @(negedge clk);

    checks++;
    if (exp_cols.size() != 0) begin failures++; $display("FAIL %0d expected values missing", exp_cols.size()); end
    checks++;
    if (n_beats != 8 * (NT + 2)) begin
      failures++;
      $display("FAIL %0d score beats, expected %0d", n_beats, 8 * (NT + 2));
    end
    checks++;
    if (longint'(dut.u_sm.total) != St) begin failures++; $display("FAIL total %0d exp %0d", dut.u_sm.total, St); end
    $display("decoder workload: 1 query x %0d cached keys x head dim %0d, %0d cycles", NK, HD, cyc - t0);
    $display("largest deviation from floating-point softmax = %0.2f LSB", maxerr);
    checks++;
    if (maxerr > 12.0) begin failures++; $display("FAIL attention deviates %0.2f from float", maxerr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
