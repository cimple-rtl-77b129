// tb_encoder_workload: one query tile of an encoder attention head at the
// size of the published latency study (head dimension 64, 1024 tokens), run
// on the accelerator at its default size.
//
// 32 queries are held in block 0 as Q^T. The 1024 keys are processed in 16
// tiles of 64: each key vector streams through the XIN buffer, its 32 scores
// are quantized, looked up in the e^x table, added to the 32 per-row
// denominators and written as one row of block 1. After a tile, 8 columns of
// V (64 values each, the tile's rows) stream against block 1 and their A'V
// partial sums are added in the intermediate ACC across all 16 tiles; the
// last tile emits them, normalised by the denominators. The ACC buffer holds
// 8 output columns x 32 queries, so the 64 output dimensions take 8 passes,
// each recomputing the scores. Every score beat and every output is compared
// with a bit-exact model of the arithmetic, and the outputs also with a
// floating-point softmax. The XIN buffer is refilled by a parallel process
// while the core runs; an operation is only issued once its vector is loaded.
//
// Timing: one operation per 8 cycles, back to back, with a 24-cycle gap
// after the last score of a tile so its numerator rows are written before
// A'V reads them. The total cycle count is printed. The tiling and the
// command sequence are this testbench's; the sizes are the published ones.
// A watchdog ends a run that does not finish with a failure.
module tb_encoder_workload;
  import cimple_pkg::*;

  localparam int NQ    = 32;     // queries per tile (CIM columns)
  localparam int HD    = 64;     // head dimension (CIM rows)
  localparam int NK    = 1024;   // tokens
  localparam int KT    = 64;     // keys per tile (rows of block 1)
  localparam int NT    = NK / KT;
  localparam int DG    = 8;      // output dimensions per pass (ACC groups)
  localparam int OPS_T = KT + DG;          // operations per tile
  localparam int OPS_G = NT * OPS_T;       // operations per pass
  localparam int NOPS  = (HD / DG) * OPS_G;
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

  // ------------------------------------------------------------------
  // data and model
  // ------------------------------------------------------------------
  int Qm [NQ][HD];
  int Km [NK][HD];
  int Vm [NK][HD];
  int Zm [NQ][NK];
  int Em [NQ][NK];
  longint Sm [NQ];
  int Om [NQ][HD];
  real maxerr = 0.0;

  // operation n: pass g, tile t, step k (k < KT: score of key; else A'V column)
  function automatic void op_of(input int n, output int g, output int t, output int k);
    g = n / OPS_G;
    t = (n % OPS_G) / OPS_T;
    k = (n % OPS_G) % OPS_T;
  endfunction

  function automatic logic [7:0] vec_byte(input int n, input int r);
    int g, t, k;
    op_of(n, g, t, k);
    if (k < KT) return 8'(Km[KT*t + k][r]);
    return 8'(Vm[KT*t + r][DG*g + (k - KT)]);
  endfunction

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

  int n_issued = 0;   // operations accepted
  int n_loaded = 0;   // XIN vectors written (vector n lives in slot n % 16)

  task automatic load_vec(input int n);
    for (int gg = 0; gg < 8; gg++) begin
      logic [63:0] d;
      for (int j = 0; j < 8; j++) d[j*8 +: 8] = vec_byte(n, 8*gg + j);
      xin_write({4'(n % 16), 3'(gg)}, d);
    end
    n_loaded = n + 1;
  endtask

  task automatic issue_b2b(input cmd_t c);
    cmd_valid = 1; cmd = c;
    #1;
    while (!cmd_ready) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    cmd_valid = 0;
    n_issued++;
  endtask

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

    for (int i = 0; i < NQ; i++) for (int d = 0; d < HD; d++) Qm[i][d] = $urandom_range(0, 48) - 24;
    for (int j = 0; j < NK; j++) for (int d = 0; d < HD; d++) begin
      Km[j][d] = $urandom_range(0, 48) - 24;
      Vm[j][d] = $urandom_range(0, 255) - 128;
    end

    // model
    for (int i = 0; i < NQ; i++) begin
      Sm[i] = 0;
      for (int j = 0; j < NK; j++) begin
        longint s;
        s = 0;
        for (int d = 0; d < HD; d++) s += longint'(Qm[i][d] * Km[j][d]);
        Zm[i][j] = qlin(s, 1, 5);
        Em[i][j] = tab[Zm[i][j] + 128];
        Sm[i] += longint'(Em[i][j]);
      end
      for (int d = 0; d < HD; d++) begin
        longint a;
        real fr, den;
        a = 0; fr = 0.0; den = 0.0;
        for (int j = 0; j < NK; j++) begin
          a += longint'(Em[i][j] * Vm[j][d]);
          fr += $exp(LUT_S * real'(Zm[i][j] - 127)) * real'(Vm[j][d]);
          den += $exp(LUT_S * real'(Zm[i][j] - 127));
        end
        Om[i][d] = qnorm(a, Sm[i]);
        fr = fr / den;
        if (real'(Om[i][d]) - fr > maxerr) maxerr = real'(Om[i][d]) - fr;
        if (fr - real'(Om[i][d]) > maxerr) maxerr = fr - real'(Om[i][d]);
      end
    end

    // Q^T into block 0: row d, column i
    for (int r = 0; r < HD; r++)
      for (int h = 0; h < 2; h++) begin
        logic [127:0] dd;
        for (int j = 0; j < 16; j++) dd[j*8 +: 8] = 8'(Qm[16*h + j][r]);
        ext_write({1'b0, 6'(r), 1'(h)}, dd);
      end
    for (int n = 0; n < 16; n++) load_vec(n);

    t0 = cyc;
    fork
      // refill: vector n may overwrite slot n % 16 once operation n-16 has
      // finished streaming, i.e. once operation n-14 has been accepted
      begin
        for (int n = 16; n < NOPS; n++) begin
          while (n_issued < n - 14) @(negedge clk);
          load_vec(n);
        end
      end
      // operations
      begin
        for (int n = 0; n < NOPS; n++) begin
          int g, t, k;
          cmd_t c;
          op_of(n, g, t, k);
          while (n_loaded <= n) @(negedge clk);
          c = '0;
          c.qmode = Q_LINEAR;
          c.dst = DST_NONE;
          c.xin_vec = 4'(n % 16);
          if (k < KT) begin
            c.blk = 1'b0;
            c.sm_en = 1'b1;
            c.sm_first = (t == 0 && k == 0);
            c.reg_src_sm = 1'b1;
            c.dst = DST_CIM;
            c.dst_row = {1'b1, 6'(k)};
            for (int i = 0; i < NQ; i++) exp_cols.push_back(Zm[i][KT*t + k]);
          end else begin
            c.blk = 1'b1;
            c.use_acc = 1'b1;
            c.acc_first = (t == 0);
            c.acc_emit = (t == NT - 1);
            c.acc_grp = 3'(k - KT);
            c.qmode = Q_SOFTNRM;
            if (t == NT - 1)
              for (int i = 0; i < NQ; i++) exp_cols.push_back(Om[i][DG*g + (k - KT)]);
          end
          issue_b2b(c);
          // numerator rows of the tile must be written before A'V reads them
          if (k == KT - 1) repeat (24) @(negedge clk);
        end
      end
    join
    repeat (40) @(negedge clk);

    checks++;
    if (exp_cols.size() != 0) begin failures++; $display("FAIL %0d expected values missing", exp_cols.size()); end
    checks++;
    if (n_beats != 8 * ((HD / DG) * NT * KT + HD)) begin
      failures++;
      $display("FAIL %0d score beats, expected %0d", n_beats, 8 * ((HD / DG) * NT * KT + HD));
    end
    $display("encoder workload: %0d queries x %0d keys x head dim %0d, %0d operations, %0d cycles",
             NQ, NK, HD, NOPS, cyc - t0);
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
