// tb_cimple_top: end-to-end test of the accelerator at its default size.
//
// Three flows are run through the host ports, as a global buffer would:
//  1. Weight projection of a 128-dimensional token: two CIM operations on
//     blocks 0 and 1 are summed in the intermediate ACC (store, then add and
//     emit), requantized (linear mode) and written back both to the XIN buffer
//     and into the CIM SRAM; the XIN write-back is then used as the input of a
//     further operation.
//  2. Encoder self-attention of one head: 32 queries, 64 keys, head dimension
//     64. Q is written into block 0, K streams through the XIN buffer (which
//     the testbench refills while the core runs); each score column is
//     quantized, looked up in the e^x LUT, accumulated into the 32 per-row
//     denominators and written as a row of block 1. V then streams through the
//     XIN buffer and each output column is normalised with the reciprocal LUT.
//  3. Decoder self-attention of one query against 32 cached keys: K^T in
//     block 0, V in block 1, the numerators written back into the XIN buffer
//     and used as the next input, normalised with the total denominator.
// All results are compared with a bit-exact model written here from the
// arithmetic definitions; attention outputs are also compared with a
// floating-point softmax. The testbench counts how often each mechanism is
// exercised (bypass, ACC store/add, both quantizer modes, LUT, both
// write-backs, host stalls, writes during compute, back-to-back operations)
// and counts a failure for any that never happened.
module tb_cimple_top;
  import cimple_pkg::*;

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
  logic [5:0]  q_shift = 6'd0;
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

  // read-only view of one row of block 1 of the CIM SRAM
  logic [5:0] peek_row = '0;
  logic [7:0] peek [32];
  for (genvar p = 0; p < 32; p++) begin : g_peek
    assign peek[p] = dut.u_core.g_part[p].u_part.mem[1][peek_row];
  end

  // ------------------------------------------------------------------
  // reference arithmetic
  // ------------------------------------------------------------------
  localparam real LUT_S = 1.0 / 48.0;   // e^x table scale: entry a = 127 exp(s (a-255))
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
  // expected score beats: queue of 32-column groups
  // ------------------------------------------------------------------
  int exp_cols [$];
  int exp_tag  [$];      // per group: 0 = compare exactly
  int got_cols [$];      // every score value received, in column order
  int beat_c = 0;
  int cur [32];
  always @(negedge clk) if (rst_n && score_valid) begin
    if (score_sel == 0) begin
      if (exp_cols.size() < 32) begin
        failures++;
        $display("FAIL unexpected score beat at cycle %0d", cyc);
        for (int c = 0; c < 32; c++) cur[c] = 0;
      end else begin
        for (int c = 0; c < 32; c++) cur[c] = exp_cols.pop_front();
        void'(exp_tag.pop_front());
      end
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      got_cols.push_back(int'($signed(score[k])));
      if (int'($signed(score[k])) != cur[4*score_sel + k]) begin
        failures++;
        if (failures < 10) $display("FAIL score col %0d got %0d exp %0d (cycle %0d)",
                                    4*score_sel + k, int'($signed(score[k])), cur[4*score_sel + k], cyc);
      end
    end
  end

  // ------------------------------------------------------------------
  // mechanism counters (observed inside the design)
  // ------------------------------------------------------------------
  int n_direct = 0, n_acc_store = 0, n_acc_add = 0, n_acc_emit = 0;
  int n_qlin = 0, n_qnorm_slot = 0, n_qnorm_total = 0, n_lut = 0;
  int n_wb_cim = 0, n_wb_xin = 0, n_ext_stall = 0, n_xin_stall = 0;
  int n_blk0 = 0, n_blk1 = 0, n_wr_during_mac = 0, n_back2back = 0;
  logic prev_load = 0;
  always @(negedge clk) if (rst_n) begin
    if (dut.out_valid && !dut.cmd_o.use_acc) n_direct++;
    if (dut.out_valid && dut.cmd_o.use_acc &&  dut.cmd_o.acc_first) n_acc_store++;
    if (dut.out_valid && dut.cmd_o.use_acc && !dut.cmd_o.acc_first) n_acc_add++;
    if (dut.acc_valid) n_acc_emit++;
    if (dut.qin_valid && dut.tag1.qmode == Q_LINEAR) n_qlin++;
    if (dut.qin_valid && dut.tag1.qmode == Q_SOFTNRM && !dut.tag1.norm_total) n_qnorm_slot++;
    if (dut.qin_valid && dut.tag1.qmode == Q_SOFTNRM &&  dut.tag1.norm_total) n_qnorm_total++;
    if (dut.e_valid) n_lut++;
    if (dut.rg_wr_valid) n_wb_cim++;
    if (dut.rg_xin_valid) n_wb_xin++;
    if (ext_we && !ext_wready) n_ext_stall++;
    if (xin_we && !xin_wready) n_xin_stall++;
    if (dut.xin_first && !dut.cmd_c.blk) n_blk0++;
    if (dut.xin_first &&  dut.cmd_c.blk) n_blk1++;
    if (dut.core_we && dut.xin_en) n_wr_during_mac++;
    if (cmd_valid && cmd_ready && dut.xin_en) n_back2back++;
  end

  // ------------------------------------------------------------------
  // host tasks
  // ------------------------------------------------------------------
  // one CIM SRAM write, retried while the write-back path has priority;
  // called at a falling edge, returns at the falling edge after the write
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

  // one 64-bit XIN buffer write, retried while the write-back path has priority
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

  // write a whole matrix into block b: m[row][col]
  task automatic load_block(input int b, input int m [64][32]);
    for (int r = 0; r < 64; r++)
      for (int g = 0; g < 2; g++) begin
        logic [127:0] d;
        for (int j = 0; j < 16; j++) d[j*8 +: 8] = 8'(m[r][16*g + j]);
        ext_write({b[0], r[5:0], g[0]}, d);
      end
  endtask

  task automatic load_xin(input int slot, input int v [64]);
    for (int g = 0; g < 8; g++) begin
      logic [63:0] d;
      for (int j = 0; j < 8; j++) d[j*8 +: 8] = 8'(v[8*g + j]);
      xin_write({slot[3:0], g[2:0]}, d);
    end
  endtask

  int n_issued = 0;
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
    n_issued++;
  endtask

  // issue without the trailing idle cycle, so the next command can follow back to back
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

  task automatic drain(input int n);
    repeat (n) @(negedge clk);
  endtask

  function automatic cmd_t base_cmd();
    cmd_t c;
    c = '0;
    c.qmode = Q_LINEAR;
    c.dst = DST_NONE;
    return c;
  endfunction

  function automatic int rnd(input int lo, input int hi);
    return $urandom_range(0, hi - lo) + lo;
  endfunction

  // ------------------------------------------------------------------
  // data
  // ------------------------------------------------------------------
  int W0 [64][32], W1 [64][32];
  int xa [64], xb [64];
  int Qm [32][64], Km [64][64], Vm [64][64];
  int Zm [32][64], Em [32][64];
  longint Sm [32];
  int KTd [64][32], Vd [64][32];
  int qd [64], zd [32], ed [32];
  int mem_e [64][32];

  // background refill of the XIN buffer: vector j goes to slot j % 16
  int refill_src;   // 0 = K rows, 1 = V columns
  int refill_next;
  task automatic refill_run(input int first_j, input int last_j, input int base_issued);
    for (int j = first_j; j <= last_j; j++) begin
      int v [64];
      // slot j%16 was last used by operation j-16; wait until the one after it started
      while (n_issued < base_issued + j - 16 + 2) @(negedge clk);
      for (int r = 0; r < 64; r++) v[r] = (refill_src == 0) ? Km[j][r] : Vm[r][j];
      load_xin(j % 16, v);
    end
  endtask

  initial begin
    int errsum;
    real maxerr;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // e^x LUT
    for (int a = 0; a < 256; a++) begin
      tab[a] = int'($floor(127.0 * $exp(LUT_S * real'(a - 255)) + 0.5));
      @(negedge clk);
      lut_we = 1; lut_addr = 8'(a); lut_wdata = 8'(tab[a]);
    end
    @(negedge clk); lut_we = 0;

    // ================= 1. weight projection =================
    for (int r = 0; r < 64; r++)
      for (int c = 0; c < 32; c++) begin
        W0[r][c] = rnd(-128, 127);
        W1[r][c] = rnd(-128, 127);
      end
    for (int r = 0; r < 64; r++) begin xa[r] = rnd(-128, 127); xb[r] = rnd(-128, 127); end
    load_block(0, W0);
    load_block(1, W1);
    load_xin(0, xa);
    load_xin(1, xb);
    q_mult = 16'd3; q_shift = 6'd16;
    begin
      cmd_t c;
      int y [32];
      // expected projection y = sat(round(3 (W0^T xa + W1^T xb) / 2^16))
      for (int col = 0; col < 32; col++) begin
        longint s;
        s = 0;
        for (int r = 0; r < 64; r++) s += longint'(W0[r][col] * xa[r] + W1[r][col] * xb[r]);
        y[col] = qlin(s, 3, 16);
      end
      c = base_cmd(); c.blk = 0; c.xin_vec = 0; c.use_acc = 1; c.acc_first = 1; c.acc_grp = 2;
      issue_b2b(c);
      c = base_cmd(); c.blk = 1; c.xin_vec = 1; c.use_acc = 1; c.acc_emit = 1; c.acc_grp = 2;
      c.dst = DST_XIN; c.dst_vec = 4'd15; c.dst_half = 1'b0;
      for (int col = 0; col < 32; col++) exp_cols.push_back(y[col]);
      exp_tag.push_back(0);
      issue_b2b(c);
      // same token again, result written into block 1 row 40 columns 0..31
      c = base_cmd(); c.blk = 0; c.xin_vec = 0; c.use_acc = 1; c.acc_first = 1; c.acc_grp = 3;
      issue_b2b(c);
      c = base_cmd(); c.blk = 1; c.xin_vec = 1; c.use_acc = 1; c.acc_emit = 1; c.acc_grp = 3;
      c.dst = DST_CIM; c.dst_row = {1'b1, 6'd40};
      for (int col = 0; col < 32; col++) exp_cols.push_back(y[col]);
      exp_tag.push_back(0);
      issue_b2b(c);
      // a host write to the XIN buffer that collides with the write-back (stall)
      drain(12);
      begin
        int tmp [64];
        for (int r = 0; r < 64; r++) tmp[r] = xa[r];
        load_xin(2, tmp);
      end
      drain(30);
      // check the CIM write-back
      peek_row = 6'd40;
      #1;
      for (int col = 0; col < 32; col++) begin
        checks++;
        if (int'($signed(peek[col])) != y[col]) begin
          failures++;
          $display("FAIL CIM write-back col %0d", col);
        end
      end
      // use the XIN write-back (vector 15 rows 0..31, rows 32..63 still zero-loaded) as input
      begin
        int z0 [64];
        for (int r = 0; r < 64; r++) z0[r] = 0;
        for (int g = 4; g < 8; g++) xin_write({4'd15, g[2:0]}, 64'd0);
        for (int r = 0; r < 32; r++) z0[r] = y[r];
        q_mult = 16'd1; q_shift = 6'd12;
        for (int col = 0; col < 32; col++) begin
          longint s;
          s = 0;
          for (int r = 0; r < 64; r++) s += longint'(W0[r][col] * z0[r]);
          exp_cols.push_back(qlin(s, 1, 12));
        end
        exp_tag.push_back(0);
        c = base_cmd(); c.blk = 0; c.xin_vec = 15;
        issue(c);
        drain(30);
      end
    end

    // ================= 2. encoder attention =================
    for (int i = 0; i < 32; i++) for (int d = 0; d < 64; d++) Qm[i][d] = rnd(-24, 24);
    for (int j = 0; j < 64; j++) for (int d = 0; d < 64; d++) begin
      Km[j][d] = rnd(-24, 24);
      Vm[j][d] = rnd(-128, 127);
    end
    begin
      int qt [64][32];
      for (int d = 0; d < 64; d++) for (int i = 0; i < 32; i++) qt[d][i] = Qm[i][d];
      load_block(0, qt);
    end
    for (int j = 0; j < 16; j++) begin
      int v [64];
      for (int r = 0; r < 64; r++) v[r] = Km[j][r];
      load_xin(j, v);
    end
    q_mult = 16'd1; q_shift = 6'd5;
    // model of the score stage
    for (int i = 0; i < 32; i++) begin
      Sm[i] = 0;
      for (int j = 0; j < 64; j++) begin
        longint s;
        s = 0;
        for (int d = 0; d < 64; d++) s += longint'(Qm[i][d] * Km[j][d]);
        Zm[i][j] = qlin(s, 1, 5);
        Em[i][j] = tab[Zm[i][j] + 128];
        Sm[i] += longint'(Em[i][j]);
      end
    end
    refill_src = 0;
    begin
      int base;
      base = n_issued;
      fork
        refill_run(16, 63, base);
        begin
          for (int j = 0; j < 64; j++) begin
            cmd_t c;
            c = base_cmd(); c.blk = 0; c.xin_vec = 4'(j % 16);
            c.sm_en = 1; c.sm_first = (j == 0); c.reg_src_sm = 1;
            c.dst = DST_CIM; c.dst_row = {1'b1, 6'(j)};
            for (int i = 0; i < 32; i++) exp_cols.push_back(Zm[i][j]);
            exp_tag.push_back(0);
            issue_b2b(c);
          end
        end
        begin
          // host rewrites Q rows (same data) while write-backs run: stalls
          int qt [64][32];
          for (int d = 0; d < 64; d++) for (int i = 0; i < 32; i++) qt[d][i] = Qm[i][d];
          drain(40);
          for (int r = 0; r < 8; r++) begin
            logic [127:0] dd;
            for (int jj = 0; jj < 16; jj++) dd[jj*8 +: 8] = 8'(qt[r][jj]);
            ext_write({1'b0, r[5:0], 1'b0}, dd);
          end
        end
      join
    end
    drain(30);
    // block 1 now holds E^T: row j, column i = e[i][j]
    for (int j = 0; j < 64; j++) begin
      peek_row = 6'(j);
      #1;
      for (int i = 0; i < 32; i++) begin
        checks++;
        if (int'(peek[i]) != Em[i][j]) begin
          failures++;
          if (failures < 10) $display("FAIL numerator row %0d col %0d", j, i);
        end
      end
    end
    // per-row denominators
    for (int i = 0; i < 32; i++) begin
      checks++;
      if (longint'(dut.u_sm.sums[i % 4][i / 4]) != Sm[i]) begin
        failures++;
        if (failures < 10) $display("FAIL denominator row %0d got %0d exp %0d", i, dut.u_sm.sums[i % 4][i / 4], Sm[i]);
      end
    end
    // A'V : one operation per output dimension d
    for (int d = 0; d < 16; d++) begin
      int v [64];
      for (int r = 0; r < 64; r++) v[r] = Vm[r][d];
      load_xin(d, v);
    end
    refill_src = 1;
    errsum = 0; maxerr = 0.0;
    begin
      int base;
      base = n_issued;
      fork
        refill_run(16, 63, base);
        begin
          for (int d = 0; d < 64; d++) begin
            cmd_t c;
            c = base_cmd(); c.blk = 1; c.xin_vec = 4'(d % 16);
            c.use_acc = 1; c.acc_first = 1; c.acc_emit = 1; c.acc_grp = 3'(d % 8);
            c.qmode = Q_SOFTNRM;
            for (int i = 0; i < 32; i++) begin
              longint a;
              real fr, den;
              a = 0;
              for (int j = 0; j < 64; j++) a += longint'(Em[i][j] * Vm[j][d]);
              exp_cols.push_back(qnorm(a, Sm[i]));
              // floating-point softmax of the quantized scores
              fr = 0.0; den = 0.0;
              for (int j = 0; j < 64; j++) begin
                fr += $exp(LUT_S * real'(Zm[i][j] - 127)) * real'(Vm[j][d]);
                den += $exp(LUT_S * real'(Zm[i][j] - 127));
              end
              fr = fr / den;
              if ((real'(qnorm(a, Sm[i])) - fr) > maxerr) maxerr = real'(qnorm(a, Sm[i])) - fr;
              if ((fr - real'(qnorm(a, Sm[i]))) > maxerr) maxerr = fr - real'(qnorm(a, Sm[i]));
            end
            exp_tag.push_back(0);
            issue_b2b(c);
          end
        end
      join
    end
    drain(30);
    $display("encoder attention: largest deviation from floating-point softmax = %0.2f LSB", maxerr);
    checks++;
    if (maxerr > 12.0) begin failures++; $display("FAIL attention deviates %0.2f from float", maxerr); end

    // ================= 3. decoder attention =================
    for (int d = 0; d < 64; d++) qd[d] = rnd(-24, 24);
    for (int d = 0; d < 64; d++) for (int j = 0; j < 32; j++) KTd[d][j] = rnd(-24, 24);
    for (int j = 0; j < 64; j++) for (int d = 0; d < 32; d++) Vd[j][d] = (j < 32) ? rnd(-128, 127) : 0;
    load_block(0, KTd);
    load_block(1, Vd);
    load_xin(5, qd);
    for (int g = 0; g < 8; g++) xin_write({4'd6, g[2:0]}, 64'd0);
    begin
      longint s, st;
      cmd_t c;
      st = 0;
      for (int j = 0; j < 32; j++) begin
        s = 0;
        for (int d = 0; d < 64; d++) s += longint'(qd[d] * KTd[d][j]);
        zd[j] = qlin(s, 1, 5);
        ed[j] = tab[zd[j] + 128];
        st += longint'(ed[j]);
        exp_cols.push_back(zd[j]);
      end
      exp_tag.push_back(0);
      c = base_cmd(); c.blk = 0; c.xin_vec = 5;
      c.sm_en = 1; c.sm_first = 1; c.reg_src_sm = 1;
      c.dst = DST_XIN; c.dst_vec = 4'd6; c.dst_half = 1'b0;
      issue(c);
      // host XIN write into another slot during the write-back: stall
      for (int n = 0; n < 32; n++) xin_write({4'd7, 3'(n % 8)}, 64'd0);
      for (int d = 0; d < 32; d++) begin
        longint a;
        a = 0;
        for (int j = 0; j < 32; j++) a += longint'(ed[j] * Vd[j][d]);
        exp_cols.push_back(qnorm(a, st));
      end
      exp_tag.push_back(0);
      c = base_cmd(); c.blk = 1; c.xin_vec = 6;
      c.use_acc = 1; c.acc_first = 1; c.acc_emit = 1; c.acc_grp = 0;
      c.qmode = Q_SOFTNRM; c.norm_total = 1;
      issue(c);
      drain(30);
      checks++;
      if (longint'(dut.u_sm.total) != st) begin failures++; $display("FAIL decoder total"); end
    end

    // ================= summary =================
    checks++;
    if (exp_cols.size() != 0) begin failures++; $display("FAIL %0d expected scores missing", exp_cols.size()); end
    $display("mechanisms: direct=%0d acc_store=%0d acc_add=%0d acc_emit=%0d qlin=%0d qnorm_slot=%0d qnorm_total=%0d",
             n_direct, n_acc_store, n_acc_add, n_acc_emit, n_qlin, n_qnorm_slot, n_qnorm_total);
    $display("mechanisms: lut=%0d wb_cim=%0d wb_xin=%0d ext_stall=%0d xin_stall=%0d blk0=%0d blk1=%0d wr_during_mac=%0d back2back=%0d",
             n_lut, n_wb_cim, n_wb_xin, n_ext_stall, n_xin_stall, n_blk0, n_blk1, n_wr_during_mac, n_back2back);
    begin
      int m [16];
      m = '{n_direct, n_acc_store, n_acc_add, n_acc_emit, n_qlin, n_qnorm_slot, n_qnorm_total,
            n_lut, n_wb_cim, n_wb_xin, n_ext_stall, n_xin_stall, n_blk0, n_blk1, n_wr_during_mac, n_back2back};
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (m[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
      end
    end
    $display("cycles: %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
