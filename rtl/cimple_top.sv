// cimple_top: CIM-based self-attention accelerator with LUT-based split softmax.
//
// Data path (one 8-cycle CIM operation per command):
//   XIN buffer --bit planes--> CIM core (2 x 16kb blocks, 32 columns)
//     --CIM OUT 4 x 23b per cycle--> [intermediate ACC + buffer] or direct
//     --mux, 4 x 32b--> quantization (linear, or x/S with the reciprocal LUT)
//     --4 x 8b--> score output, and/or softmax e^x LUT + denominator ACC
//     --Reg--> write data select -> CIM SRAM (128b)   or   XIN buffer (64b).
// The global buffer is outside: it loads weights through ext_we/ext_wa/
// ext_wdata, activations through xin_we/xin_waddr/xin_wdata, and receives the
// 8-bit results from score_*.
//
// Control: the host issues one cmd_t per operation (cmd_valid & cmd_ready). A
// command is accepted at most every 8 cycles (back to back is allowed); it
// names the SRAM block, the XIN vector and what happens to each of the 8
// output beats (ACC store/add/emit, quantization mode, softmax use, Reg
// destination). Timing from acceptance in cycle t: planes t+1..t+8, CIM OUT
// beats t+10..t+17, quantizer input one cycle later, score_* two cycles later,
// softmax numerators three cycles later, Reg write-back four cycles later.
// Write-backs have priority over the host write ports, whose ready signals
// drop for that cycle (a stall of the host).
// Block structure and bus widths follow the paper; the command word, timing
// and arbitration are this design's. The host must sequence operations so a
// block being written is not the one being read in the same operation.
module cimple_top
  import cimple_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  // commands
  input  logic                          cmd_valid,
  input  cmd_t                          cmd,
  output logic                          cmd_ready,
  // global buffer -> CIM SRAM
  input  logic                          ext_we,
  input  logic [WA_W-1:0]               ext_wa,
  input  logic [WBL_W-1:0]              ext_wdata,
  output logic                          ext_wready,
  // global buffer -> XIN buffer
  input  logic                          xin_we,
  input  logic [XV_W+2:0]               xin_waddr,
  input  logic [XIN_W-1:0]              xin_wdata,
  output logic                          xin_wready,
  // e^x LUT load
  input  logic                          lut_we,
  input  logic [$clog2(LUT_DEPTH)-1:0]  lut_addr,
  input  logic [LUT_W-1:0]              lut_wdata,
  // quantization configuration (linear mode)
  input  logic [15:0]                   q_mult,
  input  logic [5:0]                    q_shift,
  // results -> global buffer
  output logic                          score_valid,
  output logic [SEL_W-1:0]              score_sel,
  output logic [LANES-1:0][Q_W-1:0]     score
);
  // ------------------------------------------------------------------
  // command issue and XIN buffer
  // ------------------------------------------------------------------
  logic xb_ready, xin_en, xin_first;
  logic [N_ROWS-1:0] xinlb;
  cmd_t cmd_c, cmd_d1, cmd_o;

  assign cmd_ready = xb_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_c  <= '0;
      cmd_d1 <= '0;
    end else begin
      if (cmd_valid && cmd_ready) cmd_c <= cmd;
      cmd_d1 <= cmd_c;
    end
  end

  // write-backs from the Reg
  logic                 rg_wr_valid, rg_wr_half, rg_xin_valid;
  logic [WBL_W-1:0]     rg_wr_data;
  logic [XIN_W-1:0]     rg_xin_data;
  logic [1:0]           rg_xin_grp;
  cmd_t                 tag4;

  logic              xb_we;
  logic [XV_W+2:0]   xb_waddr;
  logic [XIN_W-1:0]  xb_wdata;

  always_comb begin
    xin_wready = !rg_xin_valid;
    xb_we      = rg_xin_valid || xin_we;
    xb_waddr   = rg_xin_valid ? {tag4.dst_vec, tag4.dst_half, rg_xin_grp} : xin_waddr;
    xb_wdata   = rg_xin_valid ? rg_xin_data : xin_wdata;
  end

  xin_buffer u_xin (
    .clk(clk), .rst_n(rst_n),
    .we(xb_we), .waddr(xb_waddr), .wdata(xb_wdata),
    .start(cmd_valid), .vec(cmd.xin_vec), .ready(xb_ready),
    .xin_en(xin_en), .xin_first(xin_first), .xinlb(xinlb));

  // ------------------------------------------------------------------
  // write data select and CIM core
  // ------------------------------------------------------------------
  logic              core_we;
  logic [WA_W-1:0]   core_wa;
  logic [WBL_W-1:0]  core_wbl;

  always_comb begin
    ext_wready = !rg_wr_valid;
    core_we    = rg_wr_valid || ext_we;
    core_wa    = rg_wr_valid ? {tag4.dst_row, rg_wr_half} : ext_wa;
    core_wbl   = rg_wr_valid ? rg_wr_data : ext_wdata;
  end

  logic res_load, out_valid;
  logic [SEL_W-1:0] out_sel;
  logic [LANES-1:0][CIM_W-1:0] cim_out;

  cim_core u_core (
    .clk(clk), .rst_n(rst_n),
    .we(core_we), .wa(core_wa), .wbl(core_wbl),
    .xin_en(xin_en), .xin_first(xin_first), .blk_sel(cmd_c.blk), .xinlb(xinlb),
    .res_load(res_load), .out_valid(out_valid), .out_sel(out_sel), .cim_out(cim_out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        cmd_o <= '0;
    else if (res_load) cmd_o <= cmd_d1;
  end

  // ------------------------------------------------------------------
  // intermediate ACC / direct path, then the quantizer input mux
  // ------------------------------------------------------------------
  logic                        acc_valid;
  logic [LANES-1:0][ACC_W-1:0] acc_data;

  inter_acc u_acc (
    .clk(clk), .rst_n(rst_n),
    .in_valid(out_valid && cmd_o.use_acc), .in_data(cim_out),
    .addr({cmd_o.acc_grp, out_sel}), .first(cmd_o.acc_first), .emit(cmd_o.acc_emit),
    .out_valid(acc_valid), .out_data(acc_data));

  logic                        dir_valid;
  logic [LANES-1:0][ACC_W-1:0] dir_data;
  cmd_t                        tag1, tag2, tag3;
  logic [SEL_W-1:0]            sel1, sel2, sel3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dir_valid <= 1'b0;
      dir_data  <= '0;
      tag1 <= '0; tag2 <= '0; tag3 <= '0; tag4 <= '0;
      sel1 <= '0; sel2 <= '0; sel3 <= '0;
    end else begin
      dir_valid <= out_valid && !cmd_o.use_acc;
      for (int k = 0; k < LANES; k++) dir_data[k] <= ACC_W'($signed(cim_out[k]));
      tag1 <= cmd_o; tag2 <= tag1; tag3 <= tag2; tag4 <= tag3;
      sel1 <= out_sel; sel2 <= sel1; sel3 <= sel2;
    end
  end

  logic                        qin_valid;
  logic [LANES-1:0][ACC_W-1:0] qin_data;
  logic [LANES-1:0][ACC_W-1:0] sm_sum, q_scale;
  logic [ACC_W-1:0]            sm_total;

  always_comb begin
    qin_valid = acc_valid || dir_valid;
    qin_data  = acc_valid ? acc_data : dir_data;
    for (int k = 0; k < LANES; k++)
      q_scale[k] = tag1.norm_total ? sm_total : sm_sum[k];
  end

  // ------------------------------------------------------------------
  // quantization
  // ------------------------------------------------------------------
  logic                      q_valid;
  logic [LANES-1:0][Q_W-1:0] q_out;

  quant_unit u_quant (
    .clk(clk), .rst_n(rst_n),
    .in_valid(qin_valid), .in_data(qin_data), .mode(tag1.qmode),
    .mult(q_mult), .shift(q_shift), .scale(q_scale),
    .q_valid(q_valid), .q_out(q_out));

  assign score_valid = q_valid;
  assign score_sel   = sel2;
  assign score       = q_out;

  // ------------------------------------------------------------------
  // softmax numerators and denominators
  // ------------------------------------------------------------------
  logic                        e_valid;
  logic [LANES-1:0][LUT_W-1:0] e_out;

  softmax_unit u_sm (
    .clk(clk), .rst_n(rst_n),
    .lut_we(lut_we), .lut_addr(lut_addr), .lut_wdata(lut_wdata),
    .in_valid(q_valid && tag2.sm_en), .acc_en(1'b1), .first(tag2.sm_first),
    .slot(sel2), .z(q_out),
    .e_valid(e_valid), .e_out(e_out),
    .sum_slot(sel1), .sum_out(sm_sum), .sum_total(sm_total));

  // quantized values delayed to line up with the LUT output
  logic                      q3_valid;
  logic [LANES-1:0][Q_W-1:0] q3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q3_valid <= 1'b0;
      q3       <= '0;
    end else begin
      q3_valid <= q_valid;
      q3       <= q_out;
    end
  end

  // ------------------------------------------------------------------
  // Reg
  // ------------------------------------------------------------------
  logic                      rg_in_valid;
  logic [LANES-1:0][Q_W-1:0] rg_in;

  always_comb begin
    rg_in_valid = tag3.reg_src_sm ? e_valid : q3_valid;
    rg_in       = tag3.reg_src_sm ? e_out   : q3;
  end

  out_reg u_reg (
    .clk(clk), .rst_n(rst_n),
    .in_valid(rg_in_valid), .in_data(rg_in), .sel(sel3), .dst(tag3.dst),
    .wr_valid(rg_wr_valid), .wr_data(rg_wr_data), .wr_half(rg_wr_half),
    .xin_valid(rg_xin_valid), .xin_data(rg_xin_data), .xin_grp(rg_xin_grp));

  a_one_source: assert property (@(posedge clk) disable iff (!rst_n)
    !(acc_valid && dir_valid));
endmodule
