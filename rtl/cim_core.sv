// cim_core: the 32kb digital compute-in-memory core.
//
// Structure: a write decoder (WA 8b -> 256 word lines), the XINDRIVE, N_PART
// partitions (cim_partition: 2 x 512b SRAM blocks, OAIs, MSB/LSB adder trees,
// <<4 combine), one shift-accumulator per partition, a hold register and a
// 3-bit COUNTER that steps LANES output multiplexers of 8:1 each ("MUX 32x8").
//
// Write port: on we, wbl (128b = 16 weights) is stored in one input row of 16
// adjacent partitions of one block, with WA = {block, row[5:0], group}:
// weight byte j of wbl goes to partition 16*group + j. Writes can happen in any
// cycle, also while the core computes.
// Compute: one operation is 8 consecutive planes (xin_en), the first with
// xin_first (sign plane, bit 7), down to bit 0; blk_sel is held for all 8.
// One cycle after the 8th plane the 32 results (23b each) enter the hold
// register and out_valid rises for 8 cycles; in cycle c (out_sel = c) lane k
// carries column 4c+k. Operations may follow back to back: the read-out of one
// overlaps the compute of the next. Latency from the first plane to the first
// output is 9 cycles; throughput 32 dot products of 64 INT8 terms per 8 cycles.
// Partition counts, widths and the counter/mux follow the paper; the address
// map, column-to-lane mapping and cycle timing are this design's.
module cim_core
  import cimple_pkg::*;
#(
  parameter int N_PART_P = N_PART,
  parameter int N_ROWS_P = N_ROWS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // write port
  input  logic                      we,
  input  logic [WA_W-1:0]           wa,
  input  logic [WBL_W-1:0]          wbl,
  // activation input
  input  logic                      xin_en,
  input  logic                      xin_first,
  input  logic                      blk_sel,
  input  logic [N_ROWS_P-1:0]       xinlb,
  // CIM OUT
  output logic                      res_load,   // results enter the hold register
  output logic                      out_valid,
  output logic [SEL_W-1:0]          out_sel,
  output logic [LANES-1:0][CIM_W-1:0] cim_out
);
  localparam int WPR  = WBL_W / W_BITS;           // weights per write (16)
  localparam int NGRP = N_PART_P / WPR;           // column groups (2)
  localparam int ROW_W = $clog2(N_ROWS_P);
  localparam int NSEL = N_PART_P / LANES;         // counter range (8)

  // ---------------- write decoder ----------------
  logic [2**WA_W-1:0] wwl, wwlb;
  write_decoder #(.AW(WA_W)) u_wdec (.we(we), .wa(wa), .wwl(wwl), .wwlb(wwlb));

  // ---------------- XINDRIVE ----------------
  logic [N_ROWS_P-1:0] rwlb_blk0, rwlb_blk1;
  xin_drive #(.N_ROWS(N_ROWS_P)) u_xdrv (
    .en(xin_en), .blk_sel(blk_sel), .xinlb(xinlb),
    .rwlb_blk0(rwlb_blk0), .rwlb_blk1(rwlb_blk1));

  // ---------------- partitions + shift accumulators ----------------
  logic [N_PART_P-1:0][CIM_W-1:0] acc;

  for (genvar p = 0; p < N_PART_P; p++) begin : g_part
    logic [2*N_ROWS_P-1:0] pwwl;
    logic [MAC_W-1:0]      mac;
    // word line {block, row} of this partition: address {block, row, p / WPR}
    for (genvar b = 0; b < 2; b++) begin : g_b
      for (genvar r = 0; r < N_ROWS_P; r++) begin : g_r
        assign pwwl[b*N_ROWS_P + r] = wwl[(b*N_ROWS_P + r)*NGRP + p/WPR];
      end
    end
    cim_partition #(.N_ROWS(N_ROWS_P)) u_part (
      .clk(clk), .wwl(pwwl), .wbl(wbl[(p%WPR)*W_BITS +: W_BITS]),
      .rwlb_blk0(rwlb_blk0), .rwlb_blk1(rwlb_blk1), .mac(mac));
    shift_acc #(.IN_W(MAC_W), .OUT_W(CIM_W)) u_sacc (
      .clk(clk), .rst_n(rst_n), .en(xin_en), .first(xin_first),
      .in_val(mac), .acc(acc[p]));
  end

  // ---------------- plane counter, hold register, COUNTER, output mux ----
  logic [2:0] plane_cnt;
  logic       last_d;
  logic [N_PART_P-1:0][CIM_W-1:0] hold;
  logic [SEL_W-1:0] cnt;
  logic             cnt_run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      plane_cnt <= '0;
      last_d    <= 1'b0;
      cnt       <= '0;
      cnt_run   <= 1'b0;
    end else begin
      if (xin_en) plane_cnt <= xin_first ? 3'd1 : plane_cnt + 3'd1;
      last_d <= xin_en && !xin_first && plane_cnt == 3'd7;
      if (last_d) begin
        cnt     <= '0;
        cnt_run <= 1'b1;
      end else if (cnt_run) begin
        cnt     <= cnt + 1'b1;
        cnt_run <= (cnt != SEL_W'(NSEL-1));
      end
    end
  end

  always_ff @(posedge clk) begin
    if (last_d) hold <= acc;
  end

  always_comb begin
    res_load  = last_d;
    out_valid = cnt_run;
    out_sel   = cnt;
    for (int k = 0; k < LANES; k++)
      cim_out[k] = hold[int'(cnt)*LANES + k];
  end

  // A new result may only arrive when the previous read-out is ending.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    last_d |-> (!cnt_run || cnt == SEL_W'(NSEL-1)));
  a_plane_order: assert property (@(posedge clk) disable iff (!rst_n)
    (xin_en && !xin_first) |-> plane_cnt != 3'd0);
endmodule
