// out_reg: the Reg between the softmax and the CIM write / input paths.
//
// Gathers the LANES bytes of each output beat (beat c carries columns
// 4c..4c+3) into wider words:
//  * DST_CIM: four beats give the 16 bytes of columns 16h..16h+15, emitted as
//    a 128-bit write word (byte j = column 16h+j) with wr_half = h after beats
//    3 and 7;
//  * DST_XIN: two beats give 8 bytes, emitted as a 64-bit XIN word with
//    xin_grp = c/2 after every odd beat.
// Outputs are registered (valid one cycle after the completing beat) and last
// one cycle. The 128b/64b widths follow the paper; the packing order is this
// design's.
module out_reg
  import cimple_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [LANES-1:0][Q_W-1:0] in_data,
  input  logic [SEL_W-1:0]          sel,
  input  dst_e                      dst,
  output logic                      wr_valid,
  output logic [WBL_W-1:0]          wr_data,
  output logic                      wr_half,
  output logic                      xin_valid,
  output logic [XIN_W-1:0]          xin_data,
  output logic [1:0]                xin_grp
);
  logic [WBL_W-1:0] gather;
  logic [WBL_W-1:0] gather_nxt;

  always_comb begin
    gather_nxt = gather;
    if (dst == DST_XIN)
      gather_nxt[int'(sel[0])*LANES*Q_W +: LANES*Q_W] = in_data;
    else
      gather_nxt[int'(sel[1:0])*LANES*Q_W +: LANES*Q_W] = in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gather    <= '0;
      wr_valid  <= 1'b0;
      wr_data   <= '0;
      wr_half   <= 1'b0;
      xin_valid <= 1'b0;
      xin_data  <= '0;
      xin_grp   <= '0;
    end else begin
      wr_valid  <= 1'b0;
      xin_valid <= 1'b0;
      if (in_valid && dst != DST_NONE) begin
        gather <= gather_nxt;
        if (dst == DST_CIM && sel[1:0] == 2'd3) begin
          wr_valid <= 1'b1;
          wr_data  <= gather_nxt;
          wr_half  <= sel[2];
        end
        if (dst == DST_XIN && sel[0]) begin
          xin_valid <= 1'b1;
          xin_data  <= gather_nxt[XIN_W-1:0];
          xin_grp   <= sel[2:1];
        end
      end
    end
  end
endmodule
