// xin_buffer: the input (XIN) buffer in front of the CIM core.
//
// Stores DEPTH activation vectors of N_ROWS INT8 values. The write port takes
// 64 bits, i.e. 8 consecutive values: waddr = {vector, group}, value j of the
// word goes to row 8*group + j. On start (accepted when ready) the vector vec is
// streamed to the core as 8 bit planes over 8 cycles, bit 7 first, inverted
// (xinlb, active low) as the XINDRIVE expects; xin_first marks bit 7. The planes
// leave a register, one cycle after start. ready is high when idle and also in
// the last plane, so a new start there streams with no gap. A write to the
// vector being streamed is seen from the next plane on (no protection).
// The paper names this buffer and its role; depth, port layout and timing are
// this design's own.
module xin_buffer
  import cimple_pkg::*;
#(
  parameter int N_ROWS_P = N_ROWS,
  parameter int DEPTH    = XIN_DEPTH
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         we,
  input  logic [$clog2(DEPTH)+2:0]     waddr,
  input  logic [XIN_W-1:0]             wdata,
  input  logic                         start,
  input  logic [$clog2(DEPTH)-1:0]     vec,
  output logic                         ready,
  output logic                         xin_en,
  output logic                         xin_first,
  output logic [N_ROWS_P-1:0]          xinlb
);
  localparam int VW   = $clog2(DEPTH);
  localparam int PERW = XIN_W / W_BITS;   // values per write (8)

  logic [W_BITS-1:0] mem [DEPTH][N_ROWS_P];

  always_ff @(posedge clk) begin
    if (we)
      for (int j = 0; j < PERW; j++)
        mem[waddr[VW+2:3]][int'(waddr[2:0])*PERW + j] <= wdata[j*W_BITS +: W_BITS];
  end

  logic          busy;
  logic [2:0]    bit_idx;   // bit being driven now
  logic [VW-1:0] cur_vec;

  assign ready = !busy || bit_idx == 3'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      bit_idx <= '0;
      cur_vec <= '0;
    end else if (start && ready) begin
      busy    <= 1'b1;
      bit_idx <= 3'd7;
      cur_vec <= vec;
    end else if (busy) begin
      busy    <= bit_idx != 3'd0;
      bit_idx <= bit_idx - 3'd1;
    end
  end

  always_comb begin
    xin_en    = busy;
    xin_first = busy && bit_idx == 3'd7;
    for (int r = 0; r < N_ROWS_P; r++)
      xinlb[r] = ~(busy & mem[cur_vec][r][bit_idx]);
  end
endmodule
