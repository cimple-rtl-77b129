// inter_acc: intermediate accumulator (ACC) and buffer behind the CIM core.
//
// For each valid CIM output beat (LANES x 23b) it either stores the values in
// buffer row addr (first) or adds them to the 32-bit partial sums already
// there, so dot products longer than the 64 CIM rows are built over several
// operations. With emit the updated sums are also forwarded, one cycle later,
// on out_data (out_valid). Read-modify-write of one row per cycle.
// The paper gives the ACC, the buffer and the 4 x 32b paths; the depth and the
// store/add/emit control are this design's.
module inter_acc
  import cimple_pkg::*;
#(
  parameter int DEPTH = IBUF_DEPTH
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [LANES-1:0][CIM_W-1:0]   in_data,
  input  logic [$clog2(DEPTH)-1:0]      addr,
  input  logic                          first,
  input  logic                          emit,
  output logic                          out_valid,
  output logic [LANES-1:0][ACC_W-1:0]   out_data
);
  logic [LANES-1:0][ACC_W-1:0] buf_mem [DEPTH];
  logic [LANES-1:0][ACC_W-1:0] sum;

  always_comb begin
    for (int k = 0; k < LANES; k++)
      sum[k] = (first ? '0 : buf_mem[addr][k]) + ACC_W'($signed(in_data[k]));
  end

  always_ff @(posedge clk) begin
    if (in_valid) buf_mem[addr] <= sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid && emit;
      if (in_valid && emit) out_data <= sum;
    end
  end
endmodule
