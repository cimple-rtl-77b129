// shift_acc: the "<<1 & ACC" stage behind each partition.
//
// Accumulates the per-plane MAC of a column over the 8 activation bit planes,
// most significant plane first: acc <= (acc << 1) + in. The first plane is the
// two's complement sign bit of the activation, so it is subtracted instead:
// acc <= -in. After 8 planes acc holds the full signed 8b x 8b dot product
// (15b + 8 = 23b). One register stage; en qualifies a plane. The shift direction
// and widths follow the paper; signed activations are this design's choice.
module shift_acc #(
  parameter int IN_W  = 15,
  parameter int OUT_W = 23
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             first,
  input  logic [IN_W-1:0]  in_val,
  output logic [OUT_W-1:0] acc
);
  logic signed [OUT_W-1:0] in_ext;
  assign in_ext = OUT_W'($signed(in_val));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (en)    acc <= first ? -in_ext : (acc << 1) + in_ext;
  end
endmodule
