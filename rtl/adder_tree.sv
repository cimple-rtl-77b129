// adder_tree: sums N products of IN_W bits into OUT_W bits.
//
// One tree per partition and nibble half: it adds the 64 four-bit OAI outputs
// of a column. With SIGNED_IN the inputs are two's complement (the MSB nibble
// of a signed weight), otherwise unsigned (the LSB nibble). Written as a
// balanced binary tree of log2(N) adder levels, purely combinational. The sizes
// (64 x 4b in, 10b out) follow the paper; the tree shape is this design's.
module adder_tree #(
  parameter int N         = 64,
  parameter int IN_W      = 4,
  parameter int OUT_W     = 10,
  parameter bit SIGNED_IN = 1'b0
) (
  input  logic [N*IN_W-1:0] in_vec,
  output logic [OUT_W-1:0]  sum
);
  localparam int LEVELS = $clog2(N);
  localparam int NP     = 2**LEVELS;

  // node[l][i]: partial sums of level l, all kept at OUT_W bits
  logic [OUT_W-1:0] node [LEVELS+1][NP];

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      if (i < N) begin
        if (SIGNED_IN) node[0][i] = OUT_W'($signed(in_vec[i*IN_W +: IN_W]));
        else           node[0][i] = OUT_W'(in_vec[i*IN_W +: IN_W]);
      end else begin
        node[0][i] = '0;
      end
    end
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < NP; i++)
        node[l][i] = (i < (NP >> l)) ? node[l-1][2*i] + node[l-1][2*i+1] : '0;
    sum = node[LEVELS][0];
  end
endmodule
