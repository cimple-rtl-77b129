// cim_partition: one of the 32 columns of the CIM core.
//
// Holds two SRAM blocks (bank 0 and bank 1) of N_ROWS INT8 weights each
// (64 x 8b = 512 bits per block). Every weight bit pair of the two banks shares
// one OAI (oai_mult), so the read word lines of only one block may be active.
// Per cycle the column computes, for one activation bit plane x[r],
//   msb = sum_r x[r] * w[r][7:4]   (signed nibble, 10b adder tree)
//   lsb = sum_r x[r] * w[r][3:0]   (unsigned nibble, 10b adder tree)
//   mac = (msb << 4) + lsb         (15b, signed)
// Writes use the word lines of the write decoder: wwl[{b,r}] stores wbl into
// weight r of block b on the clock edge; reads are combinational, so a write
// and a MAC on the other block proceed in the same cycle. The bitcells are
// modelled as flip-flops; the real design uses a custom 8T standard cell.
// Two's complement weights (signed MSB nibble) are this implementation's choice.
module cim_partition #(
  parameter int N_ROWS = 64,
  parameter int NIB    = 4,
  parameter int TREE_W = 10,
  parameter int MAC_W  = 15
) (
  input  logic                clk,
  input  logic [2*N_ROWS-1:0] wwl,        // write word lines, index {block, row}
  input  logic [2*NIB-1:0]    wbl,        // write data (one weight)
  input  logic [N_ROWS-1:0]   rwlb_blk0,  // active-low read word lines, block 0
  input  logic [N_ROWS-1:0]   rwlb_blk1,  // active-low read word lines, block 1
  output logic [MAC_W-1:0]    mac
);
  // Stored weights: mem[block][row]
  logic [2*NIB-1:0] mem [2][N_ROWS];

  always_ff @(posedge clk) begin
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < N_ROWS; r++)
        if (wwl[b*N_ROWS + r]) mem[b][r] <= wbl;
  end

  logic [N_ROWS*NIB-1:0] prod_msb, prod_lsb;

  for (genvar r = 0; r < N_ROWS; r++) begin : g_row
    logic [2*NIB-1:0] wb0, wb1;   // inverted cell outputs
    assign wb0 = ~mem[0][r];
    assign wb1 = ~mem[1][r];
    oai_mult #(.NIB(NIB)) u_oai_msb (
      .wb0 (wb0[2*NIB-1:NIB]), .wb1 (wb1[2*NIB-1:NIB]),
      .rwlb({rwlb_blk1[r], rwlb_blk0[r]}), .prod(prod_msb[r*NIB +: NIB]));
    oai_mult #(.NIB(NIB)) u_oai_lsb (
      .wb0 (wb0[NIB-1:0]), .wb1 (wb1[NIB-1:0]),
      .rwlb({rwlb_blk1[r], rwlb_blk0[r]}), .prod(prod_lsb[r*NIB +: NIB]));
  end

  logic [TREE_W-1:0] sum_msb, sum_lsb;

  adder_tree #(.N(N_ROWS), .IN_W(NIB), .OUT_W(TREE_W), .SIGNED_IN(1'b1))
    u_tree_msb (.in_vec(prod_msb), .sum(sum_msb));
  adder_tree #(.N(N_ROWS), .IN_W(NIB), .OUT_W(TREE_W), .SIGNED_IN(1'b0))
    u_tree_lsb (.in_vec(prod_lsb), .sum(sum_lsb));

  always_comb
    mac = MAC_W'($signed(sum_msb)) * MAC_W'(16) + MAC_W'({1'b0, sum_lsb});
endmodule
