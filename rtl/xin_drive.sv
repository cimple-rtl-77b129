// xin_drive: the XINDRIVE of the CIM core.
//
// Takes one inverted activation bit plane (XINLB, active low: 0 means the
// activation bit is 1) and the block select, and drives it onto the read word
// lines of the selected SRAM block only (RWLB_Block0 / RWLB_Block1, active low).
// The other block's lines stay high, so its cells cannot reach the OAIs. When en
// is low no block is read. Combinational. Port names and widths follow the
// paper; the enable is this implementation's.
module xin_drive #(
  parameter int N_ROWS = 64
) (
  input  logic              en,
  input  logic              blk_sel,
  input  logic [N_ROWS-1:0] xinlb,
  output logic [N_ROWS-1:0] rwlb_blk0,
  output logic [N_ROWS-1:0] rwlb_blk1
);
  always_comb begin
    rwlb_blk0 = xinlb | {N_ROWS{~en |  blk_sel}};
    rwlb_blk1 = xinlb | {N_ROWS{~en | ~blk_sel}};
  end
endmodule
