// cimple_pkg: sizes and shared types of the CIM self-attention accelerator.
//
// The numbers below are the ones of the 32kb configuration: 32 partitions, each
// holding two 512-bit SRAM blocks of 64 INT8 weights, a 64-bit activation input
// applied one bit plane per cycle, a 128-bit write port addressed by 8 bits,
// four output lanes, 32-bit intermediate sums, 8-bit quantized results and a
// 256 x 8b exponential LUT per lane. The XIN buffer depth, the intermediate
// buffer depth and the command word are this implementation's own choices.
package cimple_pkg;

  localparam int N_PART    = 32;   // CIM partitions (output columns)
  localparam int N_ROWS    = 64;   // weights per block per partition (input rows)
  localparam int NIB       = 4;    // MSB / LSB nibble width
  localparam int W_BITS    = 8;    // weight and activation precision
  localparam int TREE_W    = 10;   // adder tree output
  localparam int MAC_W     = 15;   // (MSB << 4) + LSB
  localparam int CIM_W     = 23;   // shift-accumulated result
  localparam int LANES     = 4;    // output lanes after the 32x8 mux
  localparam int SEL_W     = 3;    // output select counter
  localparam int WA_W      = 8;    // write address
  localparam int WBL_W     = 128;  // write data
  localparam int XIN_W     = 64;   // activation bit plane
  localparam int ACC_W     = 32;   // intermediate sums
  localparam int Q_W       = 8;    // quantized values
  localparam int LUT_DEPTH = 256;  // exponential LUT entries
  localparam int LUT_W     = 8;    // exponential LUT entry width
  localparam int XIN_DEPTH = 16;   // XIN buffer vectors (own choice)
  localparam int XV_W      = $clog2(XIN_DEPTH);
  localparam int IBUF_DEPTH = 64;  // intermediate buffer rows of 4 x 32b (own choice)
  localparam int IB_W      = $clog2(IBUF_DEPTH);

  // Quantization mode.
  typedef enum logic {
    Q_LINEAR  = 1'b0,   // x * mult >> shift
    Q_SOFTNRM = 1'b1    // x * M(sum) : softmax normalisation
  } qmode_e;

  // Where the Reg sends its 8-bit results.
  typedef enum logic [1:0] {
    DST_NONE = 2'd0,
    DST_CIM  = 2'd1,    // written back into the CIM SRAM through the write data select
    DST_XIN  = 2'd2     // written into the XIN buffer as a future activation
  } dst_e;

  // One command per 8-cycle CIM operation (64 inputs x 32 columns).
  typedef struct packed {
    logic            blk;          // SRAM block to compute with
    logic [XV_W-1:0] xin_vec;      // XIN buffer vector to stream
    logic            use_acc;      // route CIM OUT through the intermediate ACC
    logic            acc_first;    // store instead of accumulate
    logic            acc_emit;     // forward the accumulated sums to quantization
    logic [IB_W-4:0] acc_grp;      // buffer group (8 rows each)
    qmode_e          qmode;        // quantization mode
    logic            norm_total;   // normalise with the total sum (decoder mapping)
    logic            sm_en;        // pass the quantized scores through the e^x LUT
    logic            sm_first;     // first key of a row: restart the sums
    logic            reg_src_sm;   // Reg takes the LUT output (1) or the quantized value (0)
    dst_e            dst;          // destination of the Reg
    logic [6:0]      dst_row;      // {block, row} for a CIM write-back
    logic [XV_W-1:0] dst_vec;      // XIN vector for an XIN write-back
    logic            dst_half;     // XIN rows 0..31 (0) or 32..63 (1)
  } cmd_t;

endpackage
