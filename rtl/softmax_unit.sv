// softmax_unit: numerator half of the LUT-based split softmax.
//
// LANES lanes, each with its own copy of the e^x LUT (LUT_DEPTH x LUT_W), a read
// select and a denominator accumulator. An INT8 score z (from the quantization
// unit) addresses the LUT at z + 128, i.e. the table is indexed by
// z - z_quant_max with z_quant_max = 127: entry a holds the fixed-point value of
// exp(s * (a - 255)). No running maximum is searched. The looked-up value
// e_out leaves a register one cycle after in_valid and can be used at once as
// a CIM operand (numerator path); it is also added to the denominator of its
// row: lane k keeps SLOTS sums, slot = output-select value, so together the
// lanes hold one denominator per CIM column. first restarts a slot (and, in
// slot 0, the total over all slots and lanes used by the one-query decoder
// mapping). sum_out reads the slot sum_slot combinationally; sum_total
// likewise. The LUT is a writable buffer (broadcast to all lanes through
// lut_we/lut_addr/lut_wdata). Table size, the LUT, the ACC and the
// z_quant_max idea follow the paper; slots, total and load port are this
// design's.
module softmax_unit
  import cimple_pkg::*;
#(
  parameter int SLOTS = N_PART / LANES,
  parameter int SUM_W = ACC_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // LUT load
  input  logic                          lut_we,
  input  logic [$clog2(LUT_DEPTH)-1:0]  lut_addr,
  input  logic [LUT_W-1:0]              lut_wdata,
  // scores in
  input  logic                          in_valid,
  input  logic                          acc_en,
  input  logic                          first,
  input  logic [$clog2(SLOTS)-1:0]      slot,
  input  logic [LANES-1:0][Q_W-1:0]     z,
  // numerators out
  output logic                          e_valid,
  output logic [LANES-1:0][LUT_W-1:0]   e_out,
  // denominators
  input  logic [$clog2(SLOTS)-1:0]      sum_slot,
  output logic [LANES-1:0][SUM_W-1:0]   sum_out,
  output logic [SUM_W-1:0]              sum_total
);
  localparam int AW = $clog2(LUT_DEPTH);

  logic [LUT_W-1:0] lut [LANES][LUT_DEPTH];
  logic [SUM_W-1:0] sums [LANES][SLOTS];
  logic [SUM_W-1:0] total;

  // read select: the quantized score addresses the LUT
  logic [LANES-1:0][AW-1:0]    ridx;
  logic [LANES-1:0][LUT_W-1:0] rdat;
  logic [SUM_W-1:0]            beat_sum;

  always_comb begin
    beat_sum = '0;
    for (int k = 0; k < LANES; k++) begin
      ridx[k] = AW'({~z[k][Q_W-1], z[k][Q_W-2:0]});   // z + 128
      rdat[k] = lut[k][ridx[k]];
      beat_sum = beat_sum + SUM_W'(rdat[k]);
    end
  end

  always_ff @(posedge clk) begin
    if (lut_we)
      for (int k = 0; k < LANES; k++) lut[k][lut_addr] <= lut_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_valid <= 1'b0;
      e_out   <= '0;
      total   <= '0;
      for (int k = 0; k < LANES; k++)
        for (int s = 0; s < SLOTS; s++) sums[k][s] <= '0;
    end else begin
      e_valid <= in_valid;
      if (in_valid) e_out <= rdat;
      if (in_valid && acc_en) begin
        for (int k = 0; k < LANES; k++)
          sums[k][slot] <= (first ? '0 : sums[k][slot]) + SUM_W'(rdat[k]);
        total <= ((first && slot == '0) ? '0 : total) + beat_sum;
      end
    end
  end

  always_comb begin
    for (int k = 0; k < LANES; k++) sum_out[k] = sums[k][sum_slot];
    sum_total = total;
  end
endmodule
