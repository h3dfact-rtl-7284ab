// activation_unit: thresholding and 4-bit quantization of one subarray's
// similarity vector, between the similarity and projection steps.
//
// For every column m (code vector m of the factor):
//     act_m = (m < num_codes && sim_m > threshold)
//             ? min(2^ACT_BITS - 1, sim_m >> ACT_SHIFT) : 0
// so weak or negative similarities are dropped and the rest are sent to the
// projection array as 4-bit word-line levels. It also forms
//     proj_ref = ceil(sum_m act_m / 2),
// the reference for the projection sign: the projection column current
// Q_j = sum_m act_m [x_mj = +1] satisfies sign(sum_m act_m x_mj) = +1 exactly
// when 2 Q_j >= sum act, i.e. Q_j >= proj_ref. The paper names an activation
// unit, a programmable threshold and 4-bit similarity results; the exact
// function above is this design's.
//
// Interface: sim[COLS] (signed), threshold (signed), num_codes in;
// act[COLS], act_sum, proj_ref out. Timing: combinational.
module activation_unit #(
  parameter int unsigned COLS      = h3d_pkg::NUM_COLS,
  parameter int unsigned SIM_W     = h3d_pkg::sim_width(h3d_pkg::DIM_D),
  parameter int unsigned ACT_BITS  = h3d_pkg::ACT_W,
  parameter int unsigned ACT_SHIFT = 4,
  localparam int unsigned NW   = $clog2(COLS + 1),
  localparam int unsigned SUMW = $clog2((2 ** ACT_BITS - 1) * COLS + 1)
) (
  input  logic signed [COLS-1:0][SIM_W-1:0] sim,
  input  logic signed [SIM_W-1:0]           threshold,
  input  logic [NW-1:0]                     num_codes,
  output logic [COLS-1:0][ACT_BITS-1:0]     act,
  output logic [SUMW-1:0]                   act_sum,
  output logic [SUMW-1:0]                   proj_ref
);

  localparam int AMAX = 2 ** ACT_BITS - 1;

  always_comb begin
    act_sum = '0;
    for (int m = 0; m < COLS; m++) begin
      logic signed [SIM_W-1:0] sh;
      sh = $signed(sim[m]) >>> ACT_SHIFT;
      if (m < int'(num_codes) && $signed(sim[m]) > $signed(threshold)) begin
        act[m] = (sh > $signed(SIM_W'(AMAX))) ? ACT_BITS'(AMAX)
               : (sh < 0)            ? '0
               :                       ACT_BITS'(sh);
      end else begin
        act[m] = '0;
      end
      act_sum = act_sum + SUMW'(act[m]);
    end
    proj_ref = SUMW'((act_sum + 1'b1) >> 1);
  end

endmodule
