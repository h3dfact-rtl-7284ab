// bipolar_adder: the tier-1 adder that turns a column's ADC code into a
// signed bipolar similarity.
//
// The similarity array drives a word line only for a +1 input element and a
// cell conducts only when it stores +1, so a column current counts
// P = #{i : u_i = +1 and x_i = +1}. With neg = number of -1 inputs (from the
// -1's counter) and W = number of +1 cells in the column (from the register
// file), the bipolar dot product is
//     u . x = 4 P + 2 neg - 2 W - D.
// P is taken from the ADC code at the middle of its bin,
// P_hat = code * 2^LSB_SHIFT + 2^LSB_SHIFT / 2. The paper names "-1's counter
// and an adder that processes bipolar quantities"; this formula is this
// design's way of doing that.
//
// The sum is formed two bits wider than sim so that no intermediate term
// overflows; the result always lies in [-D, D] and fits SIM_W bits, so the
// top two bits of the wide sum are dropped.
//
// Interface: code, neg, wcnt in; sim (signed, SIM_W bits) out.
// Timing: combinational.
module bipolar_adder #(
  parameter int unsigned D         = h3d_pkg::DIM_D,
  parameter int unsigned ADC_BITS  = h3d_pkg::ADC_W,
  parameter int unsigned LSB_SHIFT = 4,
  parameter int unsigned SIM_W     = h3d_pkg::sim_width(D),
  localparam int unsigned CW = $clog2(D + 1)
) (
  input  logic [ADC_BITS-1:0]     code,
  input  logic [CW-1:0]           neg,
  input  logic [CW-1:0]           wcnt,
  output logic signed [SIM_W-1:0] sim
);

  logic signed [SIM_W+1:0] p_hat, acc;

  always_comb begin
    p_hat = (SIM_W + 2)'((int'(code) << LSB_SHIFT) + ((1 << LSB_SHIFT) >> 1));
    acc   = (p_hat <<< 2) + ((SIM_W + 2)'(neg) <<< 1) - ((SIM_W + 2)'(wcnt) <<< 1)
            - (SIM_W + 2)'(D);
    sim   = SIM_W'(acc);
  end

endmodule
