// neg_counter: the "-1's counter" of an RRAM subarray.
//
// Counts how many elements of the bipolar vector applied to the word lines are
// -1 (bit 0). The bipolar adder needs this count because the RRAM column only
// sees the word lines that are driven (the +1 inputs). The paper names the
// counter and its purpose; a population count of zero bits is the simplest
// circuit that does it.
//
// Interface: v (D bits) in, neg (0..D) out. Timing: combinational.
module neg_counter #(
  parameter int unsigned D = h3d_pkg::DIM_D,
  localparam int unsigned CW = $clog2(D + 1)
) (
  input  logic [D-1:0]  v,
  output logic [CW-1:0] neg
);

  always_comb begin
    neg = '0;
    for (int i = 0; i < D; i++) neg = neg + CW'(!v[i]);
  end

endmodule
