// xnor_unbind: the unbinding step of the resonator network, done in tier-1
// logic with XNOR gates.
//
// For every factor f it forms u_f = s (.) prod_{g != f} est_g, the element-wise
// bipolar product of the object vector with the current estimates of all the
// other factors. With the encoding 1 = +1, 0 = -1 a bipolar product is an
// XNOR, so u_f is an XNOR chain over F inputs per bit. Using XNOR gates for
// unbinding, rather than the RRAM, follows the paper (RRAM writes are too
// costly for a value that changes every iteration); the chain structure is the
// plain reading of that.
//
// Interface: s and est are inputs, u is the output, all D bits wide per factor.
// Timing: purely combinational.
module xnor_unbind #(
  parameter int unsigned D = h3d_pkg::DIM_D,
  parameter int unsigned F = h3d_pkg::NUM_F
) (
  input  logic [D-1:0]        s,
  input  logic [F-1:0][D-1:0] est,
  output logic [F-1:0][D-1:0] u
);

  always_comb begin
    for (int f = 0; f < F; f++) begin
      u[f] = s;
      for (int g = 0; g < F; g++) begin
        if (g != f) u[f] = ~(u[f] ^ est[g]);
      end
    end
  end

endmodule
