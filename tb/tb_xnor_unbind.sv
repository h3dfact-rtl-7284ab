// tb_xnor_unbind: self-checking test of the XNOR unbinding logic.
// Random object vectors and estimates are applied; every output vector is
// compared with a bipolar product worked out element by element with +1/-1
// integers.
module tb_xnor_unbind;
  localparam int D = 256, F = 4;
  logic clk = 1'b0;
  logic [D-1:0] s;
  logic [F-1:0][D-1:0] est, u;
  int checks = 0, failures = 0;

  xnor_unbind #(.D(D), .F(F)) dut (.s, .est, .u);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < D; i += 32) s[i +: 32] = $urandom;
      for (int f = 0; f < F; f++)
        for (int i = 0; i < D; i += 32) est[f][i +: 32] = (t < 5) ? '1 : $urandom;
      @(posedge clk);
      for (int f = 0; f < F; f++) begin
        logic [D-1:0] ref_v;
        for (int i = 0; i < D; i++) begin
          int p;
          p = s[i] ? 1 : -1;
          for (int g = 0; g < F; g++) if (g != f) p = p * (est[g][i] ? 1 : -1);
          ref_v[i] = (p == 1);
        end
        checks++;
        if (u[f] !== ref_v) begin
          failures++;
          $display("FAIL t=%0d f=%0d", t, f);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
