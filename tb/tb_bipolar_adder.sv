// tb_bipolar_adder: self-checking test of the bipolar adder.
// Random bipolar input and weight vectors are generated (including exact
// matches and exact opposites). The column count P, the -1 count of the
// input, the +1 count of the column and the 4-bit code are formed here; the
// adder's output must equal the true +1/-1 dot product plus 4 times the ADC
// reconstruction error (P_hat - P), both computed independently.
module tb_bipolar_adder;
  localparam int D = 256, ADC_BITS = 4, LSB_SHIFT = 4;
  localparam int SIM_W = h3d_pkg::sim_width(D);
  localparam int CW = $clog2(D + 1);
  logic clk = 1'b0;
  logic [ADC_BITS-1:0] code;
  logic [CW-1:0] neg, wcnt;
  logic signed [SIM_W-1:0] sim;
  int checks = 0, failures = 0;

  bipolar_adder #(.D(D), .ADC_BITS(ADC_BITS), .LSB_SHIFT(LSB_SHIFT), .SIM_W(SIM_W)) dut (
    .code, .neg, .wcnt, .sim);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      logic [D-1:0] u, x;
      int p, dot, c, phat;
      for (int i = 0; i < D; i += 32) begin
        u[i +: 32] = $urandom;
        x[i +: 32] = (t % 4 == 1) ? $urandom & $urandom : $urandom;
      end
      if (t % 10 == 0) x = u;
      if (t % 10 == 5) x = ~u;
      if (t == 3) begin u = '1; x = '1; end
      p = 0; dot = 0;
      for (int i = 0; i < D; i++) begin
        if (u[i] && x[i]) p++;
        dot += (u[i] == x[i]) ? 1 : -1;
      end
      c = p >> LSB_SHIFT;
      if (c > 15) c = 15;
      phat = c * 16 + 8;
      code = ADC_BITS'(c);
      neg  = CW'($countones(~u));
      wcnt = CW'($countones(x));
      @(posedge clk);
      checks++;
      if (int'(sim) != dot + 4 * (phat - p)) begin
        failures++;
        $display("FAIL t=%0d sim=%0d dot=%0d p=%0d", t, sim, dot, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
