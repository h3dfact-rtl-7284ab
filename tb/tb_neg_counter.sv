// tb_neg_counter: self-checking test of the -1's counter.
// Vectors of every density from all +1 to all -1 are applied and the count is
// compared with $countones of the inverted vector.
module tb_neg_counter;
  localparam int D = 256;
  localparam int CW = $clog2(D + 1);
  logic clk = 1'b0;
  logic [D-1:0] v;
  logic [CW-1:0] neg;
  int checks = 0, failures = 0;

  neg_counter #(.D(D)) dut (.v, .neg);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 600; t++) begin
      int k;
      k = t % (D + 1);
      // first k elements -1, then a random shuffle by rotation
      v = '1;
      for (int i = 0; i < k; i++) v[i] = 1'b0;
      if (t >= D + 1) for (int i = 0; i < D; i += 32) v[i +: 32] = $urandom;
      @(posedge clk);
      checks++;
      if (int'(neg) != $countones(~v)) begin
        failures++;
        $display("FAIL t=%0d neg=%0d exp=%0d", t, neg, $countones(~v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
