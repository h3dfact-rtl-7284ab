// tb_activation_unit: self-checking test of the activation unit.
// Random similarity vectors, thresholds and code counts; each activation, the
// activation sum and the projection reference are compared with a reference
// computed here. Saturation (similarity above 16 * 15) and suppression by the
// threshold are both made to happen and counted.
module tb_activation_unit;
  localparam int COLS = 256, ACT_BITS = 4, ACT_SHIFT = 4;
  localparam int SIM_W = h3d_pkg::sim_width(256);
  localparam int NW = $clog2(COLS + 1);
  localparam int SUMW = $clog2(15 * COLS + 1);
  logic clk = 1'b0;
  logic signed [COLS-1:0][SIM_W-1:0] sim;
  logic signed [SIM_W-1:0] threshold;
  logic [NW-1:0] num_codes;
  logic [COLS-1:0][ACT_BITS-1:0] act;
  logic [SUMW-1:0] act_sum, proj_ref;
  int checks = 0, failures = 0, n_sat = 0, n_thr = 0;

  activation_unit #(.COLS(COLS), .SIM_W(SIM_W), .ACT_BITS(ACT_BITS), .ACT_SHIFT(ACT_SHIFT)) dut (
    .sim, .threshold, .num_codes, .act, .act_sum, .proj_ref);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      int sum, e, ok;
      threshold = SIM_W'($urandom_range(0, 200)) - SIM_W'(100);
      num_codes = NW'((t % 3 == 0) ? COLS : $urandom_range(0, COLS));
      for (int m = 0; m < COLS; m++)
        sim[m] = SIM_W'($urandom_range(0, 1500)) - SIM_W'(740);
      @(posedge clk);
      sum = 0; ok = 1;
      for (int m = 0; m < COLS; m++) begin
        int sv;
        sv = int'($signed(sim[m]));
        if (m >= int'(num_codes) || sv <= int'(threshold)) begin
          e = 0;
          if (m < int'(num_codes) && sv > 0) n_thr++;
        end else begin
          e = (sv < 0) ? 0 : sv / 16;
          if (e > 15) begin e = 15; n_sat++; end
        end
        sum += e;
        if (int'(act[m]) != e) ok = 0;
      end
      checks++;
      if (!ok) begin failures++; $display("FAIL act t=%0d", t); end
      checks++;
      if (int'(act_sum) != sum || int'(proj_ref) != (sum + 1) / 2) begin
        failures++;
        $display("FAIL sum t=%0d %0d/%0d ref %0d", t, act_sum, sum, proj_ref);
      end
    end
    checks++;
    if (n_sat == 0 || n_thr == 0) begin
      failures++;
      $display("FAIL saturation %0d / threshold %0d never seen", n_sat, n_thr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
