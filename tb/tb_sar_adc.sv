// tb_sar_adc: self-checking test of the per-column SAR ADC.
// 4-bit mode: random samples and offsets; the code must equal
// min(15, floor(max(sample - offset, 0) / 16)) and done must rise exactly
// ADC_BITS cycles after start. 1-bit mode: the output must equal
// (sample - offset >= ref) one cycle after start. A start while busy must be
// ignored.
module tb_sar_adc;
  localparam int ADC_BITS = 4, SAMPLE_W = 12, LSB_SHIFT = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, mode = 1'b0;
  logic [SAMPLE_W-1:0] sample = '0, offset = '0, cmp_ref = '0;
  logic busy, done, bit_out;
  logic [ADC_BITS-1:0] code;
  int checks = 0, failures = 0;

  sar_adc #(.ADC_BITS(ADC_BITS), .SAMPLE_W(SAMPLE_W), .LSB_SHIFT(LSB_SHIFT)) dut (
    .clk, .rst_n, .start, .mode, .sample, .offset, .cmp_ref, .busy, .done, .code, .bit_out);

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic convert(int smp, int off, int rf, bit md, output int cycles);
    @(negedge clk);
    sample = SAMPLE_W'(smp); offset = SAMPLE_W'(off); cmp_ref = SAMPLE_W'(rf);
    mode = md; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    sample = SAMPLE_W'($urandom);   // the held value must be used
    cycles = 0;
    while (!done && cycles < 50) begin
      if (cycles == 2) start = 1'b1;  // ignored while busy
      @(negedge clk);
      start = 1'b0;
      cycles++;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      int smp, off, rf, held, exp_code, cyc;
      bit md;
      md  = (t % 3 == 2);
      smp = (t < 300) ? t : int'($urandom_range(0, 2 ** SAMPLE_W - 1));
      off = (t % 5 == 0) ? int'($urandom_range(0, 40)) : 0;
      rf  = int'($urandom_range(0, 2 ** SAMPLE_W - 1));
      if (t % 7 == 0) rf = (smp > off) ? smp - off : 0;   // equality edge
      held = (smp > off) ? smp - off : 0;
      convert(smp, off, rf, md, cyc);
      if (!md) begin
        exp_code = held >> LSB_SHIFT;
        if (exp_code > 15) exp_code = 15;
        check(int'(code) == exp_code, $sformatf("code %0d exp %0d (s=%0d o=%0d)", code, exp_code, smp, off));
        check(cyc == ADC_BITS, $sformatf("conversion took %0d cycles", cyc));
      end else begin
        check(bit_out == (held >= rf), $sformatf("cmp %0d vs %0d -> %0d", held, rf, bit_out));
        check(cyc == 1, $sformatf("compare took %0d cycles", cyc));
      end
      @(negedge clk);
      check(!done, "done longer than one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
