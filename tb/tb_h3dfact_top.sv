// tb_h3dfact_top: end-to-end test of the factorizer at reduced size
// (D = 64, 16 code vectors per factor, F = 4, batch of 6).
// Code books are programmed through the host port, a batch of object
// vectors s = x1 (.) x2 (.) x3 (.) x4 is loaded with superposition
// initial estimates, and resonator iterations are run. After every run the
// estimates are read back and compared bit for bit with the reference model
// in h3d_tb_common.svh, and the cycle count is checked against
// batch * (ADC_BITS + 9) + 2 per iteration. Runs use different thresholds,
// an ADC offset, and device noise, and the test counts how often each
// mechanism happened (tier hand-over, full shutdown of the inactive tier,
// ADC saturation, threshold suppression, noisy reads, batches). Finally the
// estimates are set to the true factors, which must stay unchanged.
module tb_h3dfact_top;
  localparam int D = 64, F = 4, COLS = 16, BATCH = 6, ADC_BITS = 4, ACT_BITS = 4;

  `include "h3d_tb_common.svh"

  h3dfact_top #(.D(D), .F(F), .COLS(COLS), .BATCH(BATCH), .ADC_BITS(ADC_BITS),
                .ACT_BITS(ACT_BITS), .NOISE_AMP(2)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nc;
    reset_dut();
    program_codebooks();
    load_batch(BATCH, 8);
    run_and_check(1, 1, 8, 0, 0, 1'b0, nc);
    run_and_check(BATCH, 1, 8, 0, 0, 1'b0, nc);
    run_and_check(BATCH, 4, 8, 8, 0, 1'b0, nc);
    $display("after 6 iterations: %0d of %0d items factorized (every factor decodes to the true code vector)", nc, BATCH);
    run_and_check(BATCH, 2, 8, -2048, 1, 1'b0, nc);
    load_batch(BATCH, 16);
    run_and_check(BATCH, 3, 16, 4, 0, 1'b1, nc);
    run_and_check(BATCH, 8, 16, 4, 0, 1'b0, nc);
    $display("16 codes, after 11 iterations: %0d of %0d items factorized (every factor decodes to the true code vector)", nc, BATCH);
    // the true factorization must be a fixed point of the iteration
    load_truth(BATCH);
    run_and_check(BATCH, 2, 16, 4, 0, 1'b0, nc);
    check(nc == BATCH, $sformatf("true factors not stable: %0d of %0d", nc, BATCH));
    report_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
