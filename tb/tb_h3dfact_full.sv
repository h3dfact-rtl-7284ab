// tb_h3dfact_full: end-to-end test of the factorizer at its default size
// (D = 256, 256 code vectors per factor in four 256 x 256 subarrays per
// tier, F = 4, batch of 100), with no parameter overrides on the top.
// All 1024 code vectors are programmed, a full batch of 100 object vectors
// is loaded, and resonator iterations run over the whole batch; after each
// run the estimates are compared bit for bit with the reference model in
// h3d_tb_common.svh and the cycle count with 100 * 13 + 2 per iteration.
// The first operation uses 16 active code vectors per factor (a problem size
// of 16^4); then the estimates are set to the true factors, which must stay
// unchanged (this run drives the ADCs into saturation); the last operation
// uses all 256 code vectors (256^4) for one iteration.
module tb_h3dfact_full;
  localparam int D = 256, F = 4, COLS = 256, BATCH = 100, ADC_BITS = 4, ACT_BITS = 4;

  `include "h3d_tb_common.svh"

  h3dfact_top dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nc;
    reset_dut();
    program_codebooks();
    load_batch(BATCH, 16);
    run_and_check(BATCH, 1, 16, 0, 0, 1'b0, nc);
    $display("16 codes, 1 iteration: %0d of %0d items factorized (every factor decodes to the true code vector)", nc, BATCH);
    run_and_check(BATCH, 4, 16, 16, 0, 1'b0, nc);
    $display("16 codes, 5 iterations: %0d of %0d items factorized (every factor decodes to the true code vector)", nc, BATCH);
    run_and_check(BATCH, 2, 16, 16, 2, 1'b1, nc);
    $display("16 codes, 7 iterations (2 noisy): %0d of %0d items factorized (every factor decodes to the true code vector)", nc, BATCH);
    // the true factorization must be a fixed point; its similarities saturate the ADC
    load_truth(BATCH);
    run_and_check(BATCH, 1, 16, 16, 0, 1'b0, nc);
    check(nc == BATCH, $sformatf("true factors not stable: %0d of %0d", nc, BATCH));
    load_batch(BATCH, 256);
    run_and_check(BATCH, 1, 256, 16, 0, 1'b0, nc);
    $display("256 codes, 1 iteration: %0d of %0d items factorized (every factor decodes to the true code vector)", nc, BATCH);
    report_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
