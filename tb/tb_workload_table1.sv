// tb_workload_table1: factorization workloads of the accuracy study
// (F = 3 and F = 4 factors, small code books), run on the factorizer at its
// default size (D = 256, four 256 x 256 subarrays per tier, batch of 100).
// F = 3 problems use three subarrays; the fourth factor's code book holds
// only the all-(+1) vector, the identity of binding, so it leaves s
// unchanged. Every noiseless run is checked bit for bit against the
// reference model; the fraction of items whose factors all decode to the
// true code vectors is printed after each block of iterations, with and
// without device noise. Only a few tens of iterations are simulated: the
// larger problems of the study need up to millions.
module tb_workload_table1;
  localparam int D = 256, F = 4, COLS = 256, BATCH = 100, ADC_BITS = 4, ACT_BITS = 4;

  `include "h3d_tb_common.svh"

  h3dfact_top dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic make_identity(int f);
    for (int m = 0; m < COLS; m++) begin
      cb[f][m] = '1;
      send(CMD_PROG_CODE, f, m, cb[f][m]);
    end
  endtask

  task automatic workload(string name, int nf, int ncodes, int blocks, int per_block,
                          int thr, bit noisy);
    int nc;
    load_batch(BATCH, ncodes);
    if (nf == 3) begin
      for (int b = 0; b < BATCH; b++) truth[b][3] = 0;
    end
    for (int k = 0; k < blocks; k++) begin
      run_and_check(BATCH, per_block, ncodes, thr, 0, noisy, nc);
      $display("%s F=%0d M=%0d noise=%0d: after %0d iterations %0d of %0d items factorized",
               name, nf, ncodes, noisy, (k + 1) * per_block, nc, BATCH);
    end
  endtask

  initial begin
    reset_dut();
    program_codebooks();
    make_identity(3);
    workload("table1", 3, 16, 2, 5, 0, 1'b0);
    workload("table1", 3, 32, 3, 5, 0, 1'b0);
    workload("table1", 3, 32, 3, 5, 0, 1'b1);
    program_codebooks();
    workload("table1", 4, 16, 3, 10, 0, 1'b0);
    workload("table1", 4, 16, 3, 10, 0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
