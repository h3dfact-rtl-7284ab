// tb_rram_array: self-checking test of the RRAM subarray model.
// The array is programmed with random columns and then random rows; reads
// with random word-line levels are compared with sum_i wl_i * w_ij from a
// shadow copy of the weights. Reads in STANDBY and SHUTDOWN must return zero
// current, a write in SHUTDOWN must be ignored, and with noise enabled every
// column must stay within NOISE_AMP of the noiseless value while at least
// some columns differ from it.
module tb_rram_array;
  import h3d_pkg::*;
  localparam int ROWS = 256, COLS = 256, IN_BITS = 4, SAMPLE_W = 12, AMP = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  pwr_mode_e pwr = PWR_SHUTDOWN;
  logic noise_en = 1'b0, rd_en = 1'b0, wr_col_en = 1'b0, wr_row_en = 1'b0;
  logic [ROWS-1:0][IN_BITS-1:0] wl = '0;
  logic [COLS-1:0][SAMPLE_W-1:0] bl_out;
  logic [7:0] wr_idx = '0;
  logic [ROWS-1:0] wr_col_data = '0;
  logic [COLS-1:0] wr_row_data = '0;
  bit w [ROWS][COLS];
  int checks = 0, failures = 0;

  rram_array #(.ROWS(ROWS), .COLS(COLS), .IN_BITS(IN_BITS), .SAMPLE_W(SAMPLE_W), .NOISE_AMP(AMP)) dut (
    .clk, .rst_n, .pwr, .noise_en, .rd_en, .wl, .bl_out, .wr_col_en, .wr_row_en, .wr_idx,
    .wr_col_data, .wr_row_data);

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_col(int j);
    int acc = 0;
    for (int i = 0; i < ROWS; i++) if (w[i][j]) acc += int'(wl[i]);
    return acc;
  endfunction

  task automatic do_read(output int nbad, output int ndiff, input bit noisy);
    @(negedge clk);
    rd_en = 1'b1;
    @(negedge clk);
    rd_en = 1'b0;
    nbad = 0; ndiff = 0;
    for (int j = 0; j < COLS; j++) begin
      int e, g;
      e = (pwr == PWR_ACTIVE) ? expect_col(j) : 0;
      g = int'(bl_out[j]);
      if (g != e) ndiff++;
      if (noisy ? (g > e + AMP || g < ((e > AMP) ? e - AMP : 0)) : (g != e)) nbad++;
    end
  endtask

  initial begin
    int nbad, ndiff;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // program every column (STANDBY)
    pwr = PWR_STANDBY;
    for (int j = 0; j < COLS; j++) begin
      @(negedge clk);
      wr_col_en = 1'b1; wr_idx = 8'(j);
      for (int i = 0; i < ROWS; i += 32) wr_col_data[i +: 32] = $urandom;
      for (int i = 0; i < ROWS; i++) w[i][j] = wr_col_data[i];
    end
    @(negedge clk);
    wr_col_en = 1'b0;
    // overwrite some rows
    for (int k = 0; k < 40; k++) begin
      @(negedge clk);
      wr_row_en = 1'b1; wr_idx = 8'($urandom_range(0, ROWS - 1));
      for (int j = 0; j < COLS; j += 32) wr_row_data[j +: 32] = $urandom;
      for (int j = 0; j < COLS; j++) w[wr_idx][j] = wr_row_data[j];
    end
    @(negedge clk);
    wr_row_en = 1'b0;
    // active reads, 1-bit and 4-bit levels
    pwr = PWR_ACTIVE;
    for (int t = 0; t < 30; t++) begin
      for (int i = 0; i < ROWS; i++) wl[i] = (t % 2 == 0) ? IN_BITS'($urandom_range(0, 1)) : IN_BITS'($urandom);
      if (t == 0) wl = '1;
      do_read(nbad, ndiff, 1'b0);
      check(nbad == 0, $sformatf("active read %0d: %0d columns wrong", t, nbad));
    end
    // inactive tier draws no current
    pwr = PWR_STANDBY;
    do_read(nbad, ndiff, 1'b0);
    check(nbad == 0, "standby read not zero");
    pwr = PWR_SHUTDOWN;
    do_read(nbad, ndiff, 1'b0);
    check(nbad == 0, "shutdown read not zero");
    // writes ignored in shutdown
    @(negedge clk);
    wr_col_en = 1'b1; wr_idx = 8'd7; wr_col_data = ~wr_col_data;
    @(negedge clk);
    wr_col_en = 1'b0;
    pwr = PWR_ACTIVE;
    for (int i = 0; i < ROWS; i++) wl[i] = IN_BITS'($urandom);
    do_read(nbad, ndiff, 1'b0);
    check(nbad == 0, "write in shutdown changed the array");
    // noise
    noise_en = 1'b1;
    for (int t = 0; t < 10; t++) begin
      for (int i = 0; i < ROWS; i++) wl[i] = IN_BITS'($urandom_range(0, 1));
      do_read(nbad, ndiff, 1'b1);
      check(nbad == 0, $sformatf("noisy read %0d out of bounds in %0d columns", t, nbad));
      check(ndiff > 0, "noise enabled but no column changed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
