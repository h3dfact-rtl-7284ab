// tb_column_regfile: self-checking test of the column +1-count register file.
// Random code vectors are written to random (factor, column) entries; after
// each write every entry is compared with a shadow copy of the expected
// counts ($countones of the last vector written there, 0 after reset).
module tb_column_regfile;
  localparam int F = 4, COLS = 256, D = 256;
  localparam int CW = $clog2(D + 1);
  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [1:0] wf;
  logic [7:0] widx;
  logic [D-1:0] wdata;
  logic [F-1:0][COLS-1:0][CW-1:0] wcnt;
  int expc [F][COLS];
  int checks = 0, failures = 0;

  column_regfile #(.F(F), .COLS(COLS), .D(D)) dut (.clk, .rst_n, .we, .wf, .widx, .wdata, .wcnt);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all(int t);
    int bad;
    bad = 0;
    for (int f = 0; f < F; f++)
      for (int m = 0; m < COLS; m++)
        if (int'(wcnt[f][m]) != expc[f][m]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL t=%0d, %0d entries wrong", t, bad); end
  endtask

  initial begin
    for (int f = 0; f < F; f++) for (int m = 0; m < COLS; m++) expc[f][m] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    compare_all(-1);
    for (int t = 0; t < 1500; t++) begin
      wf = 2'($urandom); widx = 8'($urandom);
      for (int i = 0; i < D; i += 32) wdata[i +: 32] = $urandom;
      if (t == 1) wdata = '1;
      if (t == 2) wdata = '0;
      we = (t % 5 != 4);
      @(negedge clk);
      if (we) expc[wf][widx] = $countones(wdata);
      we = 1'b0;
      compare_all(t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
