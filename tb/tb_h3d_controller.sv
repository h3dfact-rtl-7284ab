// tb_h3d_controller: self-checking test of the tier-1 controller on its own.
// The ADCs are replaced by a model that pulses adc_done ADC_BITS + 1 cycles after
// a 4-bit start and two cycles after a compare start (the controller sees
// the ADC done flag one cycle after the ADC raises it). The test checks the
// programming sequence (tier-3 column write with register-file write, then
// tier-2 row write, each with only that tier in STANDBY), the buffer writes
// for LOAD_S / LOAD_EST, the READ_EST response, and for runs of several
// batch sizes and iteration counts: the exact cycle count
// iters * (batch * (ADC_BITS + 9) + 2), the order of similarity and
// projection phases, the buffer addresses, the tier power modes during reads,
// and that the two RRAM tiers are never active together.
module tb_h3d_controller;
  import h3d_pkg::*;
  localparam int D = 32, F = 4, COLS = 16, BATCH = 6, ADC_BITS = 4;
  localparam int IW = $clog2(16), BW = 3, NBW = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0, cmd_ready;
  cmd_op_e cmd_op = CMD_NOP;
  logic [1:0] cmd_factor = '0;
  logic [IW-1:0] cmd_idx = '0;
  logic [D-1:0] cmd_data = '0;
  logic rsp_valid;
  logic [D-1:0] rsp_data;
  logic [NBW-1:0] cfg_batch = '0;
  logic [15:0] cfg_iters = '0;
  logic busy, done;
  logic [15:0] iter_count;
  pwr_mode_e tier2_pwr, tier3_pwr;
  logic t3_rd_en, t2_rd_en, t3_wr_col_en, t2_wr_row_en, rf_we;
  logic [1:0] wr_f;
  logic [IW-1:0] wr_idx;
  logic [D-1:0] wr_data;
  logic s_we, est_host_we, est_upd_we, sim_we, buf_re;
  logic [BW-1:0] buf_waddr, buf_raddr;
  logic [F-1:0][D-1:0] est_rdata;
  logic proj_phase, adc_start, adc_mode, adc_done;

  int checks = 0, failures = 0;

  h3d_controller #(.D(D), .F(F), .COLS(COLS), .BATCH(BATCH), .ADC_BITS(ADC_BITS)) dut (.*);

  always #5 clk = ~clk;

  for (genvar f = 0; f < F; f++) assign est_rdata[f] = {8{4'(f), 4'hA}};

  // ADC timing model
  int adc_cnt = -1;
  always_ff @(posedge clk) begin
    if (adc_start) adc_cnt <= adc_mode ? 1 : ADC_BITS;
    else if (adc_cnt >= 0) adc_cnt <= adc_cnt - 1;
  end
  assign adc_done = (adc_cnt == 0);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // never both tiers active
  always @(negedge clk) if (rst_n) begin
    if (tier2_pwr == PWR_ACTIVE && tier3_pwr == PWR_ACTIVE) check(0, "both tiers active");
    if (t3_rd_en) check(tier3_pwr == PWR_ACTIVE && tier2_pwr == PWR_SHUTDOWN, "tier-3 read power");
    if (t2_rd_en) check(tier2_pwr == PWR_ACTIVE && tier3_pwr == PWR_SHUTDOWN, "tier-2 read power");
  end

  task automatic send(cmd_op_e op, int f, int idx, logic [D-1:0] data);
    @(negedge clk);
    cmd_valid = 1'b1; cmd_op = op; cmd_factor = 2'(f); cmd_idx = IW'(idx); cmd_data = data;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk);
    #1 cmd_valid = 1'b0;
  endtask

  task automatic run(int batch, int iters);
    int cyc, n_sim, n_est, exp_addr, it_sim;
    bit order_ok, addr_ok;
    cfg_batch = NBW'(batch); cfg_iters = 16'(iters);
    send(CMD_START, 0, 0, '0);
    cyc = 0; n_sim = 0; n_est = 0; order_ok = 1; addr_ok = 1; it_sim = 0;
    while (!done && cyc < 5000) begin
      @(negedge clk);
      if (done) break;
      cyc++;
      check(!cmd_ready, "ready while running");
      if (sim_we) begin
        if (int'(buf_waddr) != n_sim % batch) addr_ok = 0;
        n_sim++; it_sim++;
      end
      if (est_upd_we) begin
        if (int'(buf_waddr) != n_est % batch) addr_ok = 0;
        if (it_sim != batch) order_ok = 0;   // whole batch through similarity first
        n_est++;
        if (n_est % batch == 0) it_sim = 0;
      end
    end
    check(cyc == iters * (batch * (ADC_BITS + 9) + 2),
          $sformatf("run b=%0d i=%0d took %0d cycles", batch, iters, cyc));
    check(n_sim == batch * iters && n_est == batch * iters,
          $sformatf("writes sim=%0d est=%0d", n_sim, n_est));
    check(order_ok, "projection began before the batch finished similarity");
    check(addr_ok, "buffer address sequence");
    check(int'(iter_count) == iters, "iteration count");
    @(negedge clk);
    check(cmd_ready && !busy, "idle after done");
  endtask

  initial begin
    logic [D-1:0] v;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // programming
    for (int k = 0; k < 6; k++) begin
      v = $urandom;
      send(CMD_PROG_CODE, k % F, k + 3, v);
      @(negedge clk);
      check(t3_wr_col_en && rf_we && !t2_wr_row_en && tier3_pwr == PWR_STANDBY &&
            tier2_pwr == PWR_SHUTDOWN && wr_data == v && int'(wr_f) == k % F &&
            int'(wr_idx) == k + 3, "tier-3 program cycle");
      @(negedge clk);
      check(t2_wr_row_en && !t3_wr_col_en && !rf_we && tier2_pwr == PWR_STANDBY &&
            tier3_pwr == PWR_SHUTDOWN && wr_data == v, "tier-2 program cycle");
      @(negedge clk);
      check(cmd_ready && tier2_pwr == PWR_SHUTDOWN && tier3_pwr == PWR_SHUTDOWN, "back to idle");
    end
    // buffer loads
    @(negedge clk);
    cmd_valid = 1'b1; cmd_op = CMD_LOAD_S; cmd_idx = 4'd2; cmd_data = 32'hDEAD_BEEF;
    #1 check(s_we && !est_host_we && buf_waddr == 3'd2, "LOAD_S write");
    cmd_op = CMD_LOAD_EST; cmd_factor = 2'd3;
    #1 check(est_host_we && !s_we && buf_waddr == 3'd2, "LOAD_EST write");
    @(posedge clk);
    #1 cmd_valid = 1'b0;
    // read response
    for (int f = 0; f < F; f++) begin
      send(CMD_READ_EST, f, 1, '0);
      check(rsp_valid && rsp_data == est_rdata[f], $sformatf("READ_EST response f=%0d", f));
      @(posedge clk);
      #1 check(!rsp_valid, "response lasts one cycle");
    end
    // runs
    run(1, 1);
    run(BATCH, 1);
    run(3, 4);
    run(BATCH, 2);
    // zero iterations: done at once
    cfg_iters = 0;
    send(CMD_START, 0, 0, '0);
    @(negedge clk);
    check(done, "zero-iteration start finishes at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
