// h3d_tb_common.svh: shared stimulus and reference model for the end-to-end
// tests of h3dfact_top. Included inside a testbench module that declares the
// localparams D, F, COLS, BATCH, ADC_BITS, ACT_BITS and instantiates the top as
// `dut` with the signals declared below.
//
// The reference model recomputes one resonator iteration from the code books
// and the estimates alone, with the same quantization as the hardware:
//   u      = s (.) prod_{g != f} est_g
//   P_m    = #{i : u_i = +1, x_mi = +1}              (similarity column current)
//   code_m = min(2^ADC_BITS-1, max(P_m - offset, 0) >> LSB)
//   sim_m  = 4 (code_m 2^LSB + 2^LSB / 2) + 2 #(-1 in u) - 2 #(+1 in x_m) - D
//   act_m  = m < num_codes && sim_m > thr ? min(15, sim_m >> ASH) : 0
//   Q_j    = sum_m act_m [x_mj = +1]                 (projection column current)
//   est_j  = max(Q_j - offset, 0) >= ceil(sum act / 2)
// It is written from these formulas, independently of the RTL.

  import h3d_pkg::*;

  localparam int FW   = (F > 1) ? $clog2(F) : 1;
  localparam int MAXN = (BATCH > COLS) ? BATCH : COLS;
  localparam int IW   = $clog2(MAXN);
  localparam int NBW  = $clog2(BATCH + 1);
  localparam int NW   = $clog2(COLS + 1);
  localparam int NWL  = (D > COLS) ? D : COLS;
  localparam int SAMPLE_W = $clog2((2 ** ACT_BITS) * NWL);
  localparam int SIM_W = h3d_pkg::sim_width(D);
  localparam int LSB   = $clog2(D) - ADC_BITS - 1;
  localparam int ASH   = $clog2(D) - ACT_BITS;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0, cmd_ready;
  cmd_op_e cmd_op = CMD_NOP;
  logic [FW-1:0] cmd_factor = '0;
  logic [IW-1:0] cmd_idx = '0;
  logic [D-1:0] cmd_data = '0;
  logic rsp_valid;
  logic [D-1:0] rsp_data;
  logic [NBW-1:0] cfg_batch = '0;
  logic [15:0] cfg_iters = '0;
  logic [NW-1:0] cfg_num_codes = '0;
  logic signed [SIM_W-1:0] cfg_threshold = '0;
  logic cfg_noise_en = 1'b0;
  logic [SAMPLE_W-1:0] cfg_adc_offset = '0;
  logic busy, done;
  logic [15:0] iter_count;
  pwr_mode_e tier2_pwr, tier3_pwr;

  int checks = 0, failures = 0;

  logic [D-1:0] cb [F][COLS];        // code books
  int           truth [BATCH][F];    // true factor index of each item
  logic [D-1:0] s_vec [BATCH];
  logic [D-1:0] est_ref [BATCH][F];  // reference estimates
  logic [D-1:0] est_hw [BATCH][F];   // estimates read back from the hardware

  // mechanism counters
  int n_tier_switch = 0, n_inactive_shutdown = 0, n_adc_sat = 0, n_thr_zero = 0;
  int n_noisy_reads = 0, n_noise_diff = 0, n_offset_runs = 0, n_batch_runs = 0;
  int n_readback = 0, n_program = 0;

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  // ---------------------------------------------------- mechanism monitors
  pwr_mode_e last_active = PWR_SHUTDOWN;
  always @(posedge clk) if (rst_n) begin
    if (tier2_pwr == PWR_ACTIVE && tier3_pwr == PWR_ACTIVE) check(0, "two RRAM tiers active");
    if (dut.t3_rd_en && tier2_pwr == PWR_SHUTDOWN) n_inactive_shutdown++;
    if (dut.t2_rd_en && tier3_pwr == PWR_SHUTDOWN) n_inactive_shutdown++;
    if (tier2_pwr == PWR_STANDBY && tier3_pwr == PWR_STANDBY) n_tier_switch++;
    if ((dut.t3_rd_en || dut.t2_rd_en) && cfg_noise_en) n_noisy_reads++;
    if (dut.sim_we) begin
      for (int m = 0; m < COLS; m++) begin
        if (int'(dut.g_sub[0].code[m]) == 2 ** ADC_BITS - 1) n_adc_sat++;
        if ($signed(dut.g_sub[0].sim[m]) > 0 && $signed(dut.g_sub[0].sim[m]) <= cfg_threshold)
          n_thr_zero++;
      end
    end
  end

  // ------------------------------------------------------------ host side
  task automatic send(cmd_op_e op, int f, int idx, logic [D-1:0] data);
    @(negedge clk);
    cmd_valid = 1'b1; cmd_op = op; cmd_factor = FW'(f); cmd_idx = IW'(idx); cmd_data = data;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk);
    #1 cmd_valid = 1'b0;
    cmd_op = CMD_NOP;
  endtask

  function automatic logic [D-1:0] rand_vec();
    logic [D-1:0] v;
    for (int i = 0; i < D; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  // bipolar product of two vectors, element by element with +1/-1 integers
  function automatic logic [D-1:0] bind2(logic [D-1:0] a, logic [D-1:0] b);
    logic [D-1:0] r;
    for (int i = 0; i < D; i++) r[i] = ((a[i] ? 1 : -1) * (b[i] ? 1 : -1)) > 0;
    return r;
  endfunction

  task automatic program_codebooks();
    for (int f = 0; f < F; f++)
      for (int m = 0; m < COLS; m++) begin
        cb[f][m] = rand_vec();
        send(CMD_PROG_CODE, f, m, cb[f][m]);
        n_program++;
      end
  endtask

  // new object vectors and initial estimates = sign of the superposition of
  // the first ncodes code vectors
  task automatic load_batch(int nb, int ncodes);
    for (int b = 0; b < nb; b++) begin
      logic [D-1:0] sv;
      sv = '1;
      for (int f = 0; f < F; f++) begin
        truth[b][f] = $urandom_range(0, ncodes - 1);
        sv = bind2(sv, cb[f][truth[b][f]]);
      end
      s_vec[b] = sv;
      send(CMD_LOAD_S, 0, b, sv);
      for (int f = 0; f < F; f++) begin
        logic [D-1:0] e;
        for (int i = 0; i < D; i++) begin
          int acc = 0;
          for (int m = 0; m < ncodes; m++) acc += cb[f][m][i] ? 1 : -1;
          e[i] = (acc >= 0);
        end
        est_ref[b][f] = e;
        send(CMD_LOAD_EST, f, b, e);
      end
    end
  endtask

  // estimates set to the true factors: a factorization that has converged
  task automatic load_truth(int nb);
    for (int b = 0; b < nb; b++)
      for (int f = 0; f < F; f++) begin
        est_ref[b][f] = cb[f][truth[b][f]];
        send(CMD_LOAD_EST, f, b, est_ref[b][f]);
      end
  endtask

  // one reference iteration for item b (all factors from the same old estimates)
  task automatic ref_iterate(int b, int ncodes, int thr, int off);
    logic [D-1:0] nxt [F];
    for (int f = 0; f < F; f++) begin
      logic [D-1:0] u;
      int neg, asum, pref;
      int act [COLS];
      u = s_vec[b];
      for (int g = 0; g < F; g++) if (g != f) u = bind2(u, est_ref[b][g]);
      neg = 0;
      for (int i = 0; i < D; i++) if (!u[i]) neg++;
      asum = 0;
      for (int m = 0; m < COLS; m++) begin
        int p, w, c, sim, a;
        p = 0; w = 0;
        for (int i = 0; i < D; i++) begin
          if (u[i] && cb[f][m][i]) p++;
          if (cb[f][m][i]) w++;
        end
        p = (p > off) ? p - off : 0;
        c = p >> LSB;
        if (c > 2 ** ADC_BITS - 1) c = 2 ** ADC_BITS - 1;
        sim = 4 * ((c << LSB) + ((1 << LSB) >> 1)) + 2 * neg - 2 * w - D;
        a = 0;
        if (m < ncodes && sim > thr) begin
          a = (sim < 0) ? 0 : (sim >>> ASH);
          if (a > 2 ** ACT_BITS - 1) a = 2 ** ACT_BITS - 1;
        end
        act[m] = a;
        asum += a;
      end
      pref = (asum + 1) / 2;
      for (int j = 0; j < D; j++) begin
        int q = 0;
        for (int m = 0; m < COLS; m++) if (cb[f][m][j]) q += act[m];
        q = (q > off) ? q - off : 0;
        nxt[f][j] = (q >= pref);
      end
    end
    for (int f = 0; f < F; f++) est_ref[b][f] = nxt[f];
  endtask

  // index of the code vector most similar to an estimate (first of ties)
  function automatic int decode(int f, logic [D-1:0] e, int ncodes);
    int best = -D - 1, besti = 0;
    for (int m = 0; m < ncodes; m++) begin
      int dot = 0;
      for (int i = 0; i < D; i++) dot += (e[i] == cb[f][m][i]) ? 1 : -1;
      if (dot > best) begin best = dot; besti = m; end
    end
    return besti;
  endfunction

  task automatic read_back(int nb);
    for (int b = 0; b < nb; b++)
      for (int f = 0; f < F; f++) begin
        send(CMD_READ_EST, f, b, '0);
        check(rsp_valid, "no response to READ_EST");
        est_hw[b][f] = rsp_data;
        n_readback++;
      end
  endtask

  // run `iters` iterations on the hardware, check timing, and compare with
  // the reference model (noise off) or only record differences (noise on)
  task automatic run_and_check(int nb, int iters, int ncodes, int thr, int off, bit noisy,
                               output int n_correct);
    int cyc;
    cfg_batch = NBW'(nb); cfg_iters = 16'(iters); cfg_num_codes = NW'(ncodes);
    cfg_threshold = SIM_W'(thr); cfg_adc_offset = SAMPLE_W'(off); cfg_noise_en = noisy;
    if (off != 0) n_offset_runs++;
    if (nb > 1) n_batch_runs++;
    send(CMD_START, 0, 0, '0);
    cyc = 0;
    while (!done && cyc < 100 * (iters * (nb * 13 + 2) + 10)) begin
      @(negedge clk);
      if (!done) cyc++;
    end
    check(done, "run did not finish");
    check(cyc == iters * (nb * (ADC_BITS + 9) + 2),
          $sformatf("run of %0d x %0d took %0d cycles", nb, iters, cyc));
    check(int'(iter_count) == iters, "iteration counter");
    @(negedge clk);
    for (int t = 0; t < iters; t++)
      for (int b = 0; b < nb; b++) ref_iterate(b, ncodes, thr, off);
    read_back(nb);
    n_correct = 0;
    for (int b = 0; b < nb; b++) begin
      bit all_ok = 1;
      for (int f = 0; f < F; f++) begin
        if (!noisy) check(est_hw[b][f] == est_ref[b][f],
                          $sformatf("item %0d factor %0d differs from reference", b, f));
        else if (est_hw[b][f] != est_ref[b][f]) n_noise_diff++;
        if (decode(f, est_hw[b][f], ncodes) != truth[b][f]) all_ok = 0;
        est_ref[b][f] = est_hw[b][f];   // continue from the hardware state
      end
      if (all_ok) n_correct++;
    end
  endtask

  task automatic reset_dut();
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
  endtask

  task automatic report_mechanisms();
    $display("mechanisms: tier_switch=%0d inactive_tier_shutdown=%0d adc_saturation=%0d threshold_zeroed=%0d",
             n_tier_switch, n_inactive_shutdown, n_adc_sat, n_thr_zero);
    $display("            noisy_reads=%0d noise_changed_bits_vectors=%0d offset_runs=%0d batch_runs=%0d readbacks=%0d programmed=%0d",
             n_noisy_reads, n_noise_diff, n_offset_runs, n_batch_runs, n_readback, n_program);
    check(n_tier_switch > 0, "no tier hand-over happened");
    check(n_inactive_shutdown > 0, "inactive tier never in full shutdown");
    check(n_adc_sat > 0, "ADC saturation never happened");
    check(n_thr_zero > 0, "threshold never suppressed a positive similarity");
    check(n_noisy_reads > 0, "device noise never enabled");
    check(n_offset_runs > 0, "ADC offset never used");
    check(n_batch_runs > 0, "no batch larger than one");
    check(n_readback > 0 && n_program > 0, "no programming or read-back");
  endtask
