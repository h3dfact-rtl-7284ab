// h3dfact_top: three-tier compute-in-memory resonator-network factorizer.
//
// The factorizer splits an object vector s = x1 (.) x2 (.) ... (.) xF into its
// F bipolar factors, each drawn from a code book of up to COLS vectors of
// dimension D. Every iteration updates all factor estimates at once:
//   est_f <- sign( X_f * act( X_f^T * ( s (.) prod_{g != f} est_g ) ) )
// and the work is split across three tiers as in the paper:
//   tier-3 (RRAM): F similarity subarrays, D rows x COLS columns, code vector
//                  m stored in column m
//   tier-2 (RRAM): F projection subarrays, COLS rows x D columns, holding the
//                  transposed code books
//   tier-1 (logic): XNOR unbinding, -1's counters, one SAR ADC per shared bit
//                  line, bipolar adders, activation units, column register
//                  file, SRAM buffers and the controller.
// Both RRAM tiers hang on the same vertical word lines and bit lines, so one
// set of tier-1 peripherals serves both; the bit-line current seen by an ADC
// is the sum of what the two tiers drive, and the controller keeps one tier
// shut down while the other computes. With the defaults there are
// F * 256 = 1024 ADCs, and the vertical connections count
// 2 tiers * 4 subarrays * (256 WL + 256 BL + 128 SL) = 5120, the paper's TSV
// count (SLs are not modelled as signals).
//
// Sizes: D = 256, COLS = 256, F = 4, 4-bit ADC, 4-bit activations and a
// batch of 100 follow the paper. The derived shifts (ADC LSB = D / 32, so the
// 4-bit range spans a column count of 0 .. D/2, the count of a matching code
// vector; activation = similarity / (D / 16)) are this design's choice.
//
// Interface: see h3d_controller for the command port; the cfg_* inputs are
// sampled when START is taken (cfg_threshold, cfg_num_codes, cfg_noise_en
// and cfg_adc_offset are used directly and must stay stable during a run).
// Timing: one iteration takes cfg_batch * (ADC_BITS + 9) + 2 clock cycles
// (13 cycles per item with the 4-bit ADC).
// All ADCs start together and take the same number of cycles, so only the
// done flag of the first ADC is used, and no ADC busy flag is needed; the
// activation units' act_sum output is likewise unused here (only its rounded
// half, the projection reference, is stored).
module h3dfact_top #(
  parameter int unsigned D         = h3d_pkg::DIM_D,
  parameter int unsigned F         = h3d_pkg::NUM_F,
  parameter int unsigned COLS      = h3d_pkg::NUM_COLS,
  parameter int unsigned BATCH     = h3d_pkg::BATCH_N,
  parameter int unsigned ADC_BITS  = h3d_pkg::ADC_W,
  parameter int unsigned ACT_BITS  = h3d_pkg::ACT_W,
  parameter int unsigned NOISE_AMP = 2,
  localparam int unsigned FW   = (F > 1) ? $clog2(F) : 1,
  localparam int unsigned MAXN = (BATCH > COLS) ? BATCH : COLS,
  localparam int unsigned IW   = $clog2(MAXN),
  localparam int unsigned NBW  = $clog2(BATCH + 1),
  localparam int unsigned NW   = $clog2(COLS + 1),
  localparam int unsigned NWL  = (D > COLS) ? D : COLS,
  localparam int unsigned SAMPLE_W  = $clog2((2 ** ACT_BITS) * NWL),
  localparam int unsigned SIM_W     = h3d_pkg::sim_width(D),
  localparam int unsigned LSB_SHIFT = $clog2(D) - ADC_BITS - 1,
  localparam int unsigned ACT_SHIFT = $clog2(D) - ACT_BITS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cmd_valid,
  output logic                    cmd_ready,
  input  h3d_pkg::cmd_op_e        cmd_op,
  input  logic [FW-1:0]           cmd_factor,
  input  logic [IW-1:0]           cmd_idx,
  input  logic [D-1:0]            cmd_data,
  output logic                    rsp_valid,
  output logic [D-1:0]            rsp_data,
  input  logic [NBW-1:0]          cfg_batch,
  input  logic [15:0]             cfg_iters,
  input  logic [NW-1:0]           cfg_num_codes,
  input  logic signed [SIM_W-1:0] cfg_threshold,
  input  logic                    cfg_noise_en,
  input  logic [SAMPLE_W-1:0]     cfg_adc_offset,
  output logic                    busy,
  output logic                    done,
  output logic [15:0]             iter_count,
  output h3d_pkg::pwr_mode_e      tier2_pwr,
  output h3d_pkg::pwr_mode_e      tier3_pwr
);

  import h3d_pkg::*;

  localparam int unsigned CW   = $clog2(D + 1);
  localparam int unsigned SUMW = $clog2((2 ** ACT_BITS - 1) * COLS + 1);
  localparam int unsigned BW   = (BATCH > 1) ? $clog2(BATCH) : 1;
  localparam int unsigned MW   = (COLS > 1) ? $clog2(COLS) : 1;

  // one similarity-buffer word per factor: activations and projection reference
  typedef struct packed {
    logic [COLS-1:0][ACT_BITS-1:0] act;
    logic [SUMW-1:0]               pref;
  } sim_word_t;

  // ---------------------------------------------------------------- control
  logic               t3_rd_en, t2_rd_en, t3_wr_col_en, t2_wr_row_en, rf_we;
  logic [FW-1:0]      wr_f;
  logic [IW-1:0]      wr_idx;
  logic [D-1:0]       wr_data;
  logic               s_we, est_host_we, est_upd_we, sim_we, buf_re;
  logic [BW-1:0]      buf_waddr, buf_raddr;
  logic               proj_phase, adc_start, adc_mode, adc_done;
  logic [F-1:0][D-1:0] est_rdata;

  h3d_controller #(.D(D), .F(F), .COLS(COLS), .BATCH(BATCH), .ADC_BITS(ADC_BITS)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_factor, .cmd_idx, .cmd_data,
    .rsp_valid, .rsp_data, .cfg_batch, .cfg_iters, .busy, .done, .iter_count,
    .tier2_pwr, .tier3_pwr, .t3_rd_en, .t2_rd_en, .t3_wr_col_en, .t2_wr_row_en,
    .wr_f, .wr_idx, .wr_data, .rf_we,
    .s_we, .est_host_we, .est_upd_we, .sim_we, .buf_waddr, .buf_re, .buf_raddr,
    .est_rdata, .proj_phase, .adc_start, .adc_mode, .adc_done
  );

  // ------------------------------------------------------ tier-1 SRAM buffers
  logic [D-1:0]           s_rdata;
  sim_word_t [F-1:0]      sim_wdata, sim_rdata;
  logic [F-1:0][NWL-1:0]  adc_bit;

  sram_buffer #(.DEPTH(BATCH), .WIDTH(D)) u_s_buf (
    .clk, .we(s_we), .waddr(buf_waddr), .wdata(cmd_data),
    .re(buf_re), .raddr(buf_raddr), .rdata(s_rdata)
  );

  sram_buffer #(.DEPTH(BATCH), .WIDTH(F * $bits(sim_word_t))) u_sim_buf (
    .clk, .we(sim_we), .waddr(buf_waddr), .wdata(sim_wdata),
    .re(buf_re), .raddr(buf_raddr), .rdata(sim_rdata)
  );

  for (genvar f = 0; f < F; f++) begin : g_est
    logic         we;
    logic [D-1:0] wdata;
    assign we    = est_upd_we || (est_host_we && cmd_factor == FW'(f));
    assign wdata = est_upd_we ? adc_bit[f][D-1:0] : cmd_data;
    sram_buffer #(.DEPTH(BATCH), .WIDTH(D)) u_est_buf (
      .clk, .we, .waddr(buf_waddr), .wdata,
      .re(buf_re), .raddr(buf_raddr), .rdata(est_rdata[f])
    );
  end

  // ------------------------------------------------- tier-1 unbinding (XNOR)
  logic [F-1:0][D-1:0] unbound;
  xnor_unbind #(.D(D), .F(F)) u_unbind (.s(s_rdata), .est(est_rdata), .u(unbound));

  // per-column +1 counts of the similarity arrays
  logic [F-1:0][COLS-1:0][CW-1:0] wcnt;
  column_regfile #(.F(F), .COLS(COLS), .D(D)) u_rf (
    .clk, .rst_n, .we(rf_we), .wf(wr_f), .widx(MW'(wr_idx)), .wdata(wr_data), .wcnt
  );

  // ------------------------------------------------------------ per subarray
  for (genvar f = 0; f < F; f++) begin : g_sub
    logic [CW-1:0]                      neg;
    logic [NWL-1:0][ACT_BITS-1:0]       wl;          // shared vertical word lines
    logic [COLS-1:0][SAMPLE_W-1:0]      bl_t3;       // tier-3 column currents
    logic [D-1:0][SAMPLE_W-1:0]         bl_t2;       // tier-2 column currents
    logic [NWL-1:0][SAMPLE_W-1:0]       bl;          // shared vertical bit lines
    logic [NWL-1:0][ADC_BITS-1:0]       code;
    logic [NWL-1:0]                     adone;
    logic signed [COLS-1:0][SIM_W-1:0]  sim;
    logic [SUMW-1:0]                    act_sum;

    neg_counter #(.D(D)) u_neg (.v(unbound[f]), .neg);

    // word-line drive: 0/1 for the unbound vector in the similarity phase,
    // 4-bit activation levels in the projection phase
    always_comb begin
      for (int i = 0; i < NWL; i++) begin
        if (proj_phase) wl[i] = (i < COLS) ? sim_rdata[f].act[i] : '0;
        else            wl[i] = (i < D) ? ACT_BITS'(unbound[f][i]) : '0;
      end
    end

    rram_array #(.ROWS(D), .COLS(COLS), .IN_BITS(ACT_BITS), .SAMPLE_W(SAMPLE_W),
                 .NOISE_AMP(NOISE_AMP), .SEED(32'h3000_0001 + 32'(f) * 32'h9E37_79B9)) u_t3 (
      .clk, .rst_n, .pwr(tier3_pwr), .noise_en(cfg_noise_en), .rd_en(t3_rd_en),
      .wl(wl[D-1:0]), .bl_out(bl_t3),
      .wr_col_en(t3_wr_col_en && wr_f == FW'(f)), .wr_row_en(1'b0),
      .wr_idx($clog2((D > COLS) ? D : COLS)'(wr_idx)), .wr_col_data(wr_data), .wr_row_data('0)
    );

    rram_array #(.ROWS(COLS), .COLS(D), .IN_BITS(ACT_BITS), .SAMPLE_W(SAMPLE_W),
                 .NOISE_AMP(NOISE_AMP), .SEED(32'h2000_0001 + 32'(f) * 32'h85EB_CA6B)) u_t2 (
      .clk, .rst_n, .pwr(tier2_pwr), .noise_en(cfg_noise_en), .rd_en(t2_rd_en),
      .wl(wl[COLS-1:0]), .bl_out(bl_t2),
      .wr_col_en(1'b0), .wr_row_en(t2_wr_row_en && wr_f == FW'(f)),
      .wr_idx($clog2((D > COLS) ? D : COLS)'(wr_idx)), .wr_col_data('0), .wr_row_data(wr_data)
    );

    // the two tiers' currents add on the shared bit lines
    always_comb begin
      for (int j = 0; j < NWL; j++) begin
        logic [SAMPLE_W:0] tot;
        tot = '0;
        if (j < COLS) tot = tot + (SAMPLE_W + 1)'(bl_t3[j]);
        if (j < D)    tot = tot + (SAMPLE_W + 1)'(bl_t2[j]);
        bl[j] = tot[SAMPLE_W] ? '1 : tot[SAMPLE_W-1:0];
      end
    end

    for (genvar j = 0; j < NWL; j++) begin : g_col
      sar_adc #(.ADC_BITS(ADC_BITS), .SAMPLE_W(SAMPLE_W), .LSB_SHIFT(LSB_SHIFT)) u_adc (
        .clk, .rst_n, .start(adc_start), .mode(adc_mode), .sample(bl[j]),
        .offset(cfg_adc_offset), .cmp_ref(SAMPLE_W'(sim_rdata[f].pref)),
        .busy(), .done(adone[j]), .code(code[j]), .bit_out(adc_bit[f][j])
      );
    end

    for (genvar m = 0; m < COLS; m++) begin : g_add
      bipolar_adder #(.D(D), .ADC_BITS(ADC_BITS), .LSB_SHIFT(LSB_SHIFT), .SIM_W(SIM_W)) u_add (
        .code(code[m]), .neg, .wcnt(wcnt[f][m]), .sim(sim[m])
      );
    end

    activation_unit #(.COLS(COLS), .SIM_W(SIM_W), .ACT_BITS(ACT_BITS), .ACT_SHIFT(ACT_SHIFT)) u_act (
      .sim, .threshold(cfg_threshold), .num_codes(cfg_num_codes),
      .act(sim_wdata[f].act), .act_sum, .proj_ref(sim_wdata[f].pref)
    );

    if (f == 0) begin : g_done
      assign adc_done = adone[0];
    end
  end

endmodule
