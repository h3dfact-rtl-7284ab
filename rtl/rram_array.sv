// rram_array: behavioural model of one 40 nm RRAM compute-in-memory subarray
// together with its word-line level shifters. This is a behavioural model,
// not synthesizable logic: the real part is an analog array.
//
// Each cell holds one bipolar weight (1 = +1, a conducting low-resistance
// cell; 0 = -1, an off cell). A read applies a level in_i (0 .. 2^IN_BITS-1,
// e.g. a pulse count) to every word line i and returns, for every column j,
// the column current in units of one ON-cell current:
//     bl_out_j = sum_i in_i * cell_ij  (+ device noise).
// The similarity tier drives 0/1 levels, the projection tier 4-bit levels.
// Device stochasticity, which the paper uses to break limit cycles of the
// resonator, is modelled when noise_en is high as a uniform integer in
// [-NOISE_AMP, NOISE_AMP] per column and read, from an xorshift32 generator
// seeded with SEED; the measured noise statistics are not given numerically,
// so the amplitude is this design's choice. The result is clamped to
// [0, 2^SAMPLE_W - 1].
//
// Power modes (h3d_pkg::pwr_mode_e): only PWR_ACTIVE lets the level shifters
// drive the word lines; in PWR_STANDBY and PWR_SHUTDOWN a read returns zero
// current, as an inactive tier must not add to the shared bit lines. Writes
// (a whole column or a whole row per cycle, standing for the set/reset
// programming path) are accepted in ACTIVE and STANDBY but not in SHUTDOWN.
//
// Timing: a read (rd_en) registers the column currents on the rising edge;
// they appear on bl_out from the next cycle and are held until the next read,
// but only while the tier stays ACTIVE (bl_out is zero otherwise). A write
// takes effect on the edge.
module rram_array #(
  parameter int unsigned ROWS      = h3d_pkg::DIM_D,
  parameter int unsigned COLS      = h3d_pkg::NUM_COLS,
  parameter int unsigned IN_BITS   = h3d_pkg::ACT_W,
  parameter int unsigned SAMPLE_W  = 12,
  parameter int unsigned NOISE_AMP = 2,
  parameter logic [31:0] SEED      = 32'h1234_5678,
  localparam int unsigned IW = $clog2((ROWS > COLS) ? ROWS : COLS)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  h3d_pkg::pwr_mode_e             pwr,
  input  logic                           noise_en,
  input  logic                           rd_en,
  input  logic [ROWS-1:0][IN_BITS-1:0]   wl,
  output logic [COLS-1:0][SAMPLE_W-1:0]  bl_out,
  input  logic                           wr_col_en,
  input  logic                           wr_row_en,
  input  logic [IW-1:0]                  wr_idx,
  input  logic [ROWS-1:0]                wr_col_data,
  input  logic [COLS-1:0]                wr_row_data
);

  import h3d_pkg::*;

  localparam int MAXV = 2 ** SAMPLE_W - 1;

  logic [COLS-1:0]               rcell [ROWS];
  logic [31:0]                   rng;
  logic [COLS-1:0][SAMPLE_W-1:0] bl_q;

  // no current flows on the shared bit lines unless the tier is active
  assign bl_out = (pwr == PWR_ACTIVE) ? bl_q : '0;

  function automatic logic [31:0] xorshift(logic [31:0] x);
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rng    <= (SEED == 0) ? 32'h1 : SEED;
      bl_q   <= '0;
    end else if (rd_en) begin
      logic [31:0] r;
      r = rng;
      for (int j = 0; j < COLS; j++) begin
        int acc;
        acc = 0;
        if (pwr == PWR_ACTIVE) begin
          for (int i = 0; i < ROWS; i++)
            if (rcell[i][j]) acc += int'(wl[i]);
          if (noise_en) begin
            r = xorshift(r);
            acc += int'(r % (2 * NOISE_AMP + 1)) - int'(NOISE_AMP);
          end
        end
        if (acc < 0) acc = 0;
        if (acc > MAXV) acc = MAXV;
        bl_q[j] <= SAMPLE_W'(acc);
      end
      rng <= r;
    end
  end

  always_ff @(posedge clk) begin
    if (pwr != PWR_SHUTDOWN) begin
      if (wr_col_en && int'(wr_idx) < COLS)
        for (int i = 0; i < ROWS; i++) rcell[i][wr_idx] <= wr_col_data[i];
      if (wr_row_en && int'(wr_idx) < ROWS)
        rcell[wr_idx] <= wr_row_data;
    end
  end

endmodule
