// h3d_pkg: types and default sizes shared by the H3D factorizer.
//
// Default sizes follow the published configuration: a 256 x 256 RRAM
// subarray (d = 256 rows), four subarrays per RRAM tier (f = 4, one per
// factor), a 4-bit ADC on every column and a batch of 100 object vectors
// buffered in tier-1 SRAM. The power-mode and host-command encodings are
// this design's own choices.
//
// Bipolar encoding used throughout: bit 1 stands for +1, bit 0 for -1.
package h3d_pkg;

  localparam int unsigned DIM_D     = 256;  // rows of an RRAM subarray = vector dimension
  localparam int unsigned NUM_F     = 4;    // subarrays per tier = factors processed in parallel
  localparam int unsigned NUM_COLS  = 256;  // columns of a similarity subarray = code-book capacity
  localparam int unsigned ADC_W     = 4;    // per-column SAR ADC resolution
  localparam int unsigned ACT_W     = 4;    // similarity activation width sent to projection
  localparam int unsigned BATCH_N   = 100;  // object vectors buffered per batch

  // Power mode of one RRAM tier. Only one tier may be ACTIVE at a time
  // because both tiers share the same vertical word/bit lines.
  //   PWR_ACTIVE   : WL level shifters powered, columns conduct
  //   PWR_STANDBY  : WL level shifters off, no column current; cells may be written
  //   PWR_SHUTDOWN : full shutdown, neither read nor write
  typedef enum logic [1:0] {
    PWR_SHUTDOWN = 2'd0,
    PWR_STANDBY  = 2'd1,
    PWR_ACTIVE   = 2'd2
  } pwr_mode_e;

  // Host commands accepted by the tier-1 controller.
  typedef enum logic [2:0] {
    CMD_NOP       = 3'd0,
    CMD_PROG_CODE = 3'd1,  // store code vector cmd_data as entry cmd_idx of factor cmd_factor
    CMD_LOAD_S    = 3'd2,  // store object vector cmd_data as batch item cmd_idx
    CMD_LOAD_EST  = 3'd3,  // store initial estimate of factor cmd_factor for batch item cmd_idx
    CMD_READ_EST  = 3'd4,  // return estimate of factor cmd_factor for batch item cmd_idx
    CMD_START     = 3'd5   // run cfg_iters resonator iterations over cfg_batch items
  } cmd_op_e;

  // Width of a signed bipolar similarity for vectors of dimension d.
  function automatic int unsigned sim_width(int unsigned d);
    return $clog2(d) + 4;
  endfunction

endpackage
