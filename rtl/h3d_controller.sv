// h3d_controller: the tier-1 controller of the H3D factorizer.
//
// It decodes host commands, programs code books into both RRAM tiers, and
// runs resonator iterations over a batch while making sure that only one
// RRAM tier is ever active: tier-3 (similarity) and tier-2 (projection)
// share the same vertical word and bit lines and one set of peripherals.
//
// One iteration over a batch of cfg_batch items (the schedule follows the
// paper's argument for tier-1 SRAM buffering; the cycle-level sequence is
// this design's):
//   similarity phase, tier-3 ACTIVE, tier-2 SHUTDOWN; per item b:
//     S_RD   read s[b] and est_f[b] from SRAM
//     S_ARR  unbind (XNOR) and read all F similarity subarrays
//     S_ADC  start the per-column ADCs (4-bit conversion)
//     S_WAIT ADC_BITS + 1 cycles until adc_done; then write the activations
//            to the similarity buffer
//   one switch cycle with both tiers in STANDBY
//   projection phase, tier-2 ACTIVE, tier-3 SHUTDOWN; per item b:
//     P_RD   read the activations of item b
//     P_ARR  read all F projection subarrays with them as WL levels
//     P_ADC  start the ADCs in 1-bit compare mode
//     P_WAIT 2 cycles until adc_done; then write the new estimates est_f[b]
//   one switch cycle, then the next iteration or done.
// Per iteration this is cfg_batch * ((ADC_BITS + 4) + 5) + 2 cycles.
// The controller itself waits for adc_done, so ADC_BITS does not enter its
// logic; the parameter only documents the ADC width the schedule assumes.
//
// Programming a code vector takes two cycles, one per tier, each with only
// the written tier in STANDBY: column m of tier-3 subarray f, row m of tier-2
// subarray f (the projection array holds the transposed code book), and the
// +1 count of the vector in the column register file.
//
// Host interface: valid/ready command port (a command is taken when both
// are high; the host holds the command while valid is high and ready low)
// and a response port that pulses rsp_valid one cycle after a READ_EST is
// taken. Configuration inputs are sampled when START is taken. Two
// concurrent assertions (one active tier at most; a stalled command is
// held) are disabled during reset, so rst_n is read both as the
// asynchronous reset of the registers and by the assertions. `done` pulses
// when the last iteration has been written back. The command set is this
// design's own.
module h3d_controller #(
  parameter int unsigned D        = h3d_pkg::DIM_D,
  parameter int unsigned F        = h3d_pkg::NUM_F,
  parameter int unsigned COLS     = h3d_pkg::NUM_COLS,
  parameter int unsigned BATCH    = h3d_pkg::BATCH_N,
  parameter int unsigned ADC_BITS = h3d_pkg::ADC_W,
  localparam int unsigned FW  = (F > 1) ? $clog2(F) : 1,
  localparam int unsigned MAXN = (BATCH > COLS) ? BATCH : COLS,
  localparam int unsigned IW  = $clog2(MAXN),
  localparam int unsigned BW  = (BATCH > 1) ? $clog2(BATCH) : 1,
  localparam int unsigned NBW = $clog2(BATCH + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host commands
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  h3d_pkg::cmd_op_e     cmd_op,
  input  logic [FW-1:0]        cmd_factor,
  input  logic [IW-1:0]        cmd_idx,
  input  logic [D-1:0]         cmd_data,
  output logic                 rsp_valid,
  output logic [D-1:0]         rsp_data,
  input  logic [NBW-1:0]       cfg_batch,
  input  logic [15:0]          cfg_iters,
  output logic                 busy,
  output logic                 done,
  output logic [15:0]          iter_count,
  // RRAM tier power and access
  output h3d_pkg::pwr_mode_e   tier2_pwr,
  output h3d_pkg::pwr_mode_e   tier3_pwr,
  output logic                 t3_rd_en,
  output logic                 t2_rd_en,
  output logic                 t3_wr_col_en,
  output logic                 t2_wr_row_en,
  output logic [FW-1:0]        wr_f,
  output logic [IW-1:0]        wr_idx,
  output logic [D-1:0]         wr_data,
  output logic                 rf_we,
  // SRAM buffers
  output logic                 s_we,
  output logic                 est_host_we,
  output logic                 est_upd_we,
  output logic                 sim_we,
  output logic [BW-1:0]        buf_waddr,
  output logic                 buf_re,
  output logic [BW-1:0]        buf_raddr,
  input  logic [F-1:0][D-1:0]  est_rdata,
  // per-column readout
  output logic                 proj_phase,
  output logic                 adc_start,
  output logic                 adc_mode,
  input  logic                 adc_done
);

  import h3d_pkg::*;

  typedef enum logic [3:0] {
    ST_IDLE, ST_PROG3, ST_PROG2, ST_RSP,
    ST_S_RD, ST_S_ARR, ST_S_ADC, ST_S_WAIT, ST_SW_P,
    ST_P_RD, ST_P_ARR, ST_P_ADC, ST_P_WAIT, ST_SW_S, ST_DONE
  } state_e;

  state_e          state;
  logic [FW-1:0]   f_q;
  logic [IW-1:0]   idx_q;
  logic [D-1:0]    data_q;
  logic [NBW-1:0]  batch_q;
  logic [15:0]     iters_q;
  logic [BW-1:0]   b_q;

  logic take;
  logic last_item;
  assign take      = cmd_valid && cmd_ready;
  assign last_item = (NBW'(b_q) + 1'b1 == batch_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= ST_IDLE;
      f_q        <= '0;
      idx_q      <= '0;
      data_q     <= '0;
      batch_q    <= '0;
      iters_q    <= '0;
      b_q        <= '0;
      iter_count <= '0;
    end else begin
      unique case (state)
        ST_IDLE: if (take) begin
          f_q    <= cmd_factor;
          idx_q  <= cmd_idx;
          data_q <= cmd_data;
          unique case (cmd_op)
            CMD_PROG_CODE: state <= ST_PROG3;
            CMD_READ_EST:  state <= ST_RSP;
            CMD_START: begin
              batch_q    <= cfg_batch;
              iters_q    <= cfg_iters;
              iter_count <= '0;
              b_q        <= '0;
              state      <= (cfg_iters == 0 || cfg_batch == 0 ||
                             int'(cfg_batch) > BATCH) ? ST_DONE : ST_S_RD;
            end
            default: state <= ST_IDLE;
          endcase
        end
        ST_PROG3:  state <= ST_PROG2;
        ST_PROG2:  state <= ST_IDLE;
        ST_RSP:    state <= ST_IDLE;
        ST_S_RD:   state <= ST_S_ARR;
        ST_S_ARR:  state <= ST_S_ADC;
        ST_S_ADC:  state <= ST_S_WAIT;
        ST_S_WAIT: if (adc_done) begin
          if (last_item) begin
            b_q   <= '0;
            state <= ST_SW_P;
          end else begin
            b_q   <= b_q + 1'b1;
            state <= ST_S_RD;
          end
        end
        ST_SW_P:   state <= ST_P_RD;
        ST_P_RD:   state <= ST_P_ARR;
        ST_P_ARR:  state <= ST_P_ADC;
        ST_P_ADC:  state <= ST_P_WAIT;
        ST_P_WAIT: if (adc_done) begin
          if (last_item) begin
            b_q   <= '0;
            state <= ST_SW_S;
          end else begin
            b_q   <= b_q + 1'b1;
            state <= ST_P_RD;
          end
        end
        ST_SW_S: begin
          iter_count <= iter_count + 1'b1;
          state      <= (iter_count + 1'b1 == iters_q) ? ST_DONE : ST_S_RD;
        end
        ST_DONE:   state <= ST_IDLE;
        default:   state <= ST_IDLE;
      endcase
    end
  end

  always_comb begin
    cmd_ready    = (state == ST_IDLE);
    busy         = (state != ST_IDLE);
    done         = (state == ST_DONE);
    rsp_valid    = (state == ST_RSP);
    rsp_data     = est_rdata[f_q];

    // tier power: the written tier in STANDBY while programming, the
    // computing tier ACTIVE and the other one fully shut down while running,
    // both in STANDBY for one cycle at each hand-over.
    tier3_pwr = PWR_SHUTDOWN;
    tier2_pwr = PWR_SHUTDOWN;
    unique case (state)
      ST_PROG3: tier3_pwr = PWR_STANDBY;
      ST_PROG2: tier2_pwr = PWR_STANDBY;
      ST_S_RD, ST_S_ARR, ST_S_ADC, ST_S_WAIT: tier3_pwr = PWR_ACTIVE;
      ST_P_RD, ST_P_ARR, ST_P_ADC, ST_P_WAIT: tier2_pwr = PWR_ACTIVE;
      ST_SW_P, ST_SW_S: begin
        tier3_pwr = PWR_STANDBY;
        tier2_pwr = PWR_STANDBY;
      end
      default: ;
    endcase

    t3_rd_en     = (state == ST_S_ARR);
    t2_rd_en     = (state == ST_P_ARR);
    t3_wr_col_en = (state == ST_PROG3);
    t2_wr_row_en = (state == ST_PROG2);
    rf_we        = (state == ST_PROG3);
    wr_f         = f_q;
    wr_idx       = idx_q;
    wr_data      = data_q;

    s_we        = take && (cmd_op == CMD_LOAD_S);
    est_host_we = take && (cmd_op == CMD_LOAD_EST);
    sim_we      = (state == ST_S_WAIT) && adc_done;
    est_upd_we  = (state == ST_P_WAIT) && adc_done;
    buf_waddr   = (state == ST_IDLE) ? BW'(cmd_idx) : b_q;
    buf_re      = (state == ST_S_RD) || (state == ST_P_RD) ||
                  (take && (cmd_op == CMD_READ_EST));
    buf_raddr   = (state == ST_IDLE) ? BW'(cmd_idx) : b_q;

    proj_phase  = (state == ST_P_RD) || (state == ST_P_ARR) ||
                  (state == ST_P_ADC) || (state == ST_P_WAIT);
    adc_start   = (state == ST_S_ADC) || (state == ST_P_ADC);
    adc_mode    = (state == ST_P_ADC);
  end

  // Only one RRAM tier may draw current on the shared vertical lines.
  a_one_tier: assert property (@(posedge clk) disable iff (!rst_n)
    !(tier2_pwr == PWR_ACTIVE && tier3_pwr == PWR_ACTIVE));
  // The host holds a command until it is taken.
  a_cmd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid);

endmodule
