// sar_adc: the per-column successive-approximation ADC of tier-1.
//
// Every RRAM column has its own converter (1024 for four 256-column
// subarrays). The column current arrives as `sample`, an unsigned integer in
// units of one ON-cell current: the analog sample-and-hold, capacitive DAC
// and comparator are represented by an integer register and an integer
// comparison, while the successive-approximation register logic is the real
// circuit. `offset` is subtracted from the held sample (saturating at zero)
// and stands for the calibration of the "calibrated ADC"; how the paper's
// ADC is calibrated is not described.
//
// Two modes:
//   mode = 0 (similarity): ADC_BITS-bit conversion, MSB first, one bit per
//     clock. The DAC level of trial code c is c << LSB_SHIFT, so the result is
//     min(2^ADC_BITS - 1, floor(held / 2^LSB_SHIFT)).
//   mode = 1 (projection): one comparison against `cmp_ref`; bit_out =
//     (held >= cmp_ref). This gives the 1-bit sign output of projection. Using
//     the ADC comparator for the sign is this design's choice.
//
// Timing: `start` samples the input on a rising edge. In mode 0 `done`
// pulses high ADC_BITS cycles later with `code` valid; in mode 1 it pulses
// one cycle later with `bit_out` valid. Outputs hold until the next start.
// A start while busy is ignored.
module sar_adc #(
  parameter int unsigned ADC_BITS  = h3d_pkg::ADC_W,
  parameter int unsigned SAMPLE_W  = 12,
  parameter int unsigned LSB_SHIFT = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                mode,
  input  logic [SAMPLE_W-1:0] sample,
  input  logic [SAMPLE_W-1:0] offset,
  input  logic [SAMPLE_W-1:0] cmp_ref,
  output logic                busy,
  output logic                done,
  output logic [ADC_BITS-1:0] code,
  output logic                bit_out
);

  localparam int unsigned BW = (ADC_BITS > 1) ? $clog2(ADC_BITS) : 1;

  logic [SAMPLE_W-1:0] held;
  logic [ADC_BITS-1:0] sar;
  logic [BW-1:0]       bit_idx;
  logic                cmp_mode;

  logic [ADC_BITS-1:0]           trial;
  logic [SAMPLE_W+ADC_BITS-1:0]  dac_level;
  logic [SAMPLE_W-1:0]           sample_cal;

  always_comb begin
    trial      = sar | (ADC_BITS'(1) << bit_idx);
    dac_level  = (SAMPLE_W + ADC_BITS)'(trial) << LSB_SHIFT;
    sample_cal = (sample > offset) ? sample - offset : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held     <= '0;
      sar      <= '0;
      bit_idx  <= '0;
      cmp_mode <= 1'b0;
      busy     <= 1'b0;
      done     <= 1'b0;
      code     <= '0;
      bit_out  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          held     <= sample_cal;
          sar      <= '0;
          bit_idx  <= BW'(ADC_BITS - 1);
          cmp_mode <= mode;
          busy     <= 1'b1;
        end
      end else if (cmp_mode) begin
        bit_out <= (held >= cmp_ref);
        busy    <= 1'b0;
        done    <= 1'b1;
      end else begin
        if ((SAMPLE_W + ADC_BITS)'(held) >= dac_level) sar <= trial;
        if (bit_idx == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
          code <= ((SAMPLE_W + ADC_BITS)'(held) >= dac_level) ? trial : sar;
        end else begin
          bit_idx <= bit_idx - 1'b1;
        end
      end
    end
  end

endmodule
