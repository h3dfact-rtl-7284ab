// column_regfile: register file holding the +1 count of every similarity
// column.
//
// When the host programs code vector m of factor f into the RRAM, this file
// stores W[f][m] = popcount(code vector). The bipolar adders read all entries
// in parallel (one per column). The register files are only named in the
// paper's tier drawing; keeping the column weight counts in them is this
// design's choice.
//
// Interface: write port (we, wf, widx, wdata = the whole code vector);
// wcnt[F][COLS] always readable. Timing: the count is written on the rising
// edge with we high and visible the next cycle. Reset clears all counts.
module column_regfile #(
  parameter int unsigned F    = h3d_pkg::NUM_F,
  parameter int unsigned COLS = h3d_pkg::NUM_COLS,
  parameter int unsigned D    = h3d_pkg::DIM_D,
  localparam int unsigned CW = $clog2(D + 1),
  localparam int unsigned FW = (F > 1) ? $clog2(F) : 1,
  localparam int unsigned MW = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           we,
  input  logic [FW-1:0]                  wf,
  input  logic [MW-1:0]                  widx,
  input  logic [D-1:0]                   wdata,
  output logic [F-1:0][COLS-1:0][CW-1:0] wcnt
);

  logic [CW-1:0] pop;

  always_comb begin
    pop = '0;
    for (int i = 0; i < D; i++) pop = pop + CW'(wdata[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int f = 0; f < F; f++)
        for (int m = 0; m < COLS; m++) wcnt[f][m] <= '0;
    end else if (we) begin
      wcnt[wf][widx] <= pop;
    end
  end

endmodule
