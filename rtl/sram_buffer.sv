// sram_buffer: one tier-1 SRAM buffer (simple dual port).
//
// Tier-1 keeps the batch state in SRAM so that a whole batch can finish its
// similarity step on tier-3 before any item moves to projection on tier-2;
// otherwise both RRAM tiers would have to be active together. The design uses
// this module for the object vectors, the per-factor estimates and the 4-bit
// similarity results. Written as an array; the port organisation is this
// design's choice.
//
// Interface: write port (we, waddr, wdata), read port (re, raddr, rdata).
// Timing: write on the rising edge; read data is registered, valid the cycle
// after re, and held until the next read. Contents are not reset.
module sram_buffer #(
  parameter int unsigned DEPTH = h3d_pkg::BATCH_N,
  parameter int unsigned WIDTH = h3d_pkg::DIM_D,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < DEPTH) mem[waddr] <= wdata;
    if (re && int'(raddr) < DEPTH) rdata <= mem[raddr];
  end

endmodule
