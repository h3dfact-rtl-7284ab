// tb_sram_buffer: self-checking test of the tier-1 SRAM buffer.
// Random writes and reads against a shadow array; read data must appear one
// cycle after re and hold while re is low; a write and a read of the same
// address in one cycle return the old word.
module tb_sram_buffer;
  localparam int DEPTH = 100, WIDTH = 256;
  logic clk = 1'b0, we = 1'b0, re = 1'b0;
  logic [6:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  sram_buffer #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = 7'(a);
      for (int i = 0; i < WIDTH; i += 32) wdata[i +: 32] = $urandom;
      shadow[a] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    for (int t = 0; t < 3000; t++) begin
      logic [WIDTH-1:0] expd;
      int ra;
      ra = $urandom_range(0, DEPTH - 1);
      re = 1'b1; raddr = 7'(ra);
      we = ($urandom_range(0, 1) == 1);
      waddr = (t % 4 == 0) ? 7'(ra) : 7'($urandom_range(0, DEPTH - 1));
      for (int i = 0; i < WIDTH; i += 32) wdata[i +: 32] = $urandom;
      expd = shadow[ra];
      @(negedge clk);
      if (we) shadow[waddr] = wdata;
      re = 1'b0; we = 1'b0;
      checks++;
      if (rdata !== expd) begin failures++; $display("FAIL read t=%0d a=%0d", t, ra); end
      @(negedge clk);
      checks++;
      if (rdata !== expd) begin failures++; $display("FAIL hold t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
