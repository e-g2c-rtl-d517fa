// sram_1p: single-port synchronous SRAM, used for the instruction SRAM (4KB, 32-bit words),
// the weight global buffer (1 bank, 32KB, 32 lanes x 4 bits = 128-bit words) and the index SRAM
// (1 bank, 10KB, 32 lanes x 2 bits = 64-bit words).
//
// One access per cycle: a write when en && we, otherwise a read when en. Read data appears on
// rdata the cycle after the request and holds until the next read. The word widths and
// capacities come from the architecture diagram; the one-cycle read latency and the absence of
// byte enables are this design's choices. The default size is the weight GB.
module sram_1p #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
