// act_gb: one activation global buffer (Act GB0 or Act GB1), 25KB in two banks of 512-bit words.
//
// The two GBs swap roles layer by layer: one feeds the input act buffer, the other receives
// the output act buffer's results, so activations never leave the chip. Each GB has a read
// port (for the input act buffer) and a byte-enabled write port (for the output act buffer or
// the host loader). The lower half of the address range is bank 0 and the upper half bank 1;
// a read and a write may proceed in the same cycle when they address different banks, which
// an assertion checks. Read data appears one cycle after re. Capacity, bank count and word width
// follow the architecture diagram (2-bank 25KB, 512b); the port arrangement is this design's.
module act_gb #(
  parameter int unsigned BANK_WORDS = 200,   // 2 x 200 x 64 B = 25600 B
  parameter int unsigned AW         = $clog2(2*BANK_WORDS)
) (
  input  logic                        clk,
  input  logic                        re,
  input  logic [AW-1:0]               raddr,
  output logic [eg2c_pkg::GBW-1:0]    rdata,
  input  logic                        we,
  input  logic [AW-1:0]               waddr,
  input  logic [eg2c_pkg::GBBYTES-1:0] wbe,
  input  logic [eg2c_pkg::GBW-1:0]    wdata
);
  import eg2c_pkg::*;
  localparam int unsigned BW = $clog2(BANK_WORDS);

  logic [GBW-1:0] bank0 [BANK_WORDS];
  logic [GBW-1:0] bank1 [BANK_WORDS];

  logic          rbank, wbank;
  logic [BW-1:0] rofs, wofs;
  always_comb begin
    rbank = (raddr >= AW'(BANK_WORDS));
    wbank = (waddr >= AW'(BANK_WORDS));
    rofs  = rbank ? BW'(raddr - AW'(BANK_WORDS)) : BW'(raddr);
    wofs  = wbank ? BW'(waddr - AW'(BANK_WORDS)) : BW'(waddr);
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= rbank ? bank1[rofs] : bank0[rofs];
    if (we) begin
      for (int b = 0; b < int'(GBBYTES); b++) begin
        if (wbe[b]) begin
          if (wbank) bank1[wofs][8*b +: 8] <= wdata[8*b +: 8];
          else       bank0[wofs][8*b +: 8] <= wdata[8*b +: 8];
        end
      end
    end
  end

  a_bank_conflict: assert property (@(posedge clk) !(re && we && rbank == wbank))
    else $error("act_gb: read and write to the same bank in one cycle");
endmodule
