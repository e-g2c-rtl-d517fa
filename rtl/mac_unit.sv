// mac_unit: one multiply-accumulate unit of a MAC lane.
//
// Multiplies a signed 8-bit activation by a signed 8-bit weight and adds the product to a
// 24-bit accumulator when en is high; with clr also high the product replaces the accumulator
// (start of a new output). res is the accumulator saturated to 16 bits, the widest output format
// of the chip. The 8-bit operands follow the paper; the signed activations, the 24-bit
// accumulator and the saturation are this design's choices. One result per cycle, no pipeline.
module mac_unit (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  clr,
  input  eg2c_pkg::act_t        a,
  input  eg2c_pkg::wgt_t        w,
  output eg2c_pkg::res_t        res
);
  import eg2c_pkg::*;
  logic signed [ACCW-1:0] acc;
  logic signed [2*ACTW-1:0] prod;

  always_comb prod = $signed(a) * w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= (clr ? ACCW'(0) : acc) + ACCW'(prod);
  end

  localparam logic signed [ACCW-1:0] RMAX = (1 <<< (OUTW-1)) - 1;
  localparam logic signed [ACCW-1:0] RMIN = -(1 <<< (OUTW-1));
  always_comb begin
    if (acc > RMAX)      res = res_t'(RMAX);
    else if (acc < RMIN) res = res_t'(RMIN);
    else                 res = res_t'(acc);
  end
endmodule
