// mac_lane: one of the 32 MAC lanes, performing row-wise intra-channel reuse.
//
// The lane receives a row of 6 activations and one 8-bit weight per cycle, broadcast to its
// 4 MACs. On a cycle with `fire`, MAC i multiplies position i of the operand row by the weight;
// the operand row is the incoming row when `load` is set and otherwise the lane's shift
// register, which is then moved left by one position. Feeding the three weights of a kernel
// row over three cycles with load only on the first therefore yields four outputs of a 1-D
// convolution from six inputs, each activation reused by up to three weights. For point-wise
// convolution `load` is set every cycle and each weight meets a fresh row. The 6-wide input,
// 4 MACs, shared weight and left shift follow the architecture diagram; `clr` (overwrite the
// accumulators) and the load/shift controls are this design's. res holds the 4 results.
module mac_lane (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  fire,
  input  logic                  load,
  input  logic                  clr,
  input  eg2c_pkg::act_row_t    row_in,
  input  eg2c_pkg::wgt_t        w,
  output eg2c_pkg::lane_res_t   res
);
  import eg2c_pkg::*;
  act_row_t sreg, opnd;

  always_comb opnd = load ? row_in : sreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sreg <= '0;
    else if (fire) begin
      for (int j = 0; j < int'(ROWLEN) - 1; j++) sreg[j] <= opnd[j+1];
      sreg[ROWLEN-1] <= '0;
    end
  end

  for (genvar i = 0; i < int'(NMAC); i++) begin : g_mac
    mac_unit u_mac (.clk, .rst_n, .en(fire), .clr, .a(opnd[i]), .w, .res(res[i]));
  end
endmodule
