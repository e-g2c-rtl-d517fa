// act_sel_ctrl: activation select control of the input act buffer, one accumulated index per
// MAC lane.
//
// The index SRAM holds, per lane and per sparse weight vector, a 2-bit index. Each lane adds it
// to its 4-bit accumulated index (the adder and the 4-bit register are as drawn in the input act
// buffer figure), so the index is the step from the previous vector's activation row to this
// one's and the 4-bit result picks one of the 16 temporary act rows. Choices of this design:
// `first` restarts the sum from zero at the first vector of a run; in point-wise mode one vector
// covers three consecutive rows, so `ofs` (the weight position 0..2) is added to the selected
// row. `upd` is asserted in the cycle the index word arrives; `sel` is combinational and already
// includes that cycle's index.
module act_sel_ctrl #(
  parameter int unsigned NL = eg2c_pkg::NLANES
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           upd,
  input  logic                           first,
  input  logic [NL-1:0][eg2c_pkg::IDXW-1:0] idx,
  input  logic [1:0]                     ofs,
  output logic [NL-1:0][eg2c_pkg::SELW-1:0] sel
);
  import eg2c_pkg::*;
  logic [NL-1:0][SELW-1:0] acc, acc_cur;

  always_comb begin
    for (int l = 0; l < int'(NL); l++) begin
      acc_cur[l] = upd ? ((first ? SELW'(0) : acc[l]) + SELW'(idx[l])) : acc[l];
      sel[l]     = acc_cur[l] + SELW'(ofs);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (upd) acc <= acc_cur;
  end
endmodule
