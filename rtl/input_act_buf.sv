// input_act_buf: input activation buffer between the input Act GB and the 32 MAC lanes.
//
// A temporary act buffer holds 16 activation rows of 6 x 8 bits in each of two banks, so the
// next rows can be loaded from the GB into one bank while the lanes compute from the other
// (this is how data preparation and computation are pipelined). A row is written from one
// 512-bit GB word: the 6 bytes starting at byte `wr_ofs` (bytes past the end of the word read as
// zero, which gives right-edge padding). A crossbar then gives every lane the row chosen by its
// accumulated index from act_sel_ctrl, so lanes whose weight vectors were pruned simply step
// over the rows they do not need (vector-wise sparsity), and several lanes may read the same row
// (column-wise reuse for depth-wise convolution). The 16-row buffer, the per-lane selection and
// the 32 x 6 x 8b output follow the input act buffer figure; the byte-offset row fill is this
// design's choice, as is the second bank. Row writes take effect at the clock edge; the lane
// outputs are combinational.
module input_act_buf #(
  parameter int unsigned NL = eg2c_pkg::NLANES
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // row fill from the input Act GB
  input  logic                              wr_en,
  input  logic                              wr_bank,
  input  logic [$clog2(eg2c_pkg::TMPROWS)-1:0] wr_row,
  input  logic [5:0]                        wr_ofs,
  input  logic [eg2c_pkg::GBW-1:0]          wr_word,
  // index stream
  input  logic                              idx_upd,
  input  logic                              idx_first,
  input  logic [NL-1:0][eg2c_pkg::IDXW-1:0] idx,
  input  logic [1:0]                        row_ofs,
  input  logic                              rd_bank,
  // to the MAC lanes
  output eg2c_pkg::act_row_t [NL-1:0]       lane_row
);
  import eg2c_pkg::*;

  act_row_t [1:0][TMPROWS-1:0] tmp;
  logic [NL-1:0][SELW-1:0] sel;

  act_sel_ctrl #(.NL(NL)) u_sel (
    .clk, .rst_n, .upd(idx_upd), .first(idx_first), .idx, .ofs(row_ofs), .sel
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tmp <= '0;
    else if (wr_en) begin
      for (int j = 0; j < int'(ROWLEN); j++) begin
        if (int'(wr_ofs) + j < int'(GBBYTES))
          tmp[wr_bank][wr_row][j] <= wr_word[8*(int'(wr_ofs)+j) +: 8];
        else
          tmp[wr_bank][wr_row][j] <= '0;
      end
    end
  end

  always_comb begin
    for (int l = 0; l < int'(NL); l++) lane_row[l] = tmp[rd_bank][sel[l]];
  end
endmodule
