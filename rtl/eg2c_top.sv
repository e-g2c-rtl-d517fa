// eg2c_top: the e-G2C processor, an NN engine and a threshold-adaptation engine run by an
// instruction-driven controller.
//
// NN engine: Act GB0 and Act GB1 (2 banks, 25KB, 512-bit words each) alternate as input and
// output activation memory layer by layer (SWAP). The input act buffer takes rows from the input
// GB into a 16-row temporary buffer (two banks: one loads while the lanes use the other) and gives each of the 32 MAC lanes a 6-activation row chosen
// by that lane's accumulated 2-bit indices from the index SRAM (10KB, 32 x 2b per word). The
// weight GB (32KB, 32 x 4b per word) feeds every lane's weight buffer, which decodes 4-bit
// power-of-2 weights or assembles 8-bit weights. Each lane's 4 MACs compute four neighbouring
// outputs while the activation row shifts past them (row-wise reuse). The output act buffer
// writes results back into the output GB, or pools them into a detector output.
// Adaptation engine: decides normal (coarse conversion) or abnormal (precise conversion) from
// the detector output and, every `period` detections, moves the threshold to the middle of the
// least-populated histogram bin in the sensitive range.
// The block structure and sizes follow the paper's architecture diagram; the instruction set,
// the host load port and the pipeline timing are this design's (see controller).
//
// Host port: while the processor is idle (!running) the host writes the instruction SRAM
// (sel 0), weight GB (1), index SRAM (2), Act GB0 (3) or Act GB1 (4), low bits of host_wdata
// used, and reads an Act GB (sel 3/4) with host_re, data on host_rdata one cycle later.
// A pulse on start runs the program from instruction 0 until HALT raises done.
module eg2c_top #(
  parameter int unsigned GB_BANK_WORDS = 200,   // 2 banks x 200 x 64 B = 25KB per Act GB
  parameter int unsigned WGB_WORDS     = 2048,  // 2048 x 16 B = 32KB
  parameter int unsigned IDX_WORDS     = 1280,  // 1280 x 8 B = 10KB
  parameter int unsigned INS_WORDS     = 1024   // 1024 x 4 B = 4KB
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  output logic                         done,
  output logic                         running,
  input  logic                         host_we,
  input  logic                         host_re,
  input  logic [2:0]                   host_sel,
  input  logic [10:0]                  host_addr,
  input  logic [eg2c_pkg::GBW-1:0]     host_wdata,
  output logic [eg2c_pkg::GBW-1:0]     host_rdata,
  output logic                         det_valid,
  output logic                         det_normal,
  output logic                         adapted,
  output logic signed [eg2c_pkg::SCOREW-1:0] threshold,
  output logic signed [eg2c_pkg::SCOREW-1:0] det_score,
  output logic [31:0]                  stall_cycles,
  output logic [15:0]                  branches_taken,
  output logic [31:0]                  overlap_cycles,
  output logic [eg2c_pkg::NBINS-1:0][eg2c_pkg::CNTW-1:0] hist
);
  import eg2c_pkg::*;
  localparam int unsigned GAW = $clog2(2*GB_BANK_WORDS);
  localparam int unsigned WAW = $clog2(WGB_WORDS);
  localparam int unsigned XAW = $clog2(IDX_WORDS);
  localparam int unsigned IAW = $clog2(INS_WORDS);
  localparam int unsigned WW  = NLANES * WNIB;   // 128
  localparam int unsigned XW  = NLANES * IDXW;   // 64

  // ---------------- controller ----------------
  logic             i_en, w_en, x_en, g_re, t_we, t_bank, src;
  logic [IAW-1:0]   i_addr;
  logic [INSTW-1:0] i_rdata;
  logic [WAW-1:0]   w_addr;
  logic [XAW-1:0]   x_addr;
  logic [GAW-1:0]   g_raddr, ob_base;
  lane_ctrl_t       lctrl;
  logic [3:0]       t_row, ob_shift;
  logic [5:0]       t_ofs, ob_ofs;
  logic             ob_store, ob_det, ob_relu, ob_w16, ob_busy;
  logic [4:0]       ob_nl_m1, a_sel;
  logic             a_we, a_busy;
  logic [19:0]      a_data;

  controller #(.IAW(IAW), .WAW(WAW), .XAW(XAW), .GAW(GAW)) u_ctrl (
    .clk, .rst_n, .start, .done, .running,
    .i_en, .i_addr, .i_rdata,
    .w_en, .w_addr, .x_en, .x_addr, .lctrl,
    .g_re, .g_raddr, .t_we, .t_bank, .t_row, .t_ofs, .src,
    .ob_store, .ob_det, .ob_base, .ob_ofs, .ob_nl_m1, .ob_shift, .ob_relu, .ob_w16, .ob_busy,
    .a_we, .a_sel, .a_data, .a_busy, .a_normal(det_normal),
    .stall_cycles, .branches_taken, .overlap_cycles
  );

  // ---------------- memories ----------------
  logic hw_ins, hw_wgb, hw_idx;
  assign hw_ins = host_we && !running && host_sel == 3'd0;
  assign hw_wgb = host_we && !running && host_sel == 3'd1;
  assign hw_idx = host_we && !running && host_sel == 3'd2;

  sram_1p #(.WIDTH(INSTW), .DEPTH(INS_WORDS)) u_instr (
    .clk, .en(i_en || hw_ins), .we(hw_ins), .addr(hw_ins ? host_addr[IAW-1:0] : i_addr),
    .wdata(host_wdata[INSTW-1:0]), .rdata(i_rdata)
  );

  logic [WW-1:0] w_rdata;
  sram_1p #(.WIDTH(WW), .DEPTH(WGB_WORDS)) u_wgb (
    .clk, .en(w_en || hw_wgb), .we(hw_wgb), .addr(hw_wgb ? host_addr[WAW-1:0] : w_addr),
    .wdata(host_wdata[WW-1:0]), .rdata(w_rdata)
  );

  logic [XW-1:0] x_rdata;
  sram_1p #(.WIDTH(XW), .DEPTH(IDX_WORDS)) u_idx (
    .clk, .en(x_en || hw_idx), .we(hw_idx), .addr(hw_idx ? host_addr[XAW-1:0] : x_addr),
    .wdata(host_wdata[XW-1:0]), .rdata(x_rdata)
  );

  // Act GB ping-pong: src selects the input GB, the other one receives results
  logic               gb_re   [2];
  logic [GAW-1:0]     gb_raddr[2];
  logic [GBW-1:0]     gb_rdata[2];
  logic               gb_we   [2];
  logic [GAW-1:0]     gb_waddr[2];
  logic [GBBYTES-1:0] gb_wbe  [2];
  logic [GBW-1:0]     gb_wdata[2];
  logic               ob_we;
  logic [GAW-1:0]     ob_waddr;
  logic [GBBYTES-1:0] ob_wbe;
  logic [GBW-1:0]     ob_wdata;
  logic               hsel_q;

  for (genvar g = 0; g < 2; g++) begin : g_gb
    logic host_w, host_r;
    assign host_w = host_we && !running && host_sel == 3'(3 + g);
    assign host_r = host_re && !running && host_sel == 3'(3 + g);
    always_comb begin
      gb_re[g]    = host_r || (g_re && src == 1'(g));
      gb_raddr[g] = host_r ? host_addr[GAW-1:0] : g_raddr;
      gb_we[g]    = host_w || (ob_we && src != 1'(g));
      gb_waddr[g] = host_w ? host_addr[GAW-1:0] : ob_waddr;
      gb_wbe[g]   = host_w ? '1 : ob_wbe;
      gb_wdata[g] = host_w ? host_wdata : ob_wdata;
    end
    act_gb #(.BANK_WORDS(GB_BANK_WORDS)) u_gb (
      .clk, .re(gb_re[g]), .raddr(gb_raddr[g]), .rdata(gb_rdata[g]),
      .we(gb_we[g]), .waddr(gb_waddr[g]), .wbe(gb_wbe[g]), .wdata(gb_wdata[g])
    );
  end

  always_ff @(posedge clk) if (host_re) hsel_q <= (host_sel == 3'd4);
  assign host_rdata = hsel_q ? gb_rdata[1] : gb_rdata[0];

  // ---------------- input act buffer ----------------
  act_row_t [NLANES-1:0]            lane_row;
  logic [NLANES-1:0][IDXW-1:0]      idx;
  assign idx = x_rdata;

  input_act_buf #(.NL(NLANES)) u_iab (
    .clk, .rst_n,
    .wr_en(t_we), .wr_bank(t_bank), .wr_row(t_row), .wr_ofs(t_ofs), .wr_word(src ? gb_rdata[1] : gb_rdata[0]),
    .idx_upd(lctrl.valid && lctrl.new_vec), .idx_first(lctrl.first_vec), .idx,
    .row_ofs(lctrl.mode == CM_PW ? lctrl.tap : 2'd0), .rd_bank(lctrl.bank),
    .lane_row
  );

  // ---------------- MAC lanes with their weight buffers ----------------
  lane_res_t [NLANES-1:0] lane_res;
  logic lane_load, lane_clr;
  assign lane_load = (lctrl.tap == 2'd0) || (lctrl.mode == CM_PW);
  assign lane_clr  = lctrl.clr && lctrl.first_vec && (lctrl.tap == 2'd0);

  for (genvar l = 0; l < int'(NLANES); l++) begin : g_lane
    logic wv;
    wgt_t w;
    weight_buf u_wbuf (
      .clk, .rst_n, .in_valid(lctrl.valid), .nib(w_rdata[WNIB*l +: WNIB]), .wfmt(lctrl.wfmt),
      .hi(lctrl.hi), .w_valid(wv), .w
    );
    mac_lane u_lane (
      .clk, .rst_n, .fire(wv), .load(lane_load), .clr(lane_clr), .row_in(lane_row[l]), .w,
      .res(lane_res[l])
    );
  end

  // ---------------- output act buffer ----------------
  logic score_valid;
  output_act_buf #(.NL(NLANES), .AW(GAW)) u_oab (
    .clk, .rst_n, .lane_res, .store(ob_store), .det(ob_det), .base(ob_base), .ofs(ob_ofs),
    .nl_m1(ob_nl_m1), .shift(ob_shift), .relu(ob_relu), .w16(ob_w16), .busy(ob_busy),
    .gb_we(ob_we), .gb_waddr(ob_waddr), .gb_wbe(ob_wbe), .gb_wdata(ob_wdata),
    .score_valid, .score(det_score)
  );

  // ---------------- adaptation engine ----------------
  adapt_engine u_adapt (
    .clk, .rst_n, .score_valid, .score(det_score), .reg_we(a_we), .reg_sel(a_sel),
    .reg_data(a_data), .busy(a_busy), .normal(det_normal), .dec_valid(det_valid), .adapted,
    .threshold, .hist
  );
endmodule
