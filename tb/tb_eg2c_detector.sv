// tb_eg2c_detector: the anomaly detector model run on the whole processor at default sizes.
//
// The detector is a 3x3 convolution from 28 input channels to 1 output channel on a 6 x 6
// input, giving a 4 x 4 map, followed by 4x4 average pooling into one score that is compared
// with the threshold. That is 28 x 9 x 16 = 4032 multiply-accumulates per detection. The layer
// sizes follow the published model list; the input size is chosen so the pooled map is 4 x 4.
//
// Mapping (this design's program): the input is stored with channel pairs interleaved, GB
// word 12p + 2r + c' holding row r of channel 2p+c'. One LDACT moves a pair's 12 rows into a
// temporary bank, so temporary row 2r+c' holds row r of channel 2p+c'. Lane 4c'+y owns output
// row y of channel half c'. Vector v gives input row v to the four lanes of a half at once
// (column-wise reuse), each applying kernel row v-y or zeros, so a pair takes 6 vectors. The 14
// pairs run as COMPs that accumulate (clear on the first only), alternating temporary banks
// while the next pair loads. Average pooling is linear, so one DET over the 8 lanes (32 sums)
// with shift 4 gives the pooled score of the whole 28-channel convolution.
//
// The bench checks the score, the decision against the programmed threshold, the 8 lanes'
// 16-bit partial sums written by a STORE, and the cycle count from start to the score, which
// must stay within 640 cycles, the published 0.32 ms per detection at 2 MHz. Weights are 4-bit
// powers of two with about a quarter of the kernel rows pruned. Several random detections run.
module tb_eg2c_detector;
  import eg2c_pkg::*;

  localparam int NCH = 28, NP = NCH / 2, HIN = 6, WIN = 6, HO = 4;
  localparam int NV = HIN;                  // vectors per channel pair
  localparam int W_BASE = 0, X_BASE = 0, IN_BASE = 0, OUT_BASE = 0;
  localparam int RUNS = 4;
  localparam int LAT_MAX = 640;             // 0.32 ms at 2 MHz

  logic clk = 0, rst_n = 0, start = 0;
  logic done, running, host_we = 0, host_re = 0;
  logic [2:0] host_sel = '0;
  logic [10:0] host_addr = '0;
  logic [GBW-1:0] host_wdata = '0, host_rdata;
  logic det_valid, det_normal, adapted;
  logic signed [SCOREW-1:0] threshold, det_score;
  logic [31:0] stall_cycles;
  logic [15:0] branches_taken;
  logic [31:0] overlap_cycles;
  logic [NBINS-1:0][CNTW-1:0] hist;

  eg2c_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit c, string msg);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic int sat16(longint v); return v > 32767 ? 32767 : (v < -32768 ? -32768 : int'(v)); endfunction
  function automatic int potval(logic [3:0] c);
    int m; m = (c[2:0] == 3'd7) ? 0 : (1 << c[2:0]); return c[3] ? -m : m;
  endfunction

  int X [NCH][HIN][WIN];
  logic [3:0] K [NCH][3][3];
  logic [127:0] wimg [NP * NV * 3];
  logic [63:0]  ximg [NP * NV];
  logic [31:0]  prog [64];

  function automatic logic [31:0] i_setw(int w, int x); return {OP_SETW, 6'd0, 11'(x), 11'(w)}; endfunction
  function automatic logic [31:0] i_ldact(int a, int ofs, int row, int cnt, bit bk); return {OP_LDACT, 4'd0, bk, 4'(cnt-1), 4'(row), 6'(ofs), 9'(a)}; endfunction
  function automatic logic [31:0] i_comp(int nv, bit pw, bit i8, bit clr, bit bk); return {OP_COMP, 16'd0, bk, clr, i8, pw, 8'(nv-1)}; endfunction
  function automatic logic [31:0] i_store(int b, int ofs, int nl, int sh, bit rl, bit w16); return {OP_STORE, 2'd0, w16, rl, 4'(sh), 5'(nl-1), 6'(ofs), 9'(b)}; endfunction
  function automatic logic [31:0] i_det(int nl, int sh); return {OP_DET, 19'd0, 4'(sh), 5'(nl-1)}; endfunction
  function automatic logic [31:0] i_seta(int sel, int d); return {OP_SETA, 3'd0, 5'(sel), 20'(d)}; endfunction

  // weight and index streams: pair p, vector v, lane 4c'+y
  task automatic build_streams();
    foreach (wimg[i]) wimg[i] = '0;
    foreach (ximg[i]) ximg[i] = '0;
    for (int p = 0; p < NP; p++) for (int v = 0; v < NV; v++) begin
      for (int l = 0; l < NLANES; l++) begin
        int cp, y, kr; cp = l / 4; y = l % 4; kr = v - y;
        ximg[p * NV + v][2*l +: 2] = (l < 8) ? 2'((v == 0) ? cp : 2) : 2'd0;
        for (int k = 0; k < 3; k++)
          wimg[(p * NV + v) * 3 + k][4*l +: 4] = (l < 8 && kr >= 0 && kr <= 2) ? K[2*p + cp][kr][k] : 4'd7;
      end
    end
  endtask

  int thr;
  task automatic build_prog();
    int pc; pc = 0;
    foreach (prog[i]) prog[i] = {OP_HALT, 28'd0};
    prog[pc++] = i_seta(AREG_THR, thr);
    prog[pc++] = i_ldact(IN_BASE, 0, 0, 2 * HIN, 0);
    for (int p = 0; p < NP; p++) begin
      if (p + 1 < NP) prog[pc++] = i_ldact(IN_BASE + 2 * HIN * (p + 1), 0, 0, 2 * HIN, 1'((p + 1) % 2));
      prog[pc++] = i_setw(W_BASE + 3 * NV * p, X_BASE + NV * p);
      prog[pc++] = i_comp(NV, 0, 0, p == 0, 1'(p % 2));
    end
    prog[pc++] = i_det(8, 4);
    prog[pc++] = i_store(OUT_BASE, 0, 8, 0, 0, 1);
    prog[pc++] = {OP_HALT, 28'd0};
  endtask

  task automatic hwrite(int sel, int a, logic [GBW-1:0] d);
    @(negedge clk); host_we = 1; host_sel = 3'(sel); host_addr = 11'(a); host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask
  task automatic hread(int sel, int a, output logic [GBW-1:0] d);
    @(negedge clk); host_re = 1; host_sel = 3'(sel); host_addr = 11'(a);
    @(negedge clk); host_re = 0; d = host_rdata;
  endtask

  // cycles from start to the score
  int cyc, lat;
  bit counting = 0;
  always @(posedge clk) if (counting) begin
    cyc++;
    if (det_valid) begin lat = cyc; counting <= 0; end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int run = 0; run < RUNS; run++) begin
      logic [GBW-1:0] d;
      int part [8][4];
      longint tot;
      int score_ref, t;
      // random sparse kernel and input
      foreach (K[c, kr]) begin
        bit keep; keep = ($urandom_range(3) != 0);
        for (int k = 0; k < 3; k++) K[c][kr][k] = keep ? {1'($urandom), 3'($urandom_range(0, 3))} : 4'd7;
      end
      foreach (X[c, r, x]) X[c][r][x] = $urandom_range(0, 40) - 20;
      // reference: per-lane partial sums, then pooling
      tot = 0;
      for (int l = 0; l < 8; l++) for (int i = 0; i < 4; i++) begin
        longint a; a = 0;
        for (int c = l / 4; c < NCH; c += 2) for (int kr = 0; kr < 3; kr++) for (int k = 0; k < 3; k++)
          a += longint'(potval(K[c][kr][k])) * X[c][l % 4 + kr][i + k];
        part[l][i] = sat16(a);
        tot += part[l][i];
      end
      score_ref = sat16(tot >>> 4);
      thr = (run % 2) ? score_ref - 1 : score_ref;   // alternate normal / abnormal
      build_streams(); build_prog();
      for (int i = 0; i < $size(wimg); i++) hwrite(1, W_BASE + i, GBW'(wimg[i]));
      for (int i = 0; i < $size(ximg); i++) hwrite(2, X_BASE + i, GBW'(ximg[i]));
      for (int i = 0; i < $size(prog); i++) hwrite(0, i, GBW'(prog[i]));
      for (int p = 0; p < NP; p++) for (int r = 0; r < HIN; r++) for (int cp = 0; cp < 2; cp++) begin
        d = '0;
        for (int x = 0; x < WIN; x++) d[8*x +: 8] = 8'(X[2*p + cp][r][x]);
        hwrite(3, IN_BASE + 12 * p + 2 * r + cp, d);
      end
      // run
      @(negedge clk); start = 1; cyc = 0; lat = -1; counting = 1;
      @(negedge clk); start = 0;
      t = 0;
      while (!done && t < 100000) begin @(negedge clk); t++; end
      chk(done, "program finished");
      $display("detection %0d: score %0d (ref %0d), threshold %0d -> %s, %0d cycles to the score",
               run, det_score, score_ref, thr, det_normal ? "normal" : "abnormal", lat);
      chk(det_score == 16'(score_ref), "pooled detector score");
      chk(det_normal == (run % 2 == 1), "decision against the threshold");
      chk(threshold == 16'(thr), "programmed threshold");
      chk(lat > 0 && lat <= LAT_MAX, $sformatf("latency %0d cycles within %0d", lat, LAT_MAX));
      for (int l = 0; l < 8; l++) begin
        hread(4, OUT_BASE + l, d);
        for (int i = 0; i < 4; i++)
          chk(int'($signed(d[16*i +: 16])) == part[l][i], $sformatf("lane %0d sum %0d = %0d exp %0d", l, i, $signed(d[16*i +: 16]), part[l][i]));
      end
    end
    chk(overlap_cycles > 0, "channel-pair loads overlapped with computation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
