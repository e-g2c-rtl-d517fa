// tb_eg2c_conv_layer: one output-row tile of the coarse convertor's last layer, a 3x3
// convolution from 32 to 24 channels with 4-bit power-of-2 weights, run on the whole processor
// at default sizes, dense and then with pruned kernel rows, to measure the speed-up that
// vector-wise sparsity gives.
//
// Mapping (this design's program): lane o computes output channel o, one output row, four
// columns. The 32 x 3 input rows (GB word 3c + r) do not fit the 16 temporary rows, so they go
// in 7 passes of up to 5 channels (15 rows); each pass is an LDACT into one temporary bank,
// overlapping the previous pass's COMP on the other bank, and COMPs after the first accumulate.
// Each lane's vector list names only its kept kernel rows, stepping through the temporary rows
// with 2-bit index steps and zero-weight padding vectors for gaps over 3; a pass takes as many
// vectors as its longest lane list. Results are stored as 16-bit values and compared with a
// direct convolution. The layer shape follows the published coarse-convertor model; the tile
// size and pruning ratio are this bench's choices. The sparse run must take fewer cycles than
// the dense one; the ratio is printed.
module tb_eg2c_conv_layer;
  import eg2c_pkg::*;

  localparam int CI = 32, CO = 24, WID = 6;
  localparam int CPP = 5;                       // channels per pass
  localparam int NPASS = (CI + CPP - 1) / CPP;
  localparam int IN_BASE = 0, OUT_BASE = 0;

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

  function automatic logic [31:0] i_setw(int w, int x); return {OP_SETW, 6'd0, 11'(x), 11'(w)}; endfunction
  function automatic logic [31:0] i_ldact(int a, int ofs, int row, int cnt, bit bk); return {OP_LDACT, 4'd0, bk, 4'(cnt-1), 4'(row), 6'(ofs), 9'(a)}; endfunction
  function automatic logic [31:0] i_comp(int nv, bit pw, bit i8, bit clr, bit bk); return {OP_COMP, 16'd0, bk, clr, i8, pw, 8'(nv-1)}; endfunction
  function automatic logic [31:0] i_store(int b, int ofs, int nl, int sh, bit rl, bit w16); return {OP_STORE, 2'd0, w16, rl, 4'(sh), 5'(nl-1), 6'(ofs), 9'(b)}; endfunction

  int X [CI][3][WID];
  logic [3:0] K [CO][CI][3][3];
  logic [127:0] wimg [2048];
  logic [63:0]  ximg [1280];
  logic [31:0]  prog [64];
  int nv [NPASS];
  int wb [NPASS], xb [NPASS];
  int nvec_total, n_pad;

  typedef struct { int step; logic [3:0] w[3]; } vec_t;

  // vector streams of every pass: lane o keeps only its non-zero kernel rows
  task automatic build_streams();
    int wp, xp; wp = 0; xp = 0; nvec_total = 0; n_pad = 0;
    foreach (wimg[i]) wimg[i] = '0;
    foreach (ximg[i]) ximg[i] = '0;
    for (int q = 0; q < NPASS; q++) begin
      vec_t lv [CO][$];
      nv[q] = 1;
      for (int o = 0; o < CO; o++) begin
        int prev; prev = 0;
        for (int c = q * CPP; c < CI && c < (q + 1) * CPP; c++) for (int kr = 0; kr < 3; kr++)
          if (K[o][c][kr][0] != 4'd7 || K[o][c][kr][1] != 4'd7 || K[o][c][kr][2] != 4'd7) begin
            int r; vec_t e;
            r = 3 * (c - q * CPP) + kr;
            while (r - prev > 3) begin e.step = 3; e.w = '{4'd7, 4'd7, 4'd7}; lv[o].push_back(e); prev += 3; n_pad++; end
            e.step = r - prev; e.w = K[o][c][kr]; lv[o].push_back(e); prev = r;
          end
        if (lv[o].size() > nv[q]) nv[q] = lv[o].size();
      end
      wb[q] = wp; xb[q] = xp;
      for (int v = 0; v < nv[q]; v++) for (int l = 0; l < NLANES; l++) begin
        vec_t e;
        if (l < CO && v < lv[l].size()) e = lv[l][v];
        else begin e.step = 0; e.w = '{4'd7, 4'd7, 4'd7}; end
        ximg[xp + v][2*l +: 2] = 2'(e.step);
        for (int k = 0; k < 3; k++) wimg[wp + 3 * v + k][4*l +: 4] = e.w[k];
      end
      wp += 3 * nv[q]; xp += nv[q]; nvec_total += nv[q];
    end
  endtask

  task automatic build_prog();
    int pc; pc = 0;
    foreach (prog[i]) prog[i] = {OP_HALT, 28'd0};
    prog[pc++] = i_ldact(IN_BASE, 0, 0, 3 * CPP, 0);
    for (int q = 0; q < NPASS; q++) begin
      if (q + 1 < NPASS) begin
        int nc; nc = (CI - (q + 1) * CPP < CPP) ? CI - (q + 1) * CPP : CPP;
        prog[pc++] = i_ldact(IN_BASE + 3 * CPP * (q + 1), 0, 0, 3 * nc, 1'((q + 1) % 2));
      end
      prog[pc++] = i_setw(wb[q], xb[q]);
      prog[pc++] = i_comp(nv[q], 0, 0, q == 0, 1'(q % 2));
    end
    prog[pc++] = i_store(OUT_BASE, 0, CO, 0, 0, 1);
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

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cycles [2];
    repeat (3) @(negedge clk); rst_n = 1;
    foreach (X[c, r, x]) X[c][r][x] = $urandom_range(0, 40) - 20;
    for (int run = 0; run < 2; run++) begin       // 0: dense, 1: about half the kernel rows pruned
      logic [GBW-1:0] d;
      int t;
      foreach (K[o, c, kr]) begin
        bit keep; keep = (run == 0) || ($urandom_range(1) == 1);
        for (int k = 0; k < 3; k++) K[o][c][kr][k] = keep ? {1'($urandom), 3'($urandom_range(0, 3))} : 4'd7;
        if (keep && K[o][c][kr][0] == 4'd7) K[o][c][kr][0] = 4'd0;
      end
      build_streams(); build_prog();
      for (int i = 0; i < 3 * nvec_total; i++) hwrite(1, i, GBW'(wimg[i]));
      for (int i = 0; i < nvec_total; i++) hwrite(2, i, GBW'(ximg[i]));
      for (int i = 0; i < $size(prog); i++) hwrite(0, i, GBW'(prog[i]));
      for (int c = 0; c < CI; c++) for (int r = 0; r < 3; r++) begin
        d = '0;
        for (int x = 0; x < WID; x++) d[8*x +: 8] = 8'(X[c][r][x]);
        hwrite(3, IN_BASE + 3 * c + r, d);
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      t = 1;
      while (!done && t < 100000) begin @(negedge clk); t++; end
      chk(done, "program finished");
      cycles[run] = t;
      $display("%s: %0d vectors (%0d padding), %0d cycles", run ? "sparse" : "dense", nvec_total, n_pad, t);
      for (int o = 0; o < CO; o++) begin
        hread(4, OUT_BASE + o, d);
        for (int i = 0; i < 4; i++) begin
          longint a; a = 0;
          for (int c = 0; c < CI; c++) for (int kr = 0; kr < 3; kr++) for (int k = 0; k < 3; k++)
            a += longint'(potval(K[o][c][kr][k])) * X[c][kr][i + k];
          chk(int'($signed(d[16*i +: 16])) == sat16(a), $sformatf("out[%0d][%0d]=%0d exp %0d", o, i, $signed(d[16*i +: 16]), sat16(a)));
        end
      end
      if (run == 0) chk(nvec_total == CI * 3, "dense run uses one vector per kernel row");
    end
    chk(cycles[1] < cycles[0], "sparse run faster than dense");
    chk(overlap_cycles > 0, "pass loads overlapped with computation");
    $display("speed-up from vector-wise sparsity: %0d.%02d", cycles[0] / cycles[1], (100 * cycles[0] / cycles[1]) % 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
