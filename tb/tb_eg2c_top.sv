// tb_eg2c_top: end-to-end test of the whole processor at its default sizes.
//
// The bench plays host and compiler. It builds, from dense weight tensors with pruned rows, the
// sparse vector streams (weights, 2-bit index steps, padding vectors) and the instruction
// program for a small heartbeat pipeline, loads them through the host port and runs several
// beats:
//   layer A (detector-like): 3x3 convolution, 4 input channels x 4 rows x 16 columns ->
//           15 channels x 2 rows, 4-bit power-of-2 weights, row-wise reuse, ReLU, 8-bit output
//           into Act GB1; its first 16 results of row 0 are pooled (DET) into a detector score;
//   branch: score above threshold -> coarse path, otherwise precise path (BRN);
//   layer B: point-wise convolution 15 -> 32 channels on layer A's output after SWAP, with
//           4-bit power-of-2 weights and 8-bit outputs (coarse) or 8-bit integer weights and
//           16-bit outputs (precise), written into Act GB0.
// After the beats a depth-wise 3x3 layer (4 channels, 6 x 10 inputs, 4 x 8 outputs each) runs
// with column-wise reuse (the lanes of four output rows read the same input row, each with its
// own kernel row) and deeper row-wise reuse (each input row split into two 6-byte sub-rows at
// byte offsets 0 and 4 for two lanes), one channel per COMP, loads of the next channel
// overlapping the current one.
// Before the beats an init program sets the histogram bounds, the sensitive range, an
// adaptation period of 2 beats and the first threshold. The bench computes every expected
// value by direct convolution of the dense tensors, follows the threshold adaptation in its
// own model, picks each beat's input so that the desired branch is taken, and compares all
// stored activations read back through the host port. It counts how often each mechanism
// happened (both weight formats, both convolution modes, skipped rows, padding vectors,
// stalls, loads overlapping computation in the two-bank temporary buffer, both branch
// directions, SWAP, both output formats, threshold adaptation, both depth-wise reuse patterns) and counts a
// failure for any that never did.
module tb_eg2c_top;
  import eg2c_pkg::*;

  localparam int CI = 4, HR = 4, WC = 16, CO = 15, CB = 32;
  localparam int SHA = 3, SHB = 5;
  localparam int BEATS = 6;
  localparam int WA_BASE = 0,   XA_BASE = 0;
  localparam int WC_BASE = 200, XC_BASE = 100;
  localparam int WP_BASE = 400, XP_BASE = 200;
  localparam int OUTB = 100;
  // depth-wise phase: DC channels of DH x DWID inputs, 4 output rows x 8 columns per channel
  localparam int DC = 4, DH = 6, DWID = 10, SHD = 2;
  localparam int WD_BASE = 600, XD_BASE = 250, DWI = 300, DWO = 40;
  localparam int NBND = NBINS - 1;

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

  // ---------------- tensors ----------------
  int X  [CI][HR][WC];
  int WA [CO][CI][3][3];       // decoded power-of-2 values
  logic [3:0] CA [CO][CI][3][3];
  int WBc [CB][CO]; logic [3:0] CBc [CB][CO];
  int WBp [CB][CO];
  int A8 [CO][2][WC];
  int accA [CO][2][WC];

  function automatic int sat16(longint v); return v > 32767 ? 32767 : (v < -32768 ? -32768 : int'(v)); endfunction
  function automatic int q8(int v, int sh, bit rl);
    int y; y = v >>> sh; if (rl && y < 0) y = 0;
    return y > 127 ? 127 : (y < -128 ? -128 : y);
  endfunction
  function automatic int potval(logic [3:0] c);
    int m; m = (c[2:0] == 3'd7) ? 0 : (1 << c[2:0]); return c[3] ? -m : m;
  endfunction
  function automatic logic [3:0] rnd_pot();
    return {1'($urandom), 3'($urandom_range(0, 3))};
  endfunction

  // ---------------- memory images ----------------
  logic [127:0] wimg [2048];
  logic [63:0]  ximg [1280];
  logic [31:0]  prog [1024];

  // mechanism counters from the compiler
  int n_skip = 0, n_pad = 0;

  // Sparse vector list of one lane: step and 3 weights (as nibble codes or int8)
  typedef struct { int step; int w[3]; } vec_t;

  // Writes lane l's vector list into the weight/index images (int8: two nibbles per weight)
  task automatic emit(int wbase, int xbase, int nvec, vec_t vl[$], int l, bit i8);
    for (int v = 0; v < nvec; v++) begin
      vec_t e;
      if (v < vl.size()) e = vl[v];
      else begin e.step = 0; e.w = '{i8 ? 0 : 7, i8 ? 0 : 7, i8 ? 0 : 7}; end
      ximg[xbase + v][2*l +: 2] = 2'(e.step);
      for (int k = 0; k < 3; k++) begin
        if (i8) begin
          logic [7:0] b; b = 8'(e.w[k]);
          wimg[wbase + 6*v + 2*k][4*l +: 4]     = b[3:0];
          wimg[wbase + 6*v + 2*k + 1][4*l +: 4] = b[7:4];
        end else wimg[wbase + 3*v + k][4*l +: 4] = 4'(e.w[k]);
      end
    end
  endtask

  // Appends vectors reaching row r from row prev, padding when the step exceeds 3
  task automatic reach(ref vec_t vl[$], ref int prev, ref int pads, ref int skips, input int r, input int w[3], input bit i8);
    vec_t e;
    while (r - prev > 3) begin
      e.step = 3; e.w = '{i8 ? 0 : 7, i8 ? 0 : 7, i8 ? 0 : 7}; vl.push_back(e); prev += 3; pads++;
    end
    if (r - prev > 1) skips++;
    e.step = r - prev; e.w = w; vl.push_back(e); prev = r;
  endtask

  int nvA, nvC, nvP;

  task automatic build_weights();
    vec_t la [32][$];
    vec_t lc [32][$];
    vec_t lp [32][$];
    foreach (wimg[i]) wimg[i] = '0;
    foreach (ximg[i]) ximg[i] = '0;
    // layer A: prune about 40% of kernel rows
    foreach (CA[o, c, kr]) begin
      bit keep; keep = ($urandom_range(9) >= 4);
      for (int k = 0; k < 3; k++) begin
        CA[o][c][kr][k] = keep ? rnd_pot() : 4'd7;
        WA[o][c][kr][k] = potval(CA[o][c][kr][k]);
      end
    end
    nvA = 0;
    for (int y = 0; y < 2; y++) for (int o = 0; o < CO; o++) begin
      int l, prev; l = y * CO + o; prev = 0;
      for (int c = 0; c < CI; c++) for (int kr = 0; kr < 3; kr++)
        if (CA[o][c][kr][0] != 4'd7 || CA[o][c][kr][1] != 4'd7 || CA[o][c][kr][2] != 4'd7)
          reach(la[l], prev, n_pad, n_skip, c * HR + y + kr, '{int'(CA[o][c][kr][0]), int'(CA[o][c][kr][1]), int'(CA[o][c][kr][2])}, 0);
      if (la[l].size() > nvA) nvA = la[l].size();
    end
    // layer B: groups of 3 input channels, pruned per output channel
    nvC = 0; nvP = 0;
    for (int o = 0; o < CB; o++) begin
      int pc, pp; pc = 0; pp = 0;
      for (int g = 0; g < CO / 3; g++) begin
        bit kc, kp; kc = ($urandom_range(2) != 0); kp = ($urandom_range(3) != 0);
        for (int k = 0; k < 3; k++) begin
          CBc[o][3*g+k] = kc ? rnd_pot() : 4'd7;
          WBc[o][3*g+k] = potval(CBc[o][3*g+k]);
          WBp[o][3*g+k] = kp ? $urandom_range(0, 100) - 50 : 0;
        end
        if (kc) reach(lc[o], pc, n_pad, n_skip, 3*g, '{int'(CBc[o][3*g]), int'(CBc[o][3*g+1]), int'(CBc[o][3*g+2])}, 0);
        if (kp) reach(lp[o], pp, n_pad, n_skip, 3*g, '{WBp[o][3*g], WBp[o][3*g+1], WBp[o][3*g+2]}, 1);
      end
      if (lc[o].size() > nvC) nvC = lc[o].size();
      if (lp[o].size() > nvP) nvP = lp[o].size();
    end
    if (nvC == 0) nvC = 1;
    if (nvP == 0) nvP = 1;
    for (int l = 0; l < 32; l++) begin
      emit(WA_BASE, XA_BASE, nvA, la[l], l, 0);
      emit(WC_BASE, XC_BASE, nvC, lc[l], l, 0);
      emit(WP_BASE, XP_BASE, nvP, lp[l], l, 1);
    end
  endtask

  // ---------------- instruction encoders ----------------
  function automatic logic [31:0] i_setw(int w, int x); return {OP_SETW, 6'd0, 11'(x), 11'(w)}; endfunction
  function automatic logic [31:0] i_ldact(int a, int ofs, int row, int cnt, bit bk); return {OP_LDACT, 4'd0, bk, 4'(cnt-1), 4'(row), 6'(ofs), 9'(a)}; endfunction
  function automatic logic [31:0] i_comp(int nv, bit pw, bit i8, bit clr, bit bk); return {OP_COMP, 16'd0, bk, clr, i8, pw, 8'(nv-1)}; endfunction
  function automatic logic [31:0] i_store(int b, int ofs, int nl, int sh, bit rl, bit w16); return {OP_STORE, 2'd0, w16, rl, 4'(sh), 5'(nl-1), 6'(ofs), 9'(b)}; endfunction
  function automatic logic [31:0] i_det(int nl, int sh); return {OP_DET, 19'd0, 4'(sh), 5'(nl-1)}; endfunction
  function automatic logic [31:0] i_jump(opcode_e op, int t); return {op, 18'd0, 10'(t)}; endfunction
  function automatic logic [31:0] i_seta(int sel, int d); return {OP_SETA, 3'd0, 5'(sel), 20'(d)}; endfunction

  int bnd [NBND];
  localparam int S0 = 4, PERIOD = 2, THR0 = 0;

  task automatic build_init();
    int pc; pc = 0;
    foreach (prog[i]) prog[i] = {OP_HALT, 28'd0};
    for (int k = 0; k < NBND; k++) begin bnd[k] = -112 + 16 * k; prog[pc++] = i_seta(k, bnd[k]); end
    prog[pc++] = i_seta(AREG_S0, S0);
    prog[pc++] = i_seta(AREG_PERIOD, PERIOD);
    prog[pc++] = i_seta(AREG_THR, THR0);
    prog[pc++] = {OP_HALT, 28'd0};
  endtask

  task automatic layer_b(ref int pc, input int wb, input int xb, input int nv, input bit i8);
    prog[pc++] = {OP_SWAP, 28'd0};
    // tiles (y, x0); the rows of tile t+1 load into the other bank while tile t computes
    prog[pc++] = i_ldact(0, 0, 0, CO, 0);
    for (int t = 0; t < 2 * WC / 4; t++) begin
      int y, x0;
      y = t / (WC / 4); x0 = 4 * (t % (WC / 4));
      if (t + 1 < 2 * WC / 4) prog[pc++] = i_ldact(((t + 1) / (WC / 4)) * CO, 4 * ((t + 1) % (WC / 4)), 0, CO, 1'((t + 1) % 2));
      prog[pc++] = i_setw(wb, xb);
      prog[pc++] = i_comp(nv, 1, i8, 1, 1'(t % 2));
      prog[pc++] = i_store(OUTB + CB * y, i8 ? 2 * x0 : x0, CB, i8 ? 0 : SHB, 0, i8);
    end
    prog[pc++] = {OP_HALT, 28'd0};
  endtask

  int coarse_at;
  task automatic build_main();
    int pc, brn_at; pc = 0;
    foreach (prog[i]) prog[i] = {OP_HALT, 28'd0};
    prog[pc++] = i_ldact(0, 0, 0, CI * HR, 0);
    for (int t = 0; t < WC / 4; t++) begin
      if (t + 1 < WC / 4) prog[pc++] = i_ldact(0, 4 * (t + 1), 0, CI * HR, 1'((t + 1) % 2));
      prog[pc++] = i_setw(WA_BASE, XA_BASE);
      prog[pc++] = i_comp(nvA, 0, 0, 1, 1'(t % 2));
      prog[pc++] = i_store(0, 4 * t, 2 * CO, SHA, 1, 0);
    end
    prog[pc++] = i_det(4, 4);      // lanes 0..3 = channels 0..3, row 0, columns 12..15
    brn_at = pc++;
    layer_b(pc, WP_BASE, XP_BASE, nvP, 1);    // precise
    coarse_at = pc;
    layer_b(pc, WC_BASE, XC_BASE, nvC, 0);    // coarse
    prog[brn_at] = i_jump(OP_BRN, coarse_at);
  endtask


  // ---------------- depth-wise layer (column-wise and deeper row-wise reuse) ----------------
  // Lane s*4+y of a channel's COMP computes output row y, columns 4s..4s+3. Temporary row
  // 2r+s holds input row r from byte offset 4s, so vector v makes lanes 0..3 all read input
  // row v (each with kernel row v-y, or zeros: column-wise reuse) and lanes 4..7 read the
  // other half of the same row (deeper row-wise reuse).
  int XD [DC][DH][DWID];
  logic [3:0] KD [DC][3][3];
  task automatic build_dw();
    foreach (KD[c, kr]) begin
      bit keep; keep = ($urandom_range(3) != 0);
      for (int k = 0; k < 3; k++) KD[c][kr][k] = keep ? rnd_pot() : 4'd7;
    end
    for (int c = 0; c < DC; c++) begin
      vec_t ld [32][$];
      for (int l = 0; l < 8; l++) begin
        int y, sb; y = l % 4; sb = l / 4;
        for (int v = 0; v < DH; v++) begin
          vec_t e;
          e.step = (v == 0) ? sb : 2;
          for (int k = 0; k < 3; k++) e.w[k] = (v - y >= 0 && v - y <= 2) ? int'(KD[c][v - y][k]) : 7;
          ld[l].push_back(e);
        end
      end
      for (int l = 0; l < 32; l++) emit(WD_BASE + 3 * DH * c, XD_BASE + DH * c, DH, ld[l], l, 0);
    end
  endtask
  task automatic build_dw_prog();
    int pc; pc = 0;
    foreach (prog[i]) prog[i] = {OP_HALT, 28'd0};
    for (int c = 0; c <= DC; c++) begin
      if (c < DC)   // rows of channel c into temp bank c%2 while channel c-1 computes
        for (int r = 0; r < DH; r++) for (int sb = 0; sb < 2; sb++)
          prog[pc++] = i_ldact(DWI + DH * c + r, 4 * sb, 2 * r + sb, 1, 1'(c % 2));
      if (c > 0) begin
        prog[pc++] = i_setw(WD_BASE + 3 * DH * (c - 1), XD_BASE + DH * (c - 1));
        prog[pc++] = i_comp(DH, 0, 0, 1, 1'((c - 1) % 2));
        prog[pc++] = i_store(DWO + 8 * (c - 1), 0, 8, SHD, 0, 0);
      end
    end
    prog[pc++] = {OP_HALT, 28'd0};
  endtask

  // ---------------- host port ----------------
  task automatic hwrite(int sel, int a, logic [GBW-1:0] d);
    @(negedge clk); host_we = 1; host_sel = 3'(sel); host_addr = 11'(a); host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask
  task automatic hread(int sel, int a, output logic [GBW-1:0] d);
    @(negedge clk); host_re = 1; host_sel = 3'(sel); host_addr = 11'(a);
    @(negedge clk); host_re = 0; d = host_rdata;
  endtask
  task automatic load_prog();
    for (int i = 0; i < 128; i++) hwrite(0, i, GBW'(prog[i]));
  endtask
  task automatic run();
    int t; t = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done && t < 200000) begin @(negedge clk); t++; end
    chk(done, "program finished");
  endtask

  // ---------------- reference model ----------------
  int score_ref;
  task automatic ref_layer_a();
    longint s;
    for (int o = 0; o < CO; o++) for (int y = 0; y < 2; y++) for (int x = 0; x < WC; x++) begin
      longint a; a = 0;
      for (int c = 0; c < CI; c++) for (int kr = 0; kr < 3; kr++) for (int k = 0; k < 3; k++)
        if (x + k < WC) a += longint'(WA[o][c][kr][k]) * X[c][y + kr][x + k];
      accA[o][y][x] = sat16(a);
      A8[o][y][x]   = q8(accA[o][y][x], SHA, 1);
    end
    s = 0;
    for (int o = 0; o < 4; o++) for (int i = 0; i < 4; i++) s += accA[o][0][12 + i];
    score_ref = sat16(s >>> 4);
  endtask

  // threshold adaptation model
  int mhist [NBINS];
  int mthr, mcnt;
  task automatic model_detect(int sc);
    int b; b = 0;
    for (int k = 0; k < NBND; k++) if (sc > bnd[k]) b++;
    if (mhist[b] < 255) mhist[b]++;
    mcnt++;
    if (mcnt == PERIOD) begin
      int m, mi, lo, hi;
      m = 1000; mi = 0;
      for (int j = 0; j < NSENS; j++) if (mhist[S0 + j] < m) begin m = mhist[S0 + j]; mi = S0 + j; end
      hi = (mi == NBINS - 1) ? bnd[NBND - 1] : bnd[mi];
      lo = (mi == 0) ? hi : bnd[mi - 1];
      mthr = (lo + hi) >>> 1;
      foreach (mhist[k]) mhist[k] = 0;
      mcnt = 0;
    end
  endtask

  // ---------------- mechanism monitors ----------------
  int m_pot = 0, m_i8 = 0, m_rir = 0, m_pw = 0, m_swap = 0, m_adapt = 0, m_st8 = 0, m_st16 = 0;
  int m_coarse = 0, m_precise = 0;
  logic src_q = 0;
  bit in_dw = 0;
  int m_cir = 0, m_drir = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.lctrl.valid) begin
      if (dut.lctrl.wfmt == WF_INT8) m_i8++; else m_pot++;
      if (dut.lctrl.mode == CM_PW) m_pw++; else m_rir++;
    end
    if (dut.src != src_q) m_swap++;
    src_q <= dut.src;
    if (adapted) m_adapt++;
    if (dut.ob_store) begin if (dut.ob_w16) m_st16++; else m_st8++; end
    if (in_dw && dut.lctrl.valid && dut.lctrl.new_vec) begin
      // one temporary row delivered to the four lanes of different output rows
      if (dut.u_iab.sel[0] == dut.u_iab.sel[1] && dut.u_iab.sel[0] == dut.u_iab.sel[2] &&
          dut.u_iab.sel[0] == dut.u_iab.sel[3]) m_cir++;
      // the other half of the same input row delivered to the second lane of each output row
      if (dut.u_iab.sel[4] == dut.u_iab.sel[0] + 1'b1) m_drir++;
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit want [BEATS] = '{1, 0, 1, 0, 0, 1};   // 1 = normal (coarse path)
    int cyc0, taken0;
    repeat (3) @(negedge clk); rst_n = 1;
    build_weights(); build_dw();
    for (int i = 0; i < 800; i++) hwrite(1, i, GBW'(wimg[i]));
    for (int i = 0; i < 300; i++) hwrite(2, i, GBW'(ximg[i]));
    build_init(); load_prog(); run();
    chk(threshold == 16'(THR0), "initial threshold");
    mthr = THR0; mcnt = 0; foreach (mhist[k]) mhist[k] = 0;
    build_main(); load_prog();
    $display("vectors: layer A %0d, coarse %0d, precise %0d; skips %0d, pads %0d", nvA, nvC, nvP, n_skip, n_pad);
    for (int beat = 0; beat < BEATS; beat++) begin
      logic [GBW-1:0] d;
      int tries; tries = 0;
      // choose an input that makes the detector take the wanted branch
      do begin
        foreach (X[c, r, x]) X[c][r][x] = $urandom_range(0, 40) - 20;
        ref_layer_a();
        tries++;
      end while (((score_ref > mthr) != want[beat]) && tries < 1000);
      for (int c = 0; c < CI; c++) for (int r = 0; r < HR; r++) begin
        d = '0;
        for (int x = 0; x < WC; x++) d[8*x +: 8] = 8'(X[c][r][x]);
        hwrite(3, c * HR + r, d);
      end
      for (int i = 0; i < 2 * CO; i++) hwrite(4, i, '0);
      for (int i = 0; i < 2 * CB; i++) hwrite(3, OUTB + i, '0);
      taken0 = branches_taken;
      cyc0 = $time;
      run();
      $display("beat %0d: score %0d (ref %0d) threshold %0d -> %s, %0d cycles", beat, det_score,
               score_ref, mthr, det_normal ? "coarse" : "precise", ($time - cyc0) / 10);
      chk(det_score == 16'(score_ref), "detector score");
      chk(det_normal == (score_ref > mthr), "decision");
      chk((branches_taken != 16'(taken0)) == want[beat], "branch direction");
      if (want[beat]) m_coarse++; else m_precise++;
      model_detect(score_ref);
      chk(threshold == 16'(mthr), $sformatf("threshold %0d exp %0d", threshold, mthr));
      // layer A in GB1
      for (int y = 0; y < 2; y++) for (int o = 0; o < CO; o++) begin
        hread(4, y * CO + o, d);
        for (int x = 0; x < WC; x++)
          chk(int'($signed(d[8*x +: 8])) == A8[o][y][x], $sformatf("A[%0d][%0d][%0d]=%0d exp %0d", o, y, x, $signed(d[8*x +: 8]), A8[o][y][x]));
      end
      // layer B in GB0
      for (int y = 0; y < 2; y++) for (int o = 0; o < CB; o++) begin
        hread(3, OUTB + CB * y + o, d);
        for (int x = 0; x < WC; x++) begin
          longint a; int e, got;
          a = 0;
          for (int c = 0; c < CO; c++) a += longint'(want[beat] ? WBc[o][c] : WBp[o][c]) * A8[c][y][x];
          if (want[beat]) begin e = q8(sat16(a), SHB, 0); got = int'($signed(d[8*x +: 8])); end
          else begin e = sat16(a); got = int'($signed(d[16*x +: 16])); end
          chk(got == e, $sformatf("B[%0d][%0d][%0d]=%0d exp %0d", o, y, x, got, e));
        end
      end
    end
    // depth-wise layer with column-wise and deeper row-wise reuse
    begin
      logic [GBW-1:0] d;
      foreach (XD[c, r, x]) XD[c][r][x] = $urandom_range(0, 40) - 20;
      for (int c = 0; c < DC; c++) for (int r = 0; r < DH; r++) begin
        d = '0;
        for (int x = 0; x < DWID; x++) d[8*x +: 8] = 8'(XD[c][r][x]);
        hwrite(3, DWI + DH * c + r, d);
      end
      build_dw_prog(); load_prog();
      in_dw = 1; run(); in_dw = 0;
      for (int c = 0; c < DC; c++) for (int l = 0; l < 8; l++) begin
        int y, sb; y = l % 4; sb = l / 4;
        hread(4, DWO + 8 * c + l, d);
        for (int i = 0; i < 4; i++) begin
          longint a; int e, got;
          a = 0;
          for (int kr = 0; kr < 3; kr++) for (int k = 0; k < 3; k++)
            a += longint'(potval(KD[c][kr][k])) * XD[c][y + kr][4 * sb + i + k];
          e = q8(sat16(a), SHD, 0); got = int'($signed(d[8*i +: 8]));
          chk(got == e, $sformatf("DW[%0d][%0d][%0d]=%0d exp %0d", c, y, 4 * sb + i, got, e));
        end
      end
    end
    chk(m_cir > 0,     "column-wise reuse: one row shared by lanes of different output rows");
    chk(m_drir > 0,    "deeper row-wise reuse: two sub-rows of one row in two lanes");
    // every mechanism must have happened
    chk(m_pot > 0,     "4-bit power-of-2 weights used");
    chk(m_i8 > 0,      "8-bit weights used");
    chk(m_rir > 0,     "row-wise reuse mode used");
    chk(m_pw > 0,      "point-wise mode used");
    chk(n_skip > 0,    "sparse rows skipped");
    chk(n_pad > 0,     "padding vectors used");
    chk(stall_cycles > 0, "stalls on busy output buffer");
    chk(overlap_cycles > 0, "activation loads overlapped with computation");
    chk(m_coarse > 0 && m_precise > 0, "both branch directions");
    chk(m_swap > 0,    "Act GB swap");
    chk(m_st8 > 0 && m_st16 > 0, "8- and 16-bit stores");
    chk(m_adapt > 0,   "threshold adaptation");
    $display("load/compute overlap cycles=%0d", overlap_cycles);
    $display("mechanisms: pot=%0d int8=%0d rir=%0d pw=%0d skip=%0d pad=%0d stall=%0d coarse=%0d precise=%0d swap=%0d st8=%0d st16=%0d adapt=%0d cir=%0d drir=%0d",
             m_pot, m_i8, m_rir, m_pw, n_skip, n_pad, stall_cycles, m_coarse, m_precise, m_swap, m_st8, m_st16, m_adapt, m_cir, m_drir);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
