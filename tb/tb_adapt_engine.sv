// tb_adapt_engine: programs 15 ascending bounds (-28..28 in steps of 4), a sensitive range and
// a period, then feeds detector outputs drawn from a two-humped distribution. A model keeps
// its own histogram, decision and threshold; the bench checks every decision, the adaptation
// after each period (threshold = middle of the least-populated sensitive bin), the histogram
// clear, and that busy lasts one cycle for a plain decision and two with an adaptation.
module tb_adapt_engine;
  import eg2c_pkg::*;
  logic clk = 0, rst_n = 0, score_valid = 0, reg_we = 0;
  logic signed [SCOREW-1:0] score = '0;
  logic [4:0] reg_sel = '0;
  logic [19:0] reg_data = '0;
  logic busy, normal, dec_valid, adapted;
  logic signed [SCOREW-1:0] threshold;
  logic [NBINS-1:0][CNTW-1:0] hist;
  int bnd [NBINS-1];
  int mh [NBINS];
  int thr, s0, period, cnt, adaptations = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  adapt_engine dut (.*);
  task automatic wreg(int sel, int data);
    @(negedge clk); reg_we = 1; reg_sel = 5'(sel); reg_data = 20'(data);
    @(negedge clk); reg_we = 0;
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < NBINS - 1; k++) begin bnd[k] = -28 + 4 * k; wreg(k, bnd[k]); end
    s0 = 4; period = 37; thr = 0;
    wreg(AREG_S0, s0); wreg(AREG_PERIOD, period); wreg(AREG_THR, thr);
    foreach (mh[k]) mh[k] = 0;
    cnt = 0;
    for (int t = 0; t < 600; t++) begin
      int sc, b, bc;
      bit do_adapt;
      sc = ($urandom_range(1) == 0) ? $urandom_range(0, 30) - 35 : $urandom_range(0, 30) + 5;
      if ($urandom_range(9) == 0) sc = $urandom_range(0, 20) - 10;
      @(negedge clk); score_valid = 1; score = 16'(sc);
      #1; checks++; if (!busy) failures++;
      @(negedge clk); score_valid = 0; #1;
      b = 0; for (int k = 0; k < NBINS - 1; k++) if (sc > bnd[k]) b++;
      if (mh[b] < 255) mh[b]++;
      cnt++;
      do_adapt = (cnt == period);
      checks++; if (!dec_valid || normal != (sc > thr)) begin failures++; $display("t=%0d decision %0d score %0d thr %0d", t, normal, sc, thr); end
      bc = 0; for (int k = 0; k < NBINS; k++) if (int'(hist[k]) != mh[k]) bc++;
      checks++; if (bc != 0) begin failures++; $display("hist mismatch at t=%0d", t); end
      checks++; if (busy != do_adapt) failures++;
      if (do_adapt) begin
        int mi, m, lo, hi;
        m = 1000; mi = 0;
        for (int j = 0; j < NSENS; j++) if (mh[s0 + j] < m) begin m = mh[s0 + j]; mi = s0 + j; end
        hi = (mi == NBINS - 1) ? bnd[NBINS-2] : bnd[mi];
        lo = (mi == 0) ? hi : bnd[mi - 1];
        thr = (lo + hi) >>> 1;
        @(negedge clk);
        checks++; if (!adapted || int'(threshold) != thr) begin failures++; $display("threshold %0d exp %0d", threshold, thr); end
        checks++; if (hist != '0) failures++;
        foreach (mh[k]) mh[k] = 0;
        cnt = 0;
        adaptations++;
      end
    end
    checks++; if (adaptations != 600 / 37) failures++;
    $display("adaptations=%0d final threshold=%0d", adaptations, threshold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
