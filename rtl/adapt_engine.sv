// adapt_engine: detection decision and on-chip threshold adaptation.
//
// Every pooled detector output (score_valid) is compared with the current threshold: an output
// above it is "normal" and the controller then runs the coarse convertor, otherwise the beat
// is abnormal and the precise convertor runs. The same output is placed in a histogram bin by
// the comparator (adapt_cmp) and counted (hist_counters). After `period` detector outputs, the
// stand-in for "every T days", the engine runs the adaptation: the Argmin (argmin_tree) finds
// the least-populated of the 8 bins of the sensitive range, starting at bin s0; the threshold
// becomes the mean of that bin's bounds, (Interval_{k-1} + Interval_k) / 2; and the histogram is
// cleared. This takes one extra cycle. The three steps, the comparator/Argmin/register structure
// and the coarse-if-above-threshold decision follow the paper; counting T in detector outputs,
// the register map and the handling of the edge bins (a missing bound is replaced by the other
// bound) are this design's choices. Registers are written through reg_we/reg_sel/reg_data:
// sel 0..14 = Interval_0..Interval_14 (ascending), 15 = s0, 16 = period, 17 = threshold.
// busy covers the cycles from score_valid until the decision (and any adaptation) is done.
module adapt_engine #(
  parameter int unsigned NB = eg2c_pkg::NBINS,
  parameter int unsigned NS = eg2c_pkg::NSENS,
  parameter int unsigned CW = eg2c_pkg::CNTW,
  parameter int unsigned PW = 20
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               score_valid,
  input  logic signed [eg2c_pkg::SCOREW-1:0] score,
  input  logic                               reg_we,
  input  logic [4:0]                         reg_sel,
  input  logic [19:0]                        reg_data,
  output logic                               busy,
  output logic                               normal,      // last decision: above threshold
  output logic                               dec_valid,   // pulse: a decision was made
  output logic                               adapted,     // pulse: threshold was updated
  output logic signed [eg2c_pkg::SCOREW-1:0] threshold,
  output logic [NB-1:0][CW-1:0]              hist
);
  import eg2c_pkg::*;
  localparam int unsigned BW = $clog2(NB);

  score_t [NB-2:0]      bound;
  logic [BW-1:0]        s0;
  logic [PW-1:0]        period, cnt;
  logic                 adapt_pend;
  logic [BW-1:0]        bin;
  logic [NS-1:0][CW-1:0] sens;
  logic [$clog2(NS)-1:0] amin;
  logic                 hclr;
  logic [BW-1:0]        s0c, kbin;
  logic signed [SCOREW:0] lo, hi, msum;

  adapt_cmp #(.NB(NB)) u_cmp (.score, .bound, .bin);
  hist_counters #(.NB(NB), .CW(CW)) u_hist (
    .clk, .rst_n, .clr(hclr), .inc(score_valid), .bin, .num(hist)
  );

  // sensitive range Num_s0 .. Num_s0+NS-1, s0 clamped so the range stays inside the histogram
  always_comb begin
    s0c = (int'(s0) > int'(NB - NS)) ? BW'(NB - NS) : s0;
    for (int j = 0; j < int'(NS); j++) sens[j] = hist[int'(s0c) + j];
  end
  argmin_tree #(.N(NS), .CW(CW)) u_argmin (.val(sens), .idx(amin), .min());

  always_comb begin
    kbin = s0c + BW'(amin);
    hi   = (kbin == BW'(NB - 1)) ? (SCOREW+1)'($signed(bound[NB-2])) : (SCOREW+1)'($signed(bound[kbin]));
    lo   = (kbin == '0)          ? hi : (SCOREW+1)'($signed(bound[kbin - 1'b1]));
    msum = lo + hi;
  end

  assign hclr = adapt_pend;
  assign busy = score_valid || adapt_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bound <= '0; s0 <= '0; period <= '0; cnt <= '0; threshold <= '0;
      normal <= 1'b0; dec_valid <= 1'b0; adapted <= 1'b0; adapt_pend <= 1'b0;
    end else begin
      dec_valid <= 1'b0;
      adapted   <= 1'b0;
      if (reg_we) begin
        if (int'(reg_sel) < int'(NB) - 1)           bound[reg_sel] <= SCOREW'(reg_data);
        else if (int'(reg_sel) == int'(AREG_S0))    s0 <= BW'(reg_data);
        else if (int'(reg_sel) == int'(AREG_PERIOD)) period <= PW'(reg_data);
        else if (int'(reg_sel) == int'(AREG_THR))   threshold <= SCOREW'(reg_data);
      end
      if (score_valid) begin
        normal    <= (score > threshold);
        dec_valid <= 1'b1;
        if (period != '0 && cnt + 1'b1 >= period) begin
          cnt        <= '0;
          adapt_pend <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
      if (adapt_pend) begin
        threshold  <= SCOREW'(msum >>> 1);
        adapted    <= 1'b1;
        adapt_pend <= 1'b0;
      end
    end
  end
endmodule
