// output_act_buf: output activation buffer between the MAC lanes and the output Act GB.
//
// On `store` it copies the results of all lanes (4 x 16 bits each) into its own registers, so
// the lanes may start the next computation at once, and then writes one lane per cycle into
// the output Act GB: lane l goes to word base+l, starting at byte `ofs`, as 4 bytes (8-bit
// activations: arithmetic right shift by `shift`, optional ReLU, saturation to int8) or as
// 8 bytes (16-bit outputs, little-endian). On `det` it copies the results the same way and sums
// the 4 results of lanes 0..nl-1, one lane per cycle; the sum shifted right by `shift` and
// saturated to 16 bits is the pooled detector output sent to the adaptation engine
// (score_valid pulses in the cycle busy falls). The snapshot decoupling, the 8-/16-bit output
// formats and the 512-bit write follow the paper; the layout, the requantization and doing the
// detector's average pooling here are this design's choices. busy is high while it works;
// start pulses are ignored while busy.
module output_act_buf #(
  parameter int unsigned NL = eg2c_pkg::NLANES,
  parameter int unsigned AW = 9
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  eg2c_pkg::lane_res_t [NL-1:0]      lane_res,
  input  logic                              store,
  input  logic                              det,
  input  logic [AW-1:0]                     base,
  input  logic [5:0]                        ofs,
  input  logic [$clog2(NL)-1:0]             nl_m1,   // lanes used minus one
  input  logic [3:0]                        shift,
  input  logic                              relu,
  input  logic                              w16,
  output logic                              busy,
  // output Act GB write port
  output logic                              gb_we,
  output logic [AW-1:0]                     gb_waddr,
  output logic [eg2c_pkg::GBBYTES-1:0]      gb_wbe,
  output logic [eg2c_pkg::GBW-1:0]          gb_wdata,
  // pooled detector output
  output logic                              score_valid,
  output logic signed [eg2c_pkg::SCOREW-1:0] score
);
  import eg2c_pkg::*;
  typedef enum logic [1:0] {S_IDLE, S_STORE, S_DET} state_e;
  state_e state;

  lane_res_t [NL-1:0]   snap;
  logic [$clog2(NL)-1:0] l, last;
  logic [AW-1:0]        base_q;
  logic [5:0]           ofs_q;
  logic [3:0]           sh_q;
  logic                 relu_q, w16_q;
  logic signed [ACCW-1:0] sum;

  function automatic logic [7:0] requant(res_t v, logic [3:0] sh, logic rl);
    res_t y;
    y = v >>> sh;
    if (rl && y < 0) y = '0;
    if (y > 127)       return 8'd127;
    else if (y < -128) return 8'h80;
    else               return y[7:0];
  endfunction

  assign busy = (state != S_IDLE);

  // running pooled sum including the current lane, and its scaled value
  logic signed [ACCW-1:0] sum_nxt, pooled;
  always_comb begin
    sum_nxt = sum;
    for (int i = 0; i < int'(NMAC); i++) sum_nxt += ACCW'(snap[l][i]);
    pooled = sum_nxt >>> sh_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; snap <= '0; l <= '0; last <= '0; base_q <= '0; ofs_q <= '0;
      sh_q <= '0; relu_q <= 1'b0; w16_q <= 1'b0; sum <= '0; score_valid <= 1'b0; score <= '0;
    end else begin
      score_valid <= 1'b0;
      case (state)
        S_IDLE: if (store || det) begin
          snap <= lane_res; l <= '0; last <= nl_m1; base_q <= base; ofs_q <= ofs;
          sh_q <= shift; relu_q <= relu; w16_q <= w16; sum <= '0;
          state <= store ? S_STORE : S_DET;
        end
        S_STORE: begin
          l <= l + 1'b1;
          if (l == last) state <= S_IDLE;
        end
        S_DET: begin
          sum <= sum_nxt;
          l   <= l + 1'b1;
          if (l == last) begin
            if (pooled > 32767)       score <= 16'sh7fff;
            else if (pooled < -32768) score <= -16'sh8000;
            else                      score <= SCOREW'(pooled);
            score_valid <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // GB write of the current lane
  always_comb begin
    int p;
    p        = 0;
    gb_we    = (state == S_STORE);
    gb_waddr = base_q + AW'(l);
    gb_wbe   = '0;
    gb_wdata = '0;
    for (int i = 0; i < int'(NMAC); i++) begin
      if (w16_q) begin
        for (int b = 0; b < 2; b++) begin
          p = int'(ofs_q) + 2*i + b;
          if (p < int'(GBBYTES)) begin
            gb_wbe[p] = 1'b1;
            gb_wdata[8*p +: 8] = snap[l][i][8*b +: 8];
          end
        end
      end else begin
        p = int'(ofs_q) + i;
        if (p < int'(GBBYTES)) begin
          gb_wbe[p] = 1'b1;
          gb_wdata[8*p +: 8] = requant(snap[l][i], sh_q, relu_q);
        end
      end
    end
  end
endmodule
