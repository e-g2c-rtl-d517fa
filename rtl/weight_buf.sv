// weight_buf: per-lane weight buffer turning the weight GB's 4-bit stream into 8-bit weights.
//
// Every read of the weight GB gives each lane 4 bits. In the 4-bit power-of-2 format (coarse
// processing) each nibble is one weight, decoded in the same cycle: bit 3 is the sign and bits
// 2:0 the exponent e, giving +/-2^e for e = 0..6, while e = 7 encodes zero. In the 8-bit integer
// format (precise processing) two nibbles, low first, make one two's-complement weight: the low
// nibble is held in a register and the weight is produced when the high nibble arrives. The two
// formats and the 4b-in/8b-out widths follow the paper; the nibble encodings are this design's.
// w_valid marks the cycles in which w is a complete weight.
module weight_buf (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [eg2c_pkg::WNIB-1:0]   nib,
  input  eg2c_pkg::wfmt_e             wfmt,
  input  logic                        hi,
  output logic                        w_valid,
  output eg2c_pkg::wgt_t              w
);
  import eg2c_pkg::*;
  logic [WNIB-1:0] lo_q;

  function automatic wgt_t pot_decode(logic [3:0] c);
    wgt_t mag;
    mag = (c[2:0] == 3'd7) ? wgt_t'(0) : wgt_t'(8'sd1 <<< c[2:0]);
    return c[3] ? -mag : mag;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lo_q <= '0;
    else if (in_valid && wfmt == WF_INT8 && !hi) lo_q <= nib;
  end

  always_comb begin
    if (wfmt == WF_POT4) begin
      w_valid = in_valid;
      w       = pot_decode(nib);
    end else begin
      w_valid = in_valid && hi;
      w       = wgt_t'({nib, lo_q});
    end
  end
endmodule
