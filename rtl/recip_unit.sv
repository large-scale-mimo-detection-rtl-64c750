// recip_unit: reciprocal of a positive fixed-point number by table lookup.
//
// The detector needs reciprocals in three places: the 'Inv' unit of every
// diagonal processing element (1/a_ii -> D^-1*B), and the SINR unit (1/nu^2
// and 1/mu).  As in the published design, the reciprocal comes from a lookup
// table of 1024 words of 12 bits, which fits one block RAM.  How the table is
// addressed is this design's choice: the input is normalised by its leading
// one to m = 1.f in [1,2), the 10 bits after the leading one address the
// table, which holds round(2^12 / (1 + (a + 0.5)/1024)), i.e. 1/m in (0.5, 1]
// with 12 fraction bits, and the table word is shifted back by the exponent.
// The table is computed at elaboration time from that formula.
//
// Interface: in_val is unsigned with IN_FB fraction bits; out_val is unsigned
// with OUT_FB fraction bits and saturates at its largest value (also for a
// zero input).  Timing: one register stage, out_val is valid the cycle after
// in_val (like a synchronous block-RAM read).
module recip_unit #(
  parameter int IN_W      = 22,
  parameter int IN_FB     = 12,
  parameter int OUT_W     = 15,
  parameter int OUT_FB    = 12,
  parameter int LUT_DEPTH = 1024,  // table depth (power of two)
  parameter int LUT_W     = 12     // table word length
) (
  input  logic             clk,
  input  logic [IN_W-1:0]  in_val,
  output logic [OUT_W-1:0] out_val
);

  localparam int AW = $clog2(LUT_DEPTH);
  typedef logic [LUT_W-1:0] lut_t [LUT_DEPTH];

  // entry a = round(2^LUT_W * D / (D + a + 0.5)), D = LUT_DEPTH
  function automatic lut_t gen_lut();
    lut_t t;
    longint num;
    for (int a = 0; a < LUT_DEPTH; a++) begin
      num  = (longint'(1) << (LUT_W + 2)) * longint'(LUT_DEPTH);
      t[a] = LUT_W'((num / longint'(2*LUT_DEPTH + 2*a + 1) + 1) / 2);
    end
    return t;
  endfunction

  localparam lut_t LUT = gen_lut();

  logic [$clog2(IN_W)-1:0] lead;     // position of the leading one
  logic [AW-1:0]           addr;
  logic [IN_W+AW-1:0]      shifted;

  always_comb begin
    lead = '0;
    for (int k = 0; k < IN_W; k++)
      if (in_val[k]) lead = ($clog2(IN_W))'(k);
    // bring the bits below the leading one to the top AW positions
    shifted = {in_val, {AW{1'b0}}} >> lead;
    addr    = shifted[AW-1:0];
  end

  // out = LUT[addr] * 2^(OUT_FB - LUT_W - (lead - IN_FB))
  localparam int SH0 = OUT_FB - LUT_W + IN_FB;  // shift for lead = 0
  logic [LUT_W-1:0] word;
  logic [OUT_W-1:0] res;
  logic [LUT_W+64-1:0] wide;
  int sh;

  always_comb begin
    word = LUT[addr];
    sh   = SH0 - int'(lead);
    wide = '0;
    if (sh >= 0) wide = (LUT_W+64)'(word) << sh;
    else         wide = (LUT_W+64)'(word) >> (-sh);
    if (in_val == '0 || wide > (LUT_W+64)'({OUT_W{1'b1}}))
      res = '1;
    else
      res = wide[OUT_W-1:0];
  end

  always_ff @(posedge clk) out_val <= res;

endmodule
