// int2fp: converts a signed integer dot product and a power-of-two scale into
// an IEEE-754 single-precision number, value = in * 2^scale.
//
// A leading-one detector finds the magnitude's top bit p; the biased exponent
// is p + scale + 127 and the 23 bits below the leading one form the fraction
// (truncated toward zero). Results too small for a normal number flush to
// signed zero, results too large become infinity. Purely combinational.
// The paper names an INT-to-FP stage after the fusion unit but not its output
// format or rounding; FP32 output, truncation and flush-to-zero are this
// design's choices.
module int2fp
  import dcim_pkg::*;
(
  input  logic signed [FUS_W-1:0]   in,
  input  logic signed [SCALE_W-1:0] scale,
  output logic [31:0]               fp
);

  logic              sgn;
  logic [FUS_W-1:0]  mag;
  logic [$clog2(FUS_W)-1:0] lead;
  // Only the 23 bits below the leading one are kept; the leading one is
  // implicit in FP32 and the bits below are dropped (truncation).
  logic [FUS_W+23-1:0] norm;
  logic signed [SCALE_W+2:0] e;

  always_comb begin
    sgn  = in[FUS_W-1];
    mag  = sgn ? FUS_W'(-in) : FUS_W'(in);
    lead = '0;
    for (int b = 0; b < FUS_W; b++)
      if (mag[b]) lead = ($clog2(FUS_W))'(b);
    // place the leading one at bit FUS_W+22, the fraction below it
    norm = {mag, 23'd0} << (FUS_W - 1 - int'(lead));
    e    = (SCALE_W+3)'(lead) + (SCALE_W+3)'(scale) + (SCALE_W+3)'(127);
    if (mag == '0 || e <= 0)
      fp = {sgn, 31'd0};
    else if (e >= 255)
      fp = {sgn, 8'hFF, 23'd0};
    else
      fp = {sgn, 8'(e), norm[FUS_W+21 -: 23]};
  end

endmodule
