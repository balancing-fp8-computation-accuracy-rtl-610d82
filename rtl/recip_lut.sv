// recip_lut: 8-bit reciprocal table used by the mantissa prediction unit to
// avoid a divider.
//
// The index is the 7 bits that follow the leading one of a normalised divisor
// m in [128, 255]; the entry is round(2^15 / m), saturated to 8 bits (only
// m = 128 saturates: 256 -> 255). The table is computed at elaboration from
// that formula, so no data file is needed. Purely combinational.
// The paper specifies an 8b reciprocal lookup table; the normalisation and
// rounding are this implementation's choice.
module recip_lut (
  input  logic [6:0] idx,
  output logic [7:0] recip
);

  function automatic logic [7:0] entry(input int m);
    int v;
    v = ((1 << 15) + m / 2) / m;
    return (v > 255) ? 8'd255 : 8'(v);
  endfunction

  logic [7:0] table_q [128];

  for (genvar i = 0; i < 128; i++) begin : g_tab
    localparam logic [7:0] V = entry(128 + i);
    assign table_q[i] = V;
  end

  assign recip = table_q[idx];

endmodule
