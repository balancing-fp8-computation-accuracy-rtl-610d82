// fusion_unit: combines the accumulated results of 12 adjacent 2b columns into
// 2/4/6/8b weight results.
//
// A weight stored as n 2b slices (slice j in column n*w + j) contributes
//   result_w = sum_j acc[n*w + j] * 4^j.
// 2/4/8b path (regular fusion): six pair adders p_k = (acc[2k+1] << 2) + acc[2k]
// give the 4b results; three quad adders q_m = (p_{2m+1} << 4) + p_{2m} give
// the 8b results. 6b path: four 3-column results reuse the pair adders where
// the columns line up and add one extra shifted column:
//   w0 = p0 + (acc2 << 4), w1 = acc3 + (p2 << 2),
//   w2 = p3 + (acc8 << 4), w3 = acc9 + (p5 << 2).
// Outputs: out[0 .. 12/n-1] valid (n = 1,2,3,4 for 2,4,6,8b), the rest zero.
// Purely combinational.
// The sharing of the 2/4/8b path and the extra adders of the 6b path follow
// the paper's figure (12 columns per unit, <<2 and <<4 shifters); the exact
// assignment of columns to adders is this design's reading of the figure.
module fusion_unit
  import dcim_pkg::*;
(
  input  wmode_e                  wmode,
  input  logic signed [ACC_W-1:0] acc [FU_COLS],
  output logic signed [FUS_W-1:0] out [FU_COLS]
);

  logic signed [FUS_W-1:0] a [FU_COLS];
  logic signed [FUS_W-1:0] p [FU_COLS/2];
  logic signed [FUS_W-1:0] q [FU_COLS/4];
  logic signed [FUS_W-1:0] w6 [FU_COLS/3];

  always_comb begin
    for (int i = 0; i < FU_COLS; i++) a[i] = FUS_W'(acc[i]);
    for (int k = 0; k < FU_COLS/2; k++) p[k] = (a[2*k+1] <<< 2) + a[2*k];
    for (int m = 0; m < FU_COLS/4; m++) q[m] = (p[2*m+1] <<< 4) + p[2*m];
    w6[0] = p[0] + (a[2] <<< 4);
    w6[1] = a[3] + (p[2] <<< 2);
    w6[2] = p[3] + (a[8] <<< 4);
    w6[3] = a[9] + (p[5] <<< 2);
    for (int i = 0; i < FU_COLS; i++) out[i] = '0;
    unique case (wmode)
      W2: for (int i = 0; i < FU_COLS; i++)   out[i] = a[i];
      W4: for (int i = 0; i < FU_COLS/2; i++) out[i] = p[i];
      W6: for (int i = 0; i < FU_COLS/3; i++) out[i] = w6[i];
      W8: for (int i = 0; i < FU_COLS/4; i++) out[i] = q[i];
      default: ;
    endcase
  end

endmodule
