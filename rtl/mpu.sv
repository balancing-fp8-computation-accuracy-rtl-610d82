// mpu: mantissa prediction unit (on-the-fly input aligned-bitwidth prediction).
//
// Computes, for one group of 64 exponent offsets shift_i,
//   B_g = k * sum_i(shift_i * 2^-shift_i) / sum_i(2^-shift_i) + B_fix,
// rounded to an integer, saturated to 5 bits and limited to the valid input
// widths 1..11.
//   Stage 1: 64 shift units form x_i = shift_i >> shift_i and w_i = 1 >> shift_i
//            as fixed-point numbers with FRAC fraction bits.
//   Stage 2: two 64-input adder trees give sum_x and sum_w.
//   Stage 3: sum_w is normalised, its reciprocal read from an 8b table
//            (recip_lut), multiplied by sum_x and by k, B_fix added, rounded.
// Latency is 3 cycles: in_valid at t gives out_valid and bg at t+3, one group
// per cycle. When `enable` is low (fixed-bitwidth mode) no register updates,
// standing in for the clock gating of the paper's MPU.
// The three stages, the shift-unit formulation, the 8b reciprocal table and
// the 5b saturation follow the paper. FRAC = 8, the 4-bit fraction of the
// quotient, k in half steps (k2 = 2k) and round-half-up are this design's
// choices.
module mpu
  import dcim_pkg::*;
#(
  parameter int FRAC = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,
  input  logic             in_valid,
  input  logic [OFF_W-1:0] shift [ROWS],
  input  logic [2:0]       k2,      // k = k2 / 2
  input  logic [3:0]       bfix,
  output logic             out_valid,
  output logic [BG_W-1:0]  bg
);

  localparam int XW  = FRAC + 1;             // one element term
  localparam int SW  = XW + $clog2(ROWS);    // sum of 64 terms
  localparam int PW  = SW + 8;               // sum_x * reciprocal

  // ---------------- stage 1: shift units ----------------
  logic [XW-1:0] x_q [ROWS];
  logic [XW-1:0] w_q [ROWS];
  logic          v1, v2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      for (int i = 0; i < ROWS; i++) begin
        x_q[i] <= '0;
        w_q[i] <= '0;
      end
    end else if (enable) begin
      v1 <= in_valid;
      for (int i = 0; i < ROWS; i++) begin
        x_q[i] <= XW'(((OFF_W+FRAC)'(shift[i]) << FRAC) >> shift[i]);
        w_q[i] <= XW'((XW'(1) << FRAC) >> shift[i]);
      end
    end
  end

  // ---------------- stage 2: adder trees ----------------
  logic [SW-1:0] sum_x_c, sum_w_c, sum_x_q, sum_w_q;

  always_comb begin
    sum_x_c = '0;
    sum_w_c = '0;
    for (int i = 0; i < ROWS; i++) begin
      sum_x_c = sum_x_c + SW'(x_q[i]);
      sum_w_c = sum_w_c + SW'(w_q[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2      <= 1'b0;
      sum_x_q <= '0;
      sum_w_q <= '0;
    end else if (enable) begin
      v2      <= v1;
      sum_x_q <= sum_x_c;
      sum_w_q <= sum_w_c;
    end
  end

  // ---------------- stage 3: reciprocal, k, B_fix, round ----------------
  logic [$clog2(SW)-1:0] lead;
  logic [6:0]            norm;      // 7 bits below the leading one
  logic [7:0]            recip;
  logic [PW-1:0]         prod;
  logic [PW-1:0]         bdyn;      // B_dyn with 4 fraction bits
  logic [PW+2:0]         bsum;      // k*B_dyn + B_fix, 5 fraction bits
  logic [PW+2:0]         brnd;
  logic [BG_W-1:0]       bg_c;

  always_comb begin
    lead = '0;
    for (int b = 0; b < SW; b++)
      if (sum_w_q[b]) lead = ($clog2(SW))'(b);
    norm = 7'((lead >= 7) ? (sum_w_q >> (lead - 7)) : (sum_w_q << (7 - lead)));
  end

  recip_lut u_lut (.idx(norm), .recip(recip));

  always_comb begin
    prod = PW'(sum_x_q) * PW'(recip);
    // sum_x/sum_w = prod * 2^-(15 + lead - 7); keep 4 fraction bits
    bdyn = (sum_w_q == '0) ? '0 : (prod >> (lead + 4));
    bsum = (PW+3)'(bdyn) * (PW+3)'(k2) + ((PW+3)'(bfix) << 5);
    brnd = (bsum + (PW+3)'(16)) >> 5;
    if (brnd > (PW+3)'(31)) bg_c = 5'd31; else bg_c = BG_W'(brnd);   // saturate to 5b
    if (bg_c > BG_W'(BG_MAX)) bg_c = BG_W'(BG_MAX);                  // valid input widths
    if (bg_c < BG_W'(1))      bg_c = BG_W'(1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      bg        <= '0;
    end else if (enable) begin
      out_valid <= v2;
      bg        <= bg_c;
    end else begin
      out_valid <= 1'b0;
    end
  end

endmodule
