// input_buffer: input exponent buffer and input mantissa buffer of the macro.
//
// The host writes one vector of 64 FP8 codes per cycle. On the way in each
// code is split (dcim_pkg::fp8_split) into its effective exponent, kept in the
// exponent buffer, and a two's-complement mantissa with the hidden bit made
// explicit, kept in the mantissa buffer. The exponent buffer is read
// bit-parallel (all 64 exponents of a vector at once) by the max-exponent
// unit; the mantissa buffer is read bit-serially, one bit position of all 64
// mantissas per access, MSB (sign) first, which is the order in which the
// FIFO-based alignment units are filled.
//
// Interface: wr_en/wr_addr/wr_code/wr_ebits write a vector; exp_raddr ->
// exp_rdata and mant_raddr/mant_bit -> mant_rbits are asynchronous reads.
// The split into parallel exponent and serial mantissa reads follows the
// paper's block diagram; the depth and the conversion at write time are this
// implementation's choice.
module input_buffer
  import dcim_pkg::*;
#(
  parameter int DEPTH = 16,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic [7:0]           wr_code [ROWS],
  input  logic [2:0]           wr_ebits,
  input  logic [AW-1:0]        exp_raddr,
  output logic [EXP_W-1:0]     exp_rdata [ROWS],
  input  logic [AW-1:0]        mant_raddr,
  input  logic [2:0]           mant_bit,     // 0 = MSB (sign) of the mantissa
  input  logic [2:0]           mant_w,   // two's-complement width of the format
  output logic [ROWS-1:0]      mant_rbits
);

  logic [EXP_W-1:0]  exp_mem  [DEPTH][ROWS];
  logic [MANT_W-1:0] mant_mem [DEPTH][ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int r = 0; r < ROWS; r++) begin
        {exp_mem[wr_addr][r], mant_mem[wr_addr][r]} <= fp8_split(wr_code[r], wr_ebits);
      end
    end
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      exp_rdata[r]  = exp_mem[exp_raddr][r];
      mant_rbits[r] = mant_mem[mant_raddr][r][3'(mant_w - 3'd1 - mant_bit)];
    end
  end

endmodule
