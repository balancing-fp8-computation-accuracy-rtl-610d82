// cim_column: one 64x2b compute column of the SRAM array with its adder tree.
//
// Each row stores a 2-bit slice of a weight. In compute, every row ANDs its
// input bit (the current bit of that row's aligned input) with both stored
// bits; the 64 MSB products and the 64 LSB products are counted by two adder
// trees. The signed number flag (snf) says whether the stored slice is the
// top, signed slice of a two's-complement weight: then the MSB bit weighs -2,
// otherwise +2. Following the column diagram, the MSB count is added to a
// multiplexer output that is either zero (snf=0) or the negated MSB count
// shifted left by one (snf=1), giving +msb or -msb, which is shifted left once
// more and added to the LSB count:
//   col = lsb + 2*msb     (snf = 0)      col = lsb - 2*msb     (snf = 1)
// The 9b signed result is combinational in in_bits. Writes go through the
// one-hot word lines wl (from the word-line driver) at the clock edge.
// The MSB/LSB tree split, the SNF multiplexer and the 9b result follow the
// paper's figure. The figure labels the tree outputs 6b; a count of 64 ones
// needs 7 bits, so 7 are used. The trees are written as plain sums (the paper
// uses 4-2 compressors and full adders, left to synthesis here), and
// "Inverse" is taken as two's-complement negation.
module cim_column
  import dcim_pkg::*;
(
  input  logic                    clk,
  input  logic [ROWS-1:0]         wl,
  input  logic [1:0]              wdata,
  input  logic [ROWS-1:0]         in_bits,
  input  logic                    snf,
  output logic signed [COL_W-1:0] col
);

  localparam int CW = $clog2(ROWS) + 1;

  logic [1:0]    bitcell [ROWS];
  logic [CW-1:0] msb_sum, lsb_sum;
  logic signed [CW+1:0] msb_term;

  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++)
      if (wl[r]) bitcell[r] <= wdata;
  end

  always_comb begin
    msb_sum = '0;
    lsb_sum = '0;
    for (int r = 0; r < ROWS; r++) begin
      msb_sum = msb_sum + CW'(in_bits[r] & bitcell[r][1]);
      lsb_sum = lsb_sum + CW'(in_bits[r] & bitcell[r][0]);
    end
    msb_term = $signed({2'b00, msb_sum})
             + (snf ? ($signed(-{2'b00, msb_sum}) <<< 1) : '0);
    col = (COL_W'(msb_term) <<< 1) + $signed(COL_W'(lsb_sum));
  end

endmodule
