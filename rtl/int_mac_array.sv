// int_mac_array: the 64x96 SRAM-based INT MAC array with word-line driver and
// per-column accumulators.
//
// 48 compute columns (cim_column), each 64 rows x 2b, hold the pre-aligned
// integer weights: a 2/4/6/8b weight occupies 1/2/3/4 adjacent columns, its
// least significant slice in the lowest column, and the column holding its top
// slice gets the signed number flag. The word-line driver decodes the write
// row address into one-hot word lines; a write stores a whole 96-bit row.
//
// In compute the 64 aligned input bits of one bit position are broadcast to
// all columns every cycle (bit_valid). Inputs arrive MSB first in two's
// complement, so each column accumulator starts with minus the column result
// on the sign bit (bit_first) and then doubles and adds:
//   acc = bit_first ? -col : 2*acc + col.
// One cycle after the group's last bit (bit_last) `done` pulses and acc holds
// the integer dot product of every column's 2b slice with the aligned inputs.
// Column-to-slice mapping, the accumulator form and the one-cycle `done` are
// this design's choices; the array size, 2b columns, AND-based multiply and
// the accumulator position after the adder trees follow the paper.
module int_mac_array
  import dcim_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  wmode_e                  wmode,
  // weight write port (word-line driver)
  input  logic                    w_en,
  input  logic [$clog2(ROWS)-1:0] w_row,
  input  logic [SRAM_W-1:0]       w_data,
  // bit-serial aligned inputs
  input  logic [ROWS-1:0]         in_bits,
  input  logic                    bit_valid,
  input  logic                    bit_first,
  input  logic                    bit_last,
  output logic                    done,
  output logic signed [ACC_W-1:0] acc [NCOL]
);

  logic [ROWS-1:0]         wl;
  logic [NCOL-1:0]         snf;
  logic signed [COL_W-1:0] col [NCOL];
  logic [2:0]              nslice;

  // word-line driver
  always_comb begin
    wl = '0;
    if (w_en) wl[w_row] = 1'b1;
  end

  assign nslice = 3'(wmode) + 3'd1;
  always_comb begin
    for (int c = 0; c < NCOL; c++)
      snf[c] = ((c % int'(nslice)) == int'(nslice) - 1);
  end

  for (genvar c = 0; c < NCOL; c++) begin : g_col
    cim_column u_col (
      .clk, .wl, .wdata(w_data[2*c +: 2]), .in_bits, .snf(snf[c]), .col(col[c])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0;
      for (int c = 0; c < NCOL; c++) acc[c] <= '0;
    end else begin
      done <= bit_valid && bit_last;
      if (bit_valid) begin
        for (int c = 0; c < NCOL; c++)
          acc[c] <= bit_first ? -ACC_W'(col[c]) : ((acc[c] <<< 1) + ACC_W'(col[c]));
      end
    end
  end

endmodule
