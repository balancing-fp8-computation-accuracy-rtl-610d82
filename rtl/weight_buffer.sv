// weight_buffer: weight mantissa buffer and weight exponent buffer.
//
// Weights are aligned offline: every weight of one output channel shares an
// exponent, and its mantissa is stored as a two's-complement integer of
// 2/4/6/8 bits, cut into 2b slices. The mantissa buffer holds the 64 rows x
// 96 bits image that is copied row by row into the SRAM array (rd_row ->
// rd_data, asynchronous). The exponent buffer holds one signed power-of-two
// scale per output lane (up to 48), read all at once by the INT-to-FP stage.
// Both are written by the host. The paper names both buffers and says the
// weights are pre-aligned; the image layout and the scale encoding are this
// design's choices.
module weight_buffer
  import dcim_pkg::*;
(
  input  logic                     clk,
  input  logic                     wm_wr_en,
  input  logic [$clog2(ROWS)-1:0]  wm_wr_row,
  input  logic [SRAM_W-1:0]        wm_wr_data,
  input  logic [$clog2(ROWS)-1:0]  rd_row,
  output logic [SRAM_W-1:0]        rd_data,
  input  logic                     we_wr_en,
  input  logic [$clog2(NCOL)-1:0]  we_wr_lane,
  input  logic signed [WEXP_W-1:0] we_wr_data,
  output logic signed [WEXP_W-1:0] wexp [NCOL]
);

  logic [SRAM_W-1:0] wm [ROWS];

  always_ff @(posedge clk) begin
    if (wm_wr_en) wm[wm_wr_row] <= wm_wr_data;
    if (we_wr_en) wexp[we_wr_lane] <= we_wr_data;
  end

  assign rd_data = wm[rd_row];

endmodule
