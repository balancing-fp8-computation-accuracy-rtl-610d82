// output_buffer: holds the floating-point results of processed input groups.
//
// One entry holds the NCOL (48) FP32 lanes produced by one group; lanes
// 0 .. 48/n-1 are meaningful for n-slice weights. Written as a whole entry
// (wr_en, wr_addr, wr_data) when a group finishes; read one lane at a time
// with a registered read port (rd_addr/rd_lane in cycle t -> rd_data in t+1).
// The paper only names the output buffer; its depth, width and ports are
// this design's choices.
module output_buffer
  import dcim_pkg::*;
#(
  parameter int DEPTH = 16,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [AW-1:0]            wr_addr,
  input  logic [31:0]              wr_data [NCOL],
  input  logic [AW-1:0]            rd_addr,
  input  logic [$clog2(NCOL)-1:0]  rd_lane,
  output logic [31:0]              rd_data
);

  logic [31:0] mem [DEPTH][NCOL];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int l = 0; l < NCOL; l++) mem[wr_addr][l] <= wr_data[l];
    rd_data <= mem[rd_addr][rd_lane];
  end

endmodule
