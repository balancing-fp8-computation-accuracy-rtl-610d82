// max_exp_offset: "find max exponent and offset" unit.
//
// A binary comparator tree finds the largest of the 64 input exponents of a
// group (Emax); 64 subtractors then form each element's offset Emax - Ei,
// which is both the right-shift the alignment unit applies and the shift_i
// value the mantissa prediction unit consumes. The result is registered:
// in_valid at cycle t gives out_valid, emax and offset at cycle t+1.
// The comparator tree and the subtractors follow the paper's block diagram;
// the single register stage is this implementation's choice.
module max_exp_offset
  import dcim_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [EXP_W-1:0] exps   [ROWS],
  output logic             out_valid,
  output logic [EXP_W-1:0] emax,
  output logic [OFF_W-1:0] offset [ROWS]
);

  localparam int LEVELS = $clog2(ROWS);

  // tree[l][i]: maximum of 2^l consecutive exponents
  logic [EXP_W-1:0] tree [LEVELS+1][ROWS];

  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int i = 0; i < ROWS; i++)
        tree[l][i] = '0;
    for (int i = 0; i < ROWS; i++) tree[0][i] = exps[i];
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < (ROWS >> l); i++)
        tree[l][i] = (tree[l-1][2*i] > tree[l-1][2*i+1]) ? tree[l-1][2*i] : tree[l-1][2*i+1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      emax      <= '0;
      for (int i = 0; i < ROWS; i++) offset[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        emax <= tree[LEVELS][0];
        for (int i = 0; i < ROWS; i++) offset[i] <= OFF_W'(tree[LEVELS][0] - exps[i]);
      end
    end
  end

endmodule
