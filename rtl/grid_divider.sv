// grid_divider: the Divide stage of the grid clustering core.
//
// It maps one event to its grid cell, computing cell_x = x / grid_size and
// cell_y = y / grid_size for both coordinates in parallel, as unsigned
// integer division that discards the remainder. The two quotients are what
// the published core computes; the core's builders had the division mapped
// onto DSP slices by their synthesis tool, while here it is left to the
// synthesis tool as the plain division operator.
//
// The block is purely combinational: the pipeline around it (grid_quant_pipe)
// registers its inputs and its outputs, one clock for the whole division.
//
// A grid_size of zero has no published meaning. This design returns all
// ones (the largest cell index) for both coordinates then, the value a
// restoring divider gives for a zero divisor, so that such events land in a
// cell no real pixel maps to.
module grid_divider #(
  parameter int unsigned COORD_W = grid_pkg::COORD_W
) (
  input  logic [COORD_W-1:0] x,
  input  logic [COORD_W-1:0] y,
  input  logic [COORD_W-1:0] grid_size,
  output logic [COORD_W-1:0] cell_x,
  output logic [COORD_W-1:0] cell_y
);

  always_comb begin
    if (grid_size == '0) begin
      cell_x = '1;
      cell_y = '1;
    end else begin
      cell_x = x / grid_size;
      cell_y = y / grid_size;
    end
  end

endmodule
