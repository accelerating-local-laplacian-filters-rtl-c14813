// sau: Shift-and-Accumulate Unit of the convolution engine.
//
// Computes y = (a >> SHIFT) + (b >> (SHIFT-1)) + (c >> SHIFT), i.e. the
// first column [1/16 1/8 1/16] of the modified 3x3 Gaussian filter applied
// to three vertically adjacent pixels, with shifts in place of multipliers.
// a, b and c are the lanes i-1, i and i+1 of a column. Purely
// combinational; the convolution engine registers the result.
//
// The shift amounts and the truncating shifts follow the paper (scale factor
// 4). The result is below 2^(DATA_W-2), so DATA_W bits always hold it.
module sau #(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned SHIFT  = 4
) (
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  input  logic [DATA_W-1:0] c,
  output logic [DATA_W-1:0] y
);

  always_comb begin
    y = (a >> SHIFT) + (b >> (SHIFT - 1)) + (c >> SHIFT);
  end

endmodule
