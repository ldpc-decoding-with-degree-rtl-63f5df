// cyclic_shifter: rotates a block of Z message lanes by a circulant shift.
//
// In a quasi-cyclic code every non-zero block of the parity-check matrix is a
// Z x Z identity rotated by a shift s: check j of the block row meets variable
// (j + s) mod Z of the block column. Rotating the Z posteriors of the block
// column left by s, dout[j] = din[(j + s) mod Z], lines each value up with the
// check lane j that uses it; rotating left by (Z - s) mod Z undoes it.
// The rotation is built as a logarithmic shifter: stage b rotates by 2^b mod Z
// when bit b of the shift is set, which works for any Z, not only powers of
// two. The shift must be below Z. Purely combinational. The paper does not
// describe its permutation network; this one is the design's own.
module cyclic_shifter #(
  parameter int unsigned Z  = wrcq_pkg::Z_DEF,
  parameter int unsigned W  = wrcq_pkg::BV_DEF,
  localparam int unsigned SW = (Z > 1) ? $clog2(Z) : 1
) (
  input  logic [Z-1:0][W-1:0] din,
  input  logic [SW-1:0]       shift,
  output logic [Z-1:0][W-1:0] dout
);

  logic [SW:0][Z-1:0][W-1:0] stage;

  assign stage[0] = din;

  for (genvar b = 0; b < SW; b++) begin : g_stage
    localparam int unsigned K = (1 << b) % Z;
    for (genvar j = 0; j < Z; j++) begin : g_lane
      assign stage[b+1][j] = shift[b] ? stage[b][(j + K) % Z] : stage[b][j];
    end
  end

  assign dout = stage[SW];

endmodule
