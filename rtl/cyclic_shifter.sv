// cyclic_shifter: logarithmic barrel shifter over the Z elements of one
// circulant block.
//
// dout[r] = din[(r + shift) mod Z], i.e. the block is rotated so that element
// r + shift moves to position r. The rotation is built from ceil(log2 Z)
// stages, stage k rotating by 2^k mod Z when bit k of shift is set, so any
// shift in 0..Z-1 costs one pass through the stages. Purely combinational.
// shift values of Z or more are not expected (the rotation is then by shift
// mod Z, which is still well defined). The element width WD is a parameter.
module cyclic_shifter #(
  parameter int Z  = 54,
  parameter int WD = 6,
  localparam int SW = (Z > 1) ? $clog2(Z) : 1
) (
  input  logic [Z-1:0][WD-1:0] din,
  input  logic [SW-1:0]        shift,
  output logic [Z-1:0][WD-1:0] dout
);
  logic [SW:0][Z-1:0][WD-1:0] stage;

  assign stage[0] = din;

  for (genvar k = 0; k < SW; k++) begin : g_stage
    localparam int ROT = (1 << k) % Z;
    for (genvar r = 0; r < Z; r++) begin : g_el
      assign stage[k+1][r] = shift[k] ? stage[k][(r + ROT) % Z] : stage[k][r];
    end
  end

  assign dout = stage[SW];
endmodule
