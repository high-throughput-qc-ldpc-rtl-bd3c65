// cyclic_shifter -- rotates the Z lanes of one block column by a circulant shift.
//
// A QC-LDPC parity-check matrix is built from z x z identity matrices rotated by a shift
// s: row r of a layer touches variable node (r + s) mod z of the block column. Reading a
// column for a layer therefore rotates it so that lane r of the check node unit gets
// variable node (r + s) mod z (INVERSE = 0): out[r] = in[(r + s) mod z]. On write-back
// the rotation is undone (INVERSE = 1): out[(r + s) mod z] = in[r].
// The lifting size z is an input (1 .. Z), so one build serves every lifting size up to
// its lane count Z, as a standard with many lifting sizes needs; lanes z .. Z-1 pass
// straight through and carry nothing of the code. The shift must be below z.
// The code being quasi-cyclic is the paper's; doing the rotation with a lane multiplexer
// in front of and behind the check node unit is this design's choice.
//
// Purely combinational; each lane is a Z-to-1 multiplexer of W-bit words.
module cyclic_shifter
  import ldpc_pkg::*;
#(
  parameter int unsigned Z       = Z_DEF,
  parameter int unsigned W       = QSO,
  parameter bit          INVERSE = 1'b0
) (
  input  logic [SHIFT_W:0]   z_size,
  input  logic [SHIFT_W-1:0] shift,
  input  logic [Z*W-1:0]     din,
  output logic [Z*W-1:0]     dout
);

  always_comb begin
    for (int unsigned r = 0; r < Z; r++) begin
      int unsigned idx;
      if (r >= int'(z_size))  idx = r;
      else if (INVERSE)       idx = r + int'(z_size) - int'(shift);
      else                    idx = r + int'(shift);
      if (idx >= int'(z_size) && r < int'(z_size)) idx = idx - int'(z_size);
      if (idx >= Z) idx = r;
      dout[r*W +: W] = din[idx*W +: W];
    end
  end

endmodule
