// v2c_unit -- forms the variable-to-check messages of one block column.
//
// In layered decoding the soft output of a variable node is the channel LLR plus all
// incoming C2V messages, so the V2C message toward the current check row is the soft
// output minus that row's old C2V message (the layered form of the V2C rule). This unit
// does it for the Z lanes of one block column in one go: v2c[r] = sat(so[r] - c2v[r]),
// saturated to the SO width (-127 .. 127, keeping the range symmetric).
// The SO input must already be rotated into check-row order. Combinational.
module v2c_unit
  import ldpc_pkg::*;
#(
  parameter int unsigned Z = Z_DEF
) (
  input  logic [Z*QSO-1:0]  so_in,
  input  logic [Z*QC2V-1:0] c2v_in,
  output logic [Z*QSO-1:0]  v2c_out
);

  localparam int signed VMAX = (1 << (QSO - 1)) - 1;

  always_comb begin
    for (int unsigned r = 0; r < Z; r++) begin
      int signed diff;
      so_t       sv;
      c2v_t      cv;
      sv   = so_in[r*QSO +: QSO];
      cv   = c2v_in[r*QC2V +: QC2V];
      diff = int'(sv) - int'(cv);
      if (diff > VMAX)       diff = VMAX;
      else if (diff < -VMAX) diff = -VMAX;
      v2c_out[r*QSO +: QSO] = QSO'(diff);
    end
  end

endmodule
