// so_memory -- soft-output (a-posteriori LLR) memory of the layered decoder.
//
// One word per block column holds the Z soft outputs of that column in natural
// (unrotated) lane order. The pipelined decoder reads the columns of the current layer
// while it writes back the updated columns of an earlier layer, so the memory has one
// read port and one write port that work in the same cycle. The read is synchronous:
// rd_data holds the word addressed in the cycle before rd_en was seen. A read and a write
// of the same address in one cycle return the old word; the schedule controller never
// issues such a read, which is exactly the memory conflict that idle cycles avoid.
// The number of columns and the lane count follow the code; the two-port organisation
// follows the read/write overlap of the pipeline, the rest is this design's choice.
module so_memory
  import ldpc_pkg::*;
#(
  parameter int unsigned Z    = Z_DEF,
  parameter int unsigned NCOL = NCOL_DEF
) (
  input  logic             clk,
  input  logic             rd_en,
  input  logic [COL_W-1:0] rd_addr,
  output logic [Z*QSO-1:0] rd_data,
  input  logic             wr_en,
  input  logic [COL_W-1:0] wr_addr,
  input  logic [Z*QSO-1:0] wr_data
);

  logic [Z*QSO-1:0] mem [NCOL];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

  initial assert (NCOL <= (1 << COL_W)) else $error("NCOL too large for COL_W");

endmodule
