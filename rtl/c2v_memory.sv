// c2v_memory -- check-to-variable message memory of the layered decoder.
//
// One word per non-zero circulant of the base graph (an "edge") holds the Z C2V
// messages of that edge, in the rotated (check-row) lane order. Layered decoding reads
// the old message of an edge when the layer's V2C messages are formed and writes the new
// one when the layer is written back. Belief propagation starts with all C2V messages at
// zero; rather than writing every word, a one-cycle `clear` resets a valid bit per edge,
// and a read of an edge that has not been written since returns zero.
// Ports: one synchronous read (rd_data one cycle after rd_en), one write, same cycle
// allowed; a read and a write of the same edge in one cycle return the old value.
// Widths are this design's choice; the zero start follows the BP definition.
module c2v_memory
  import ldpc_pkg::*;
#(
  parameter int unsigned Z    = Z_DEF,
  parameter int unsigned EMAX = EMAX_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              rd_en,
  input  logic [E_W-1:0]    rd_addr,
  output logic [Z*QC2V-1:0] rd_data,
  input  logic              wr_en,
  input  logic [E_W-1:0]    wr_addr,
  input  logic [Z*QC2V-1:0] wr_data
);

  logic [Z*QC2V-1:0] mem [EMAX];
  logic [EMAX-1:0]   valid;
  logic [Z*QC2V-1:0] rd_word;
  logic              rd_valid;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
    end else if (clear) begin
      valid <= '0;
    end else if (wr_en) begin
      valid[wr_addr] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_word  <= mem[rd_addr];
      rd_valid <= valid[rd_addr] && !clear;
    end
  end

  assign rd_data = rd_valid ? rd_word : '0;

  initial assert (EMAX <= (1 << E_W)) else $error("EMAX too large for E_W");

endmodule
