// schedule_memory -- the scheduling sequence and the code description, as the decoder
// walks them.
//
// A scheduling sequence is the order in which the layers are updated within one
// iteration; the same order is used in every iteration. The header table has one entry
// per position of that sequence (not per layer of the code): where its entries start and
// the layer's degree. The entry table holds, position after position, the block columns of
// the scheduled layer in the order they are read, with their circulant shifts, and in
// field wr_k the write-back order (write slot k takes read slot wr_k). Because read and
// write-back orders depend on the neighbouring layers of the sequence, both are computed
// by the host together with the sequence: columns shared with the previous layer are read
// last, columns shared with the next layer are written first. The entry address doubles
// as the edge's address in the C2V memory.
//
// Host port: one write per cycle, cfg_hdr selects the header table. The decoder reads both
// tables combinationally (they are small register files). Writes are ignored while
// `lock` is high, i.e. while a decode runs.
module schedule_memory
  import ldpc_pkg::*;
#(
  parameter int unsigned NLAYER = NLAYER_DEF,
  parameter int unsigned EMAX   = EMAX_DEF
) (
  input  logic             clk,
  input  logic             lock,
  input  logic             cfg_we,
  input  logic             cfg_hdr,
  input  logic [E_W-1:0]   cfg_addr,
  input  logic [CFG_W-1:0] cfg_wdata,
  input  logic [L_W-1:0]   hdr_addr,
  output layer_t           hdr,
  input  logic [E_W-1:0]   ent_addr,
  output entry_t           ent
);

  layer_t hdr_mem [NLAYER];
  entry_t ent_mem [EMAX];

  always_ff @(posedge clk) begin
    if (cfg_we && !lock) begin
      if (cfg_hdr) begin
        if (int'(cfg_addr) < NLAYER) hdr_mem[cfg_addr[L_W-1:0]] <= layer_t'(cfg_wdata[$bits(layer_t)-1:0]);
      end else begin
        if (int'(cfg_addr) < EMAX) ent_mem[cfg_addr] <= entry_t'(cfg_wdata[$bits(entry_t)-1:0]);
      end
    end
  end

  assign hdr = (int'(hdr_addr) < NLAYER) ? hdr_mem[hdr_addr] : '0;
  assign ent = (int'(ent_addr) < EMAX)   ? ent_mem[ent_addr] : '0;

  initial begin
    assert (NLAYER <= (1 << L_W)) else $error("NLAYER too large for L_W");
    assert (EMAX <= (1 << E_W)) else $error("EMAX too large for E_W");
  end

endmodule
