// ldpc_decoder -- pipelined layered belief-propagation decoder for QC-LDPC codes whose
// layer update order (scheduling sequence) is loaded by the host.
//
// Data path, one block column (Z lanes) per cycle:
//   schedule_controller -> SO memory read + C2V memory read
//   -> cyclic_shifter (rotate into check-row order) -> v2c_unit (SO - old C2V)
//   -> check_node_unit (gather the layer, phi-domain check-node rule)
//   -> C2V memory write + cyclic_shifter (rotate back) -> SO memory write.
// Reads of the current layer and write-backs of the previous one overlap; a layer's
// first write-back happens t cycles (the SO data path latency) after its last read.
// When the next column to read is still waiting for its write-back, the controller
// inserts idle cycles and counts them, so idle_cycles reports the cost of the loaded
// scheduling sequence directly.
//
// Use: with the decoder idle, load the schedule memory through cfg_* (headers with
// cfg_hdr = 1, entries with cfg_hdr = 0) and the channel LLRs through llr_* (one block
// column per cycle, natural lane order, signed QSO-bit values with 2 fractional bits,
// positive meaning bit 0). Pulse start with n_layers (positions of the scheduling
// sequence), n_iter (iterations), z_size (lifting size, 1 .. Z) and t_lat (SO path
// latency t in cycles, 2 .. 31); they are captured at start. busy stays high until the
// one-cycle done pulse.
// Afterwards out_rd_en/out_rd_col read back a block column: out_so and out_hard (1 =
// bit decided as 1) are valid the cycle after. Host loads and reads are ignored while
// busy. The number of iterations is fixed; there is no early termination.
//
// From the schedule study: layered BP with a host-chosen scheduling sequence, the
// overlapped read/write pipeline with SO path latency t, and idle cycles on memory
// conflicts. This design's own: the fixed-point formats, the phi-domain check-node
// arithmetic, the memories, the NBANK-layer check node unit, run-time z and t, and the
// host interface. Lint reports rst_n as used both asynchronously and synchronously:
// the synchronous use is the `disable iff` of assertions in the submodules.
module ldpc_decoder
  import ldpc_pkg::*;
#(
  parameter int unsigned Z      = Z_DEF,
  parameter int unsigned NCOL   = NCOL_DEF,
  parameter int unsigned NLAYER = NLAYER_DEF,
  parameter int unsigned EMAX   = EMAX_DEF,
  parameter int unsigned DMAX   = DMAX_DEF,
  parameter int unsigned NBANK  = NBANK_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration: scheduling sequence and code description
  input  logic              cfg_we,
  input  logic              cfg_hdr,
  input  logic [E_W-1:0]    cfg_addr,
  input  logic [CFG_W-1:0]  cfg_wdata,
  // channel LLR load
  input  logic              llr_we,
  input  logic [COL_W-1:0]  llr_col,
  input  logic [Z*QSO-1:0]  llr_data,
  // control
  input  logic              start,
  input  logic [L_W:0]      n_layers,
  input  logic [7:0]        n_iter,
  input  logic [SHIFT_W:0]  z_size,
  input  logic [4:0]        t_lat,
  output logic              busy,
  output logic              done,
  // result read-back
  input  logic              out_rd_en,
  input  logic [COL_W-1:0]  out_rd_col,
  output logic [Z*QSO-1:0]  out_so,
  output logic [Z-1:0]      out_hard,
  // idle cycles of the last decode, and the two reasons for the current one
  output logic [31:0]       idle_cycles,
  output logic              stall_conflict,
  output logic              stall_bank
);

  // ---- control ------------------------------------------------------------------
  layer_t            hdr;
  entry_t            ent;
  logic [L_W-1:0]    hdr_addr;
  logic [E_W-1:0]    ent_addr;
  logic              rd_en, tag_valid;
  logic [COL_W-1:0]  rd_col;
  logic [E_W-1:0]    rd_eaddr;
  rd_tag_t           tag;
  logic              wr_valid, bank_done;
  logic [COL_W-1:0]  wr_col;
  logic [SHIFT_W-1:0] wr_shift;
  logic [E_W-1:0]    wr_eaddr;
  logic [BANK_W-1:0] bank_done_id;

  schedule_memory #(.NLAYER(NLAYER), .EMAX(EMAX)) u_sched_mem (
    .clk, .lock(busy), .cfg_we, .cfg_hdr, .cfg_addr, .cfg_wdata,
    .hdr_addr, .hdr, .ent_addr, .ent
  );

  schedule_controller #(.NCOL(NCOL), .NBANK(NBANK)) u_ctrl (
    .clk, .rst_n, .start, .n_layers, .n_iter, .busy, .done,
    .hdr_addr, .hdr, .ent_addr, .ent,
    .rd_en, .rd_col, .rd_eaddr, .tag_valid, .tag,
    .wr_valid, .wr_col, .bank_done, .bank_done_id,
    .idle_cycles, .stall_conflict, .stall_bank
  );

  // lifting size and latency of the running decode
  logic [SHIFT_W:0] z_q;
  logic [4:0]       t_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z_q <= (SHIFT_W+1)'(Z);
      t_q <= 5'(T_DEF);
    end else if (start && !busy) begin
      z_q <= z_size;
      t_q <= t_lat;
    end
  end

  // ---- memories -----------------------------------------------------------------
  logic [Z*QSO-1:0]  so_rdata, so_wdata, so_rot, v2c, wr_so;
  logic [Z*QC2V-1:0] c2v_rdata, wr_c2v;
  logic              so_re, so_we;
  logic [COL_W-1:0]  so_raddr, so_waddr;

  assign so_re    = busy ? rd_en    : out_rd_en;
  assign so_raddr = busy ? rd_col   : out_rd_col;
  assign so_we    = busy ? wr_valid : llr_we;
  assign so_waddr = busy ? wr_col   : llr_col;

  so_memory #(.Z(Z), .NCOL(NCOL)) u_so_mem (
    .clk, .rd_en(so_re), .rd_addr(so_raddr), .rd_data(so_rdata),
    .wr_en(so_we), .wr_addr(so_waddr), .wr_data(busy ? so_wdata : llr_data)
  );

  c2v_memory #(.Z(Z), .EMAX(EMAX)) u_c2v_mem (
    .clk, .rst_n, .clear(start && !busy),
    .rd_en, .rd_addr(rd_eaddr), .rd_data(c2v_rdata),
    .wr_en(wr_valid), .wr_addr(wr_eaddr), .wr_data(wr_c2v)
  );

  // ---- SO data path ---------------------------------------------------------------
  cyclic_shifter #(.Z(Z), .W(QSO), .INVERSE(1'b0)) u_rot (
    .z_size(z_q), .shift(tag.shift), .din(so_rdata), .dout(so_rot)
  );

  v2c_unit #(.Z(Z)) u_v2c (
    .so_in(so_rot), .c2v_in(c2v_rdata), .v2c_out(v2c)
  );

  check_node_unit #(.Z(Z), .DMAX(DMAX), .NBANK(NBANK)) u_cnu (
    .clk, .rst_n, .t_lat(t_q),
    .in_valid(tag_valid), .in_tag(tag), .in_v2c(v2c),
    .wr_valid, .wr_col, .wr_shift, .wr_eaddr, .wr_so, .wr_c2v,
    .bank_done, .bank_done_id
  );

  cyclic_shifter #(.Z(Z), .W(QSO), .INVERSE(1'b1)) u_unrot (
    .z_size(z_q), .shift(wr_shift), .din(wr_so), .dout(so_wdata)
  );

  // ---- read-back ----------------------------------------------------------------------
  assign out_so = so_rdata;
  always_comb begin
    for (int unsigned r = 0; r < Z; r++) out_hard[r] = so_rdata[r*QSO + QSO - 1];
  end

endmodule
