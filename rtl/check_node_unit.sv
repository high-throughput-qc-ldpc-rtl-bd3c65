// check_node_unit -- layer processor of the pipelined layered decoder: gathers the V2C
// messages of a layer, evaluates the check-node rule and writes the layer back.
//
// How it works. The schedule controller reads one block column per cycle, and one cycle
// later its Z V2C messages (already rotated into check-row order) arrive here with a tag
// naming the layer's bank, the read slot k and what is needed to write the column back.
// For every lane the unit stores the message in the bank and adds phi(|V2C|) to a
// per-lane sum, while an XOR keeps the parity of the signs. When the layer's last column
// has arrived, the bank is complete. Write-back then produces, one column per cycle,
//     |C2V_k| = phi( sum - phi(|V2C_k|) ),  sign(C2V_k) = parity xor sign(V2C_k),
//     SO_k    = sat( V2C_k + C2V_k ),
// which is the tanh rule of belief propagation written in the phi domain, followed by the
// layered SO update. Columns leave in the layer's write order, not its read order: slot j
// of the write-back takes read slot ord[j], so columns that the next layer needs can be
// written first.
//
// Timing. If the last column of a layer was read in cycle R, its first column is written
// back in cycle R + t (t_lat, the SO data path latency) and the others follow one per
// cycle, unless the previous layer's write-back still occupies the write port; layers
// are written back strictly in order. The write outputs are combinational from the bank
// and are captured by the memories at the end of the write cycle. t_lat must be at
// least 2 (the cycles the data path itself needs); larger values hold the result back,
// so one build can behave as a pipeline of any SO path latency up to 31.
// NBANK layers can be in flight at once; the controller does not start a layer whose bank
// is still busy and learns from bank_done when a bank becomes free.
//
// The check-node rule is the paper's (Eq. 2); keeping all V2C messages of NBANK layers,
// the phi-domain arithmetic, the word lengths and the bank scheme are this design's.
// Lint reports rst_n as used both asynchronously and synchronously: the synchronous
// use is the `disable iff` of the assertions, which is not logic.
module check_node_unit
  import ldpc_pkg::*;
#(
  parameter int unsigned Z     = Z_DEF,
  parameter int unsigned DMAX  = DMAX_DEF,
  parameter int unsigned NBANK = NBANK_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [4:0]          t_lat,
  // V2C messages of one block column
  input  logic                in_valid,
  input  rd_tag_t             in_tag,
  input  logic [Z*QSO-1:0]    in_v2c,
  // write-back of one block column (rotated lane order)
  output logic                wr_valid,
  output logic [COL_W-1:0]    wr_col,
  output logic [SHIFT_W-1:0]  wr_shift,
  output logic [E_W-1:0]      wr_eaddr,
  output logic [Z*QSO-1:0]    wr_so,
  output logic [Z*QC2V-1:0]   wr_c2v,
  // a bank has been written back completely (pulse with the bank number)
  output logic                bank_done,
  output logic [BANK_W-1:0]   bank_done_id
);

  localparam int signed VMAX = (1 << (QSO - 1)) - 1;
  localparam int unsigned MMAX = (1 << QMAG) - 1;

  // ---- bank storage --------------------------------------------------------------
  logic [Z*QSO-1:0]   vbuf  [NBANK][DMAX];
  logic [COL_W-1:0]   mcol  [NBANK][DMAX];
  logic [SHIFT_W-1:0] mshift[NBANK][DMAX];
  logic [E_W-1:0]     meaddr[NBANK][DMAX];
  logic [K_W-1:0]     ord   [NBANK][DMAX];
  logic [K_W-1:0]     deg   [NBANK];
  logic [Z*QSUM-1:0]  acc   [NBANK];
  logic [Z-1:0]       par   [NBANK];
  logic [NBANK-1:0]   complete;
  logic [31:0]        ready_at [NBANK];
  logic [31:0]        now;

  // ---- input side: phi of the incoming magnitudes -------------------------------------
  logic [Z*QMAG-1:0] in_mag, in_phi;

  always_comb begin
    for (int unsigned r = 0; r < Z; r++) begin
      int signed v;
      so_t       sv;
      sv = in_v2c[r*QSO +: QSO];
      v  = int'(sv);
      if (v < 0) v = -v;
      in_mag[r*QMAG +: QMAG] = (v > int'(MMAX)) ? QMAG'(MMAX) : QMAG'(v);
    end
  end

  for (genvar r = 0; r < Z; r++) begin : g_in_phi
    phi_lut u_phi (.x(in_mag[r*QMAG +: QMAG]), .y(in_phi[r*QMAG +: QMAG]));
  end

  // ---- write-back side -------------------------------------------------------------------
  logic [BANK_W-1:0] wb;       // bank being written back
  logic [K_W-1:0]    wj;       // write slot
  logic [K_W-1:0]    wk;       // read slot it takes
  logic              wr_go;
  logic [Z*QMAG-1:0] out_mag, out_phi, ext_mag, ext_phi;

  assign wk    = ord[wb][wj];
  assign wr_go = complete[wb] && ($signed(now - ready_at[wb]) >= 0);

  always_comb begin
    for (int unsigned r = 0; r < Z; r++) begin
      int signed v;
      so_t       sv;
      sv = vbuf[wb][wk][r*QSO +: QSO];
      v  = int'(sv);
      if (v < 0) v = -v;
      out_mag[r*QMAG +: QMAG] = (v > int'(MMAX)) ? QMAG'(MMAX) : QMAG'(v);
    end
  end

  for (genvar r = 0; r < Z; r++) begin : g_out_phi
    phi_lut u_phi_own (.x(out_mag[r*QMAG +: QMAG]), .y(out_phi[r*QMAG +: QMAG]));
    phi_lut u_phi_ext (.x(ext_mag[r*QMAG +: QMAG]), .y(ext_phi[r*QMAG +: QMAG]));
  end

  // extrinsic sum: everything but the lane's own contribution
  always_comb begin
    for (int unsigned r = 0; r < Z; r++) begin
      int signed s;
      s = int'(acc[wb][r*QSUM +: QSUM]) - int'(out_phi[r*QMAG +: QMAG]);
      ext_mag[r*QMAG +: QMAG] = (s > int'(MMAX)) ? QMAG'(MMAX) : QMAG'(s);
    end
  end

  always_comb begin
    for (int unsigned r = 0; r < Z; r++) begin
      int signed v, c, so;
      logic      neg;
      so_t       sv;
      sv  = vbuf[wb][wk][r*QSO +: QSO];
      v   = int'(sv);
      neg = par[wb][r] ^ (v < 0);
      c   = neg ? -int'(ext_phi[r*QMAG +: QMAG]) : int'(ext_phi[r*QMAG +: QMAG]);
      so  = v + c;
      if (so > VMAX)       so = VMAX;
      else if (so < -VMAX) so = -VMAX;
      wr_c2v[r*QC2V +: QC2V] = QC2V'(c);
      wr_so [r*QSO  +: QSO ] = QSO'(so);
    end
  end

  assign wr_valid     = wr_go;
  assign wr_col       = mcol  [wb][wk];
  assign wr_shift     = mshift[wb][wk];
  assign wr_eaddr     = meaddr[wb][wk];
  assign bank_done    = wr_go && (wj == deg[wb] - K_W'(1));
  assign bank_done_id = wb;

  // ---- state ------------------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (in_valid) begin
      vbuf  [in_tag.bank][in_tag.k] <= in_v2c;
      mcol  [in_tag.bank][in_tag.k] <= in_tag.col;
      mshift[in_tag.bank][in_tag.k] <= in_tag.shift;
      meaddr[in_tag.bank][in_tag.k] <= in_tag.eaddr;
      ord   [in_tag.bank][in_tag.k] <= in_tag.wr_k;
      for (int unsigned r = 0; r < Z; r++) begin
        if (in_tag.k == '0) begin
          acc[in_tag.bank][r*QSUM +: QSUM] <= QSUM'(in_phi[r*QMAG +: QMAG]);
          par[in_tag.bank][r]              <= in_v2c[r*QSO + QSO - 1];
        end else begin
          acc[in_tag.bank][r*QSUM +: QSUM] <= acc[in_tag.bank][r*QSUM +: QSUM]
                                              + QSUM'(in_phi[r*QMAG +: QMAG]);
          par[in_tag.bank][r]              <= par[in_tag.bank][r] ^ in_v2c[r*QSO + QSO - 1];
        end
      end
      if (in_tag.last) begin
        deg     [in_tag.bank] <= in_tag.k + K_W'(1);
        ready_at[in_tag.bank] <= now + 32'(t_lat) - 32'd1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now      <= '0;
      complete <= '0;
      wb       <= '0;
      wj       <= '0;
    end else begin
      now <= now + 32'd1;
      if (in_valid && in_tag.last) complete[in_tag.bank] <= 1'b1;
      if (wr_go) begin
        if (bank_done) begin
          complete[wb] <= 1'b0;
          wj           <= '0;
          wb           <= (int'(wb) == NBANK - 1) ? '0 : wb + BANK_W'(1);
        end else begin
          wj <= wj + K_W'(1);
        end
      end
    end
  end

  // ---- rules of the interface ---------------------------------------------------------------
  initial begin
    assert (NBANK <= (1 << BANK_W)) else $error("NBANK too large for BANK_W");
    assert (DMAX < (1 << K_W)) else $error("DMAX too large for K_W");
  end

  // the data path needs two cycles from the last read to the first write-back
  assert property (@(posedge clk) disable iff (!rst_n) in_valid && in_tag.last |-> t_lat >= 5'd2);
  // a layer is never started in a bank that still waits for write-back
  assert property (@(posedge clk) disable iff (!rst_n)
                   in_valid && in_tag.k == '0 |-> !complete[in_tag.bank]);
  assert property (@(posedge clk) disable iff (!rst_n)
                   in_valid |-> int'(in_tag.k) < DMAX && int'(in_tag.bank) < NBANK);

endmodule
