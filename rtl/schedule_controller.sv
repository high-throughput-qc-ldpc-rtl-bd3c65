// schedule_controller -- walks the scheduling sequence and issues the block-column reads
// of the pipelined layered decoder, inserting idle cycles on memory conflicts.
//
// After `start` it reads, for n_iter iterations, the positions 0 .. n_layers-1 of the
// scheduling sequence and, for each, the layer's entries in read order: one SO word and
// one C2V word per cycle. A column that has been read by a layer is "pending" until its
// updated value has been written back to the SO memory; a scoreboard of one bit per block
// column records this. When the next column to read is pending, reading it would return a
// stale value (the memory conflict), so the controller waits: each such cycle is an idle
// cycle and is counted in idle_cycles. A read in the cycle after the write of that column
// is allowed. With the check node unit writing a layer back t cycles after its last read,
// this gives max(t - (d_cur - common), 0) idle cycles between two adjacent layers, where
// common is the number of columns they share, provided the shared columns are read last
// and written first (the order the schedule memory is loaded with).
// A second reason to wait is a layer whose check node unit bank is still being written
// back (at most NBANK layers in flight); these cycles count as idle cycles too and are
// flagged apart on stall_bank. Neither case arises for t up to the smallest layer degree
// when adjacent layers' degrees do not fall.
//
// Interface: start is a one-cycle pulse while idle. rd_en/rd_col/rd_eaddr address the
// memories; tag_valid/tag carry the read's side information one cycle later, aligned
// with the memories' read data. wr_valid/wr_col clear the scoreboard; bank_done frees a
// bank. done pulses for one cycle when every layer of the last iteration is written back.
// The scheduling sequence itself comes from the host; the scoreboard and bank handling
// are this design's way of producing the idle cycles the schedule study counts.
// rd_col is the entry's column as the schedule memory holds it; the controller only
// gates it with rd_en. Lint reports rst_n as used both asynchronously and
// synchronously: the synchronous use is the `disable iff` of the assertions below,
// which is not logic.
module schedule_controller
  import ldpc_pkg::*;
#(
  parameter int unsigned NCOL  = NCOL_DEF,
  parameter int unsigned NBANK = NBANK_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [L_W:0]      n_layers,
  input  logic [7:0]        n_iter,
  output logic              busy,
  output logic              done,
  // schedule memory
  output logic [L_W-1:0]    hdr_addr,
  input  layer_t            hdr,
  output logic [E_W-1:0]    ent_addr,
  input  entry_t            ent,
  // memory reads
  output logic              rd_en,
  output logic [COL_W-1:0]  rd_col,
  output logic [E_W-1:0]    rd_eaddr,
  output logic              tag_valid,
  output rd_tag_t           tag,
  // write-back from the check node unit
  input  logic              wr_valid,
  input  logic [COL_W-1:0]  wr_col,
  input  logic              bank_done,
  input  logic [BANK_W-1:0] bank_done_id,
  // statistics
  output logic [31:0]       idle_cycles,
  output logic              stall_conflict,
  output logic              stall_bank
);

  logic              running, issuing;
  logic [L_W-1:0]    pos;
  logic [K_W-1:0]    k;
  logic [7:0]        iter;
  logic [BANK_W-1:0] bank;
  logic [NCOL-1:0]   pending;
  logic [NBANK-1:0]  bank_busy;
  logic              last_k, last_pos, last_iter;

  assign hdr_addr = pos;
  assign ent_addr = hdr.start + E_W'(k);

  assign last_k    = (k == hdr.deg - K_W'(1));
  assign last_pos  = ({1'b0, pos} == n_layers - 1'b1);
  assign last_iter = (iter == n_iter - 8'd1);

  assign stall_conflict = issuing && pending[ent.col];
  assign stall_bank     = issuing && (k == '0) && bank_busy[bank];
  assign rd_en          = issuing && !stall_conflict && !stall_bank;
  assign rd_col         = ent.col;
  assign rd_eaddr       = ent_addr;

  assign busy = running;
  assign done = running && !issuing && (bank_busy == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running     <= 1'b0;
      issuing     <= 1'b0;
      pos         <= '0;
      k           <= '0;
      iter        <= '0;
      bank        <= '0;
      pending     <= '0;
      bank_busy   <= '0;
      idle_cycles <= '0;
      tag_valid   <= 1'b0;
      tag         <= '0;
    end else begin
      tag_valid <= rd_en;
      if (rd_en) begin
        tag.bank  <= bank;
        tag.k     <= k;
        tag.col   <= ent.col;
        tag.shift <= ent.shift;
        tag.eaddr <= ent_addr;
        tag.wr_k  <= ent.wr_k;
        tag.last  <= last_k;
      end

      if (start && !running) begin
        running     <= 1'b1;
        issuing     <= (n_layers != '0) && (n_iter != '0);
        pos         <= '0;
        k           <= '0;
        iter        <= '0;
        // bank is not reset here: it stays in step with the check node unit's
        // write-back pointer, which also carries on from the previous decode
        pending     <= '0;
        bank_busy   <= '0;
        idle_cycles <= '0;
      end else begin
        if (done) running <= 1'b0;

        // write-back frees columns and banks
        if (wr_valid)  pending[wr_col]         <= 1'b0;
        if (bank_done) bank_busy[bank_done_id] <= 1'b0;

        if (issuing && !rd_en) idle_cycles <= idle_cycles + 32'd1;

        if (rd_en) begin
          pending[ent.col] <= 1'b1;
          if (k == '0) bank_busy[bank] <= 1'b1;
          if (last_k) begin
            k    <= '0;
            bank <= (int'(bank) == NBANK - 1) ? '0 : bank + BANK_W'(1);
            if (last_pos) begin
              pos <= '0;
              if (last_iter) issuing <= 1'b0;
              else           iter    <= iter + 8'd1;
            end else begin
              pos <= pos + L_W'(1);
            end
          end else begin
            k <= k + K_W'(1);
          end
        end
      end
    end
  end

  initial begin
    assert (NCOL <= (1 << COL_W)) else $error("NCOL too large for COL_W");
    assert (NBANK <= (1 << BANK_W)) else $error("NBANK too large for BANK_W");
  end

  // a pending column is never read, a written column was pending
  assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !pending[rd_col]);
  assert property (@(posedge clk) disable iff (!rst_n) wr_valid |-> pending[wr_col]);
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !running);

endmodule
