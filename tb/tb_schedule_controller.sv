// tb_schedule_controller -- runs the controller against a behavioural write-back that
// returns each layer's columns T cycles after its last read, in write order and one per
// cycle, after the previous layer. Checks that reads follow the scheduling sequence and
// the read order, that no column is read while its previous read is still waiting for
// write-back, that idle_cycles equals the idle cycles observed, and for a code whose
// non-adjacent layers share no columns, that it equals the closed form
//   iters * n_idle - w(last -> first),  n_idle = sum_p max(T - (d_p - common(p-1, p)), 0),
// and that done comes iters*E + idle + T + d_last cycles after start.
// A second run with long T and short layers makes the bank limit stall the reads. The
// last runs take the two-layer example of the pipeline timing (degrees 6 and 5, two
// common columns) at T = 3 and T = 4.
module tb_schedule_controller;
  import ldpc_pkg::*;
  import ldpc_tb_pkg::*;
  localparam int NCOL = 24, NBANK = 4;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [L_W:0] n_layers;
  logic [7:0] n_iter;
  logic [L_W-1:0] hdr_addr;
  layer_t hdr;
  logic [E_W-1:0] ent_addr;
  entry_t ent;
  logic rd_en, tag_valid;
  logic [COL_W-1:0] rd_col;
  logic [E_W-1:0] rd_eaddr;
  rd_tag_t tag;
  logic wr_valid = 0, bank_done = 0;
  logic [COL_W-1:0] wr_col = '0;
  logic [BANK_W-1:0] bank_done_id = '0;
  logic [31:0] idle_cycles;
  logic stall_conflict, stall_bank;

  schedule_controller #(.NCOL(NCOL), .NBANK(NBANK)) dut (.*);

  always #5 clk = ~clk;

  layer_t hmem [64];
  entry_t emem [512];
  assign hdr = hmem[hdr_addr];
  assign ent = emem[ent_addr];

  int checks = 0, failures = 0, cyc = 0;
  int T;
  int n_conflict = 0, n_bank = 0;
  int bank_base = 0;  // the controller's bank pointer carries over between decodes
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (stall_conflict) n_conflict++;
    if (stall_bank && !stall_conflict) n_bank++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural write-back: per layer, its columns in write order
  int wq_col[$], wq_due[$], wq_last[$], wq_bank[$];
  int prev_end;
  bit pend[NCOL];
  int seen_idle;

  qc_code code;

  task automatic load(qc_code c);
    for (int p = 0; p < c.m; p++) begin
      hmem[p].start = E_W'(c.start[p]);
      hmem[p].deg   = K_W'(c.deg(p));
      for (int k = 0; k < c.deg(p); k++) begin
        emem[c.start[p] + k].col   = COL_W'(c.col[p][k]);
        emem[c.start[p] + k].shift = '0;
        emem[c.start[p] + k].wr_k  = K_W'(c.wr_k[p][k]);
      end
    end
  endtask

  // drives the write-back at negedges and checks the reads
  task automatic run(qc_code c, int iters, int t, bit exact);
    int p, k, it, t0, expect_idle, lastdeg;
    int lay_cols[$];
    T = t; p = 0; k = 0; it = 0; seen_idle = 0; prev_end = -1;
    foreach (pend[i]) pend[i] = 0;
    wq_col.delete(); wq_due.delete(); wq_last.delete(); wq_bank.delete();
    @(negedge clk);
    n_layers = (L_W+1)'(c.m); n_iter = 8'(iters); start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) begin
      // write-back of this cycle
      wr_valid = 0; bank_done = 0;
      if (wq_due.size() > 0 && wq_due[0] <= cyc) begin
        wr_valid = 1; wr_col = COL_W'(wq_col[0]);
        bank_done = wq_last[0] >= 0; bank_done_id = BANK_W'(wq_bank[0]);
        if (wq_last[0] >= 0) prev_end = cyc;
        void'(wq_col.pop_front()); void'(wq_due.pop_front());
        void'(wq_last.pop_front()); void'(wq_bank.pop_front());
        if (wq_due.size() > 0 && wq_due[0] <= cyc) wq_due[0] = cyc + 1;
      end
      #1;
      if (busy && !rd_en && (p < c.m)) seen_idle++;
      if (rd_en) begin
        checks += 2;
        if (int'(rd_col) != c.col[p][k] || int'(rd_eaddr) != c.start[p] + k) begin
          failures++;
          $display("read %0d/%0d: col %0d addr %0d, expected %0d %0d", p, k, rd_col, rd_eaddr, c.col[p][k], c.start[p] + k);
        end
        if (pend[rd_col]) begin failures++; $display("column %0d read while pending", rd_col); end
        pend[rd_col] = 1;
        lay_cols.push_back(int'(rd_col));
        k++;
        if (k == c.deg(p)) begin
          // queue this layer's write-back: due T cycles after this (last) read
          int due;
          due = cyc + t;
          if (wq_due.size() > 0) begin
            if (due <= wq_due[$] + (wq_col.size() > 0 ? 0 : 0)) due = wq_due[$] + 1;
          end else if (due <= prev_end) due = prev_end + 1;
          for (int j = 0; j < c.deg(p); j++) begin
            wq_col.push_back(c.col[p][c.wr_k[p][j]]);
            wq_due.push_back((j == 0) ? due : 0);
            wq_last.push_back((j == c.deg(p) - 1) ? 0 : -1);
            wq_bank.push_back((bank_base + (it * c.m) + p) % NBANK);
          end
          lay_cols.delete();
          k = 0; p++;
          if (p == c.m) begin p = 0; it++; if (it == iters) p = c.m; end
        end
      end
      if (wr_valid) pend[wr_col] = 0;
      @(negedge clk);
    end
    wr_valid = 0; bank_done = 0;
    checks++;
    if (int'(idle_cycles) != seen_idle) begin
      failures++; $display("idle_cycles %0d, observed %0d", idle_cycles, seen_idle);
    end
    bank_base = (bank_base + iters * c.m) % NBANK;
    if (exact) begin
      expect_idle = iters * c.n_idle(t) - c.idle_weight(c.m - 1, 0, t);
      lastdeg = c.deg(c.m - 1);
      checks += 2;
      if (int'(idle_cycles) != expect_idle) begin
        failures++; $display("idle_cycles %0d, closed form %0d", idle_cycles, expect_idle);
      end
      if (cyc - t0 != iters * c.edges() + expect_idle + t + lastdeg) begin
        failures++;
        $display("latency %0d, expected %0d", cyc - t0, iters * c.edges() + expect_idle + t + lastdeg);
      end
      $display("T=%0d: n_idle per iteration %0d, idle cycles over %0d iterations %0d", t, c.n_idle(t), iters, idle_cycles);
    end
  endtask

  initial begin
    n_layers = '0; n_iter = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1) four layers of degree 6; adjacent layers share 3, 1, 3 and 2 columns, others none
    code = new(4, NCOL, 4);
    code.col[0] = '{0, 1, 2, 3, 4, 5};
    code.col[1] = '{3, 4, 5, 6, 7, 8};
    code.col[2] = '{8, 9, 10, 11, 12, 13};
    code.col[3] = '{11, 12, 13, 14, 0, 1};
    for (int p = 0; p < 4; p++) begin
      code.shift[p] = new[6];
      foreach (code.shift[p][i]) code.shift[p][i] = 0;
    end
    code.make_orders();
    load(code);
    run(code, 3, 5, 1);
    run(code, 2, 2, 1);
    run(code, 2, 6, 1);

    // 2) random irregular code, long latency, short layers: bank stalls
    code = new(4, NCOL, 10);
    for (int p = 0; p < 10; p++) code.random_layer(p, (p < 6) ? 3 : $urandom_range(8, 3));
    code.make_orders();
    load(code);
    run(code, 3, 12, 0);

    // 3) eight disjoint layers of degree 3 and T = 12: no conflicts, but more than
    //    NBANK layers would be in flight, so the bank limit stalls the reads
    code = new(4, NCOL, 8);
    for (int p = 0; p < 8; p++) begin
      code.col[p] = '{3*p, 3*p + 1, 3*p + 2};
      code.shift[p] = '{0, 0, 0};
    end
    code.make_orders();
    load(code);
    run(code, 2, 12, 0);

    // 4) the pipeline timing example: layer 1 reads v1..v6, layer 2 reads v7 v8 v9 v1 v2.
    //    The closed form gives max(3 - (5 - 2), 0) = 0 idle cycles at t = 3 and 1 at
    //    t = 4; the figure of the example, which counts t one cycle differently, shows
    //    the single idle cycle at t = 3.
    code = new(4, NCOL, 2);
    code.col[0] = '{0, 1, 2, 3, 4, 5};
    code.col[1] = '{6, 7, 8, 0, 1};
    code.shift[0] = '{0, 0, 0, 0, 0, 0};
    code.shift[1] = '{0, 0, 0, 0, 0};
    code.make_orders();
    load(code);
    run(code, 1, 3, 0);
    checks++;
    if (idle_cycles != 0) begin failures++; $display("timing example, t=3: %0d idle cycles, expected 0", idle_cycles); end
    run(code, 1, 4, 0);
    checks++;
    if (idle_cycles != 1) begin failures++; $display("timing example, t=4: %0d idle cycles, expected 1", idle_cycles); end

    checks += 2;
    if (n_conflict == 0) begin failures++; $display("no conflict stall"); end
    if (n_bank == 0) begin failures++; $display("no bank stall"); end
    $display("conflict stall cycles %0d, bank stall cycles %0d", n_conflict, n_bank);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
