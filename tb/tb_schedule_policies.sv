// tb_schedule_policies -- the scheduling policies of the schedule study, run on the
// decoder at its default size (Z = 384, 68 block columns, 46 layers).
//
// A random stand-in code with the dimensions of 5G NR base graph 1 at R = 1/3,
// K = 8448 (46 layers of degree 5, 6 and 19, 316 circulants; columns 0 and 1 are the
// punctured ones) is given three scheduling sequences:
//   LD                ascending layer degree, layers of equal degree by index;
//   idle              least idle cycles, found by a travelling-salesman search over all
//                     orders;
//   idle&performance  least idle cycles among the orders that visit the groups of equal
//                     (degree, punctured connections) in ascending order.
// The searches run in the testbench (schedule_search in ldpc_tb_pkg). For t = 4 and
// t = 9 the test checks that the closed-form idle cycles obey idle <= idle&performance
// <= the group-sorted start, and that the idle&performance sequence visits the groups
// in ascending order. It loads each sequence into the decoder and decodes one noisy
// word for two iterations. For each decode it compares every SO value with the reference
// decoder, checks the decode time against the idle cycles the decoder counted, checks
// that idle&performance needed no more idle cycles than LD, and prints the counted idle
// cycles next to the closed-form count. Consecutive decodes of 46 layers also exercise
// the bank pointer carrying over from one decode to the next.
module tb_schedule_policies;
  import ldpc_pkg::*;
  import ldpc_tb_pkg::*;
  localparam int Z = Z_DEF, NCOL = NCOL_DEF, M = NLAYER_DEF, ITERS = 2;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_hdr = 0, llr_we = 0, out_rd_en = 0, start = 0;
  logic [E_W-1:0] cfg_addr = '0;
  logic [CFG_W-1:0] cfg_wdata = '0;
  logic [COL_W-1:0] llr_col = '0, out_rd_col = '0;
  logic [Z*QSO-1:0] llr_data = '0, out_so;
  logic [L_W:0] n_layers = '0;
  logic [7:0] n_iter = '0;
  logic [SHIFT_W:0] z_size = '0;
  logic [4:0] t_lat = '0;
  logic busy, done, stall_conflict, stall_bank;
  logic [Z-1:0] out_hard;
  logic [31:0] idle_cycles;

  ldpc_decoder dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Decode with the layers visited in the order ord; returns the idle cycles counted.
  task automatic run_sequence(string name, qc_code base, int ord[], int t, output int idle);
    qc_code code;
    int llr[][], ref_so[][];
    int t0, lat;

    code = base.permuted(ord);
    code.make_orders();

    for (int p = 0; p < M; p++) begin
      layer_t h;
      h.start = E_W'(code.start[p]); h.deg = K_W'(code.deg(p));
      @(negedge clk);
      cfg_we = 1; cfg_hdr = 1; cfg_addr = E_W'(p); cfg_wdata = CFG_W'(h);
      for (int k = 0; k < code.deg(p); k++) begin
        entry_t e;
        e.col = COL_W'(code.col[p][k]); e.shift = SHIFT_W'(code.shift[p][k]); e.wr_k = K_W'(code.wr_k[p][k]);
        @(negedge clk);
        cfg_hdr = 0; cfg_addr = E_W'(code.start[p] + k); cfg_wdata = CFG_W'(e);
      end
    end
    @(negedge clk);
    cfg_we = 0;

    llr = new[NCOL];
    ref_so = new[NCOL];
    foreach (llr[c]) begin
      llr[c] = new[Z];
      foreach (llr[c][r]) begin
        int n;
        n = 0;
        for (int i = 0; i < 4; i++) n += $urandom_range(200) - 100;
        llr[c][r] = sat(12 + (n * 8) / 115, 127);
      end
      ref_so[c] = llr[c];
    end
    code.decode(ref_so, ITERS);

    for (int c = 0; c < NCOL; c++) begin
      @(negedge clk);
      llr_we = 1; llr_col = COL_W'(c);
      for (int r = 0; r < Z; r++) llr_data[r*QSO +: QSO] = QSO'(llr[c][r]);
    end
    @(negedge clk);
    llr_we = 0;

    n_layers = (L_W+1)'(M); n_iter = 8'(ITERS); start = 1;
    z_size = (SHIFT_W+1)'(Z); t_lat = 5'(t);
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    lat = cyc - t0;
    $display("%s: decoded in %0d cycles", name, lat);
    @(negedge clk);

    for (int c = 0; c < NCOL; c++) begin
      out_rd_en = 1; out_rd_col = COL_W'(c);
      @(negedge clk);
      out_rd_en = 0;
      for (int r = 0; r < Z; r++) begin
        so_t g;
        g = out_so[r*QSO +: QSO];
        checks++;
        if (int'(g) != ref_so[c][r]) begin
          failures++;
          if (failures < 10) $display("%s: col %0d lane %0d SO %0d, reference %0d", name, c, r, g, ref_so[c][r]);
        end
      end
    end
    idle = int'(idle_cycles);
    checks++;
    if (lat != ITERS * code.edges() + idle + t + code.deg(M - 1)) begin
      failures++;
      $display("%s: latency %0d, expected %0d", name, lat, ITERS * code.edges() + idle + t + code.deg(M - 1));
    end
  endtask

  initial begin
    qc_code base;
    int ld[], grp_sorted[], ip[], id[];
    int t_val[2];
    t_val = '{4, 9};
    repeat (3) @(negedge clk);
    rst_n = 1;

    base = new(Z, NCOL, M);
    for (int p = 0; p < M; p++) base.random_layer(p, (p < 12) ? 5 : (p < 42) ? 6 : 19);
    checks++;
    if (base.edges() != EMAX_DEF) begin failures++; $display("stand-in code has %0d circulants", base.edges()); end

    // LD: ascending degree, stable
    ld = new[M];
    begin
      int n;
      n = 0;
      for (int d = 1; d < 32; d++)
        for (int p = 0; p < M; p++) if (base.deg(p) == d) ld[n++] = p;
    end

    foreach (t_val[ti]) begin
      schedule_search s_perf, s_idle;
      int t, i_ld, i_ip, i_id, c_ld, c_sorted, c_ip, c_id;
      bit ascending;
      t = t_val[ti];
      s_perf = new(base, t, 1'b1);
      s_idle = new(base, t, 1'b0);
      s_perf.sorted(grp_sorted);
      ip = grp_sorted;
      s_perf.search(ip, 4);
      id = ip;
      s_idle.search(id, 4);

      c_ld = s_idle.idle(ld); c_sorted = s_idle.idle(grp_sorted);
      c_ip = s_idle.idle(ip); c_id = s_idle.idle(id);
      checks += 3;
      if (c_ip > c_sorted) begin failures++; $display("t=%0d: search made the sequence worse", t); end
      if (c_id > c_ip) begin failures++; $display("t=%0d: unconstrained search worse than constrained", t); end
      ascending = 1'b1;
      for (int i = 1; i < M; i++) if (s_perf.grp[ip[i]] < s_perf.grp[ip[i - 1]]) ascending = 1'b0;
      if (!ascending) begin failures++; $display("t=%0d: idle&performance sequence leaves the group order", t); end

      run_sequence($sformatf("LD t=%0d", t), base, ld, t, i_ld);
      run_sequence($sformatf("idle&performance t=%0d", t), base, ip, t, i_ip);
      run_sequence($sformatf("idle t=%0d", t), base, id, t, i_id);
      $display("t=%0d, %0d groups: closed-form idle cycles per iteration LD %0d, idle&performance %0d, idle %0d; decoder counted in %0d iterations %0d, %0d, %0d",
               t, s_perf.n_grp, c_ld, c_ip, c_id, ITERS, i_ld, i_ip, i_id);
      checks++;
      if (i_ip > i_ld) begin failures++; $display("t=%0d: idle&performance needed more idle cycles than LD", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
