// tb_ldpc_decoder -- end-to-end test of the decoder at reduced size (Z = 16 lanes, up
// to 24 block columns and 12 layers), with two instances run at SO path latencies t = 5
// and t = 9 (the second is one of the two latencies the schedule study evaluates), and
// lifting sizes 16 and 12 (a smaller lifting size than the build's lane count).
// For each scenario it loads a scheduling sequence with read/write orders and channel
// LLRs, decodes, reads every block column back and compares all SO values with a
// sequential layered decoder using the same arithmetic. It also checks idle_cycles and
// the decode latency against the closed-form idle-cycle count where that applies, and
// counts how often each mechanism of the pipeline occurred: memory-conflict idle cycles,
// bank-limit stalls, write-backs waiting for the previous layer, reads overlapping
// write-backs, SO saturation, multi-iteration decoding and decoding of noisy words.
module tb_ldpc_decoder;
  import ldpc_pkg::*;
  import ldpc_tb_pkg::*;
  localparam int Z = 16, NCOL = 24, NLAYER = 12, EMAX = 96, DMAX = 8, NBANK = 4;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_hdr = 0, llr_we = 0, out_rd_en = 0;
  logic [E_W-1:0] cfg_addr = '0;
  logic [CFG_W-1:0] cfg_wdata = '0;
  logic [COL_W-1:0] llr_col = '0, out_rd_col = '0;
  logic [Z*QSO-1:0] llr_data = '0;
  logic [L_W:0] n_layers = '0;
  logic [7:0] n_iter = '0;
  logic [SHIFT_W:0] z_size = '0;
  logic [4:0] t_lat = '0;
  logic start_a = 0, start_b = 0;
  logic busy_a, busy_b, done_a, done_b;
  logic [Z*QSO-1:0] so_a, so_b;
  logic [Z-1:0] hard_a, hard_b;
  logic [31:0] idle_a, idle_b;
  logic sc_a, sb_a, sc_b, sb_b;

  ldpc_decoder #(.Z(Z), .NCOL(NCOL), .NLAYER(NLAYER), .EMAX(EMAX), .DMAX(DMAX), .NBANK(NBANK)) dut_a (
    .clk, .rst_n, .cfg_we, .cfg_hdr, .cfg_addr, .cfg_wdata, .llr_we, .llr_col, .llr_data,
    .start(start_a), .n_layers, .n_iter, .z_size, .t_lat, .busy(busy_a), .done(done_a),
    .out_rd_en, .out_rd_col, .out_so(so_a), .out_hard(hard_a),
    .idle_cycles(idle_a), .stall_conflict(sc_a), .stall_bank(sb_a));

  ldpc_decoder #(.Z(Z), .NCOL(NCOL), .NLAYER(NLAYER), .EMAX(EMAX), .DMAX(DMAX), .NBANK(NBANK)) dut_b (
    .clk, .rst_n, .cfg_we, .cfg_hdr, .cfg_addr, .cfg_wdata, .llr_we, .llr_col, .llr_data,
    .start(start_b), .n_layers, .n_iter, .z_size, .t_lat, .busy(busy_b), .done(done_b),
    .out_rd_en, .out_rd_col, .out_so(so_b), .out_hard(hard_b),
    .idle_cycles(idle_b), .stall_conflict(sc_b), .stall_bank(sb_b));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  // mechanism counters
  int m_conflict = 0, m_bank = 0, m_wbwait = 0, m_overlap = 0, m_sat = 0, m_iter = 0, m_fixed = 0;

  function automatic bit wb_waiting(logic [NBANK-1:0] complete, logic [BANK_W-1:0] wb,
                                    logic [31:0] now, logic [31:0] r0, logic [31:0] r1,
                                    logic [31:0] r2, logic [31:0] r3);
    logic [31:0] ra[4];
    ra = '{r0, r1, r2, r3};
    for (int b = 0; b < NBANK; b++)
      if (b != int'(wb) && complete[b] && $signed(now - ra[b]) >= 0) return 1'b1;
    return 1'b0;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (sc_a) m_conflict++;
    if (sc_b) m_conflict++;
    if (sb_a && !sc_a) m_bank++;
    if (sb_b && !sc_b) m_bank++;
    if (dut_a.rd_en && dut_a.wr_valid) m_overlap++;
    if (dut_b.rd_en && dut_b.wr_valid) m_overlap++;
    if (wb_waiting(dut_a.u_cnu.complete, dut_a.u_cnu.wb, dut_a.u_cnu.now, dut_a.u_cnu.ready_at[0],
                   dut_a.u_cnu.ready_at[1], dut_a.u_cnu.ready_at[2], dut_a.u_cnu.ready_at[3])) m_wbwait++;
    if (wb_waiting(dut_b.u_cnu.complete, dut_b.u_cnu.wb, dut_b.u_cnu.now, dut_b.u_cnu.ready_at[0],
                   dut_b.u_cnu.ready_at[1], dut_b.u_cnu.ready_at[2], dut_b.u_cnu.ready_at[3])) m_wbwait++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_code(qc_code c);
    for (int p = 0; p < c.m; p++) begin
      layer_t h;
      h.start = E_W'(c.start[p]);
      h.deg   = K_W'(c.deg(p));
      @(negedge clk);
      cfg_we = 1; cfg_hdr = 1; cfg_addr = E_W'(p); cfg_wdata = CFG_W'(h);
      for (int k = 0; k < c.deg(p); k++) begin
        entry_t e;
        e.col = COL_W'(c.col[p][k]); e.shift = SHIFT_W'(c.shift[p][k]); e.wr_k = K_W'(c.wr_k[p][k]);
        @(negedge clk);
        cfg_hdr = 0; cfg_addr = E_W'(c.start[p] + k); cfg_wdata = CFG_W'(e);
      end
    end
    @(negedge clk);
    cfg_we = 0;
  endtask

  // noisy all-zero codeword: LLR = mean + noise, noise roughly Gaussian with standard
  // deviation sd, both in quarter units
  task automatic make_llr(ref int so[][], input int mean, input int sd);
    so = new[NCOL];
    foreach (so[c]) begin
      so[c] = new[Z];
      foreach (so[c][r]) begin
        int n;
        n = 0;
        for (int i = 0; i < 4; i++) n += $urandom_range(200) - 100;   // ~ N(0, 115^2)
        so[c][r] = sat(mean + (n * sd) / 115, 127);
      end
    end
  endtask

  task automatic load_llr(int so[][]);
    for (int c = 0; c < NCOL; c++) begin
      @(negedge clk);
      llr_we = 1; llr_col = COL_W'(c);
      for (int r = 0; r < Z; r++) llr_data[r*QSO +: QSO] = QSO'(so[c][r]);
    end
    @(negedge clk);
    llr_we = 0;
  endtask

  // decode on one instance and compare with the reference
  task automatic decode_check(qc_code c, int so_in[][], int iters, bit use_b, int t, bit exact,
                              string name);
    int ref_so[][];
    int t0, lat, errs_in, errs_out, expect_idle;
    ref_so = new[NCOL];
    foreach (ref_so[col]) ref_so[col] = so_in[col];
    c.decode(ref_so, iters);
    load_llr(so_in);
    @(negedge clk);
    n_layers = (L_W+1)'(c.m); n_iter = 8'(iters); z_size = (SHIFT_W+1)'(c.z); t_lat = 5'(t);
    if (use_b) start_b = 1; else start_a = 1;
    t0 = cyc;
    @(negedge clk);
    start_a = 0; start_b = 0;
    while (!(use_b ? done_b : done_a)) @(negedge clk);
    lat = cyc - t0;
    @(negedge clk);
    errs_in = 0; errs_out = 0;
    for (int col = 0; col < NCOL; col++) begin
      out_rd_en = 1; out_rd_col = COL_W'(col);
      @(negedge clk);
      out_rd_en = 0;
      for (int r = 0; r < c.z; r++) begin
        so_t  g;
        logic h;
        g = use_b ? so_b[r*QSO +: QSO] : so_a[r*QSO +: QSO];
        h = use_b ? hard_b[r] : hard_a[r];
        checks += 2;
        if (int'(g) != ref_so[col][r]) begin
          failures++;
          if (failures < 10) $display("%s: col %0d lane %0d SO %0d, reference %0d", name, col, r, g, ref_so[col][r]);
        end
        if (h != (ref_so[col][r] < 0)) failures++;
        if (so_in[col][r] < 0) errs_in++;
        if (ref_so[col][r] < 0) errs_out++;
        if (ref_so[col][r] == 127 || ref_so[col][r] == -127) m_sat++;
      end
    end
    if (iters > 1) m_iter++;
    if (errs_in > 0 && errs_out < errs_in) m_fixed++;
    $display("%s: T=%0d, %0d iterations, latency %0d cycles, idle cycles %0d, hard errors %0d -> %0d",
             name, t, iters, lat, use_b ? idle_b : idle_a, errs_in, errs_out);
    if (exact) begin
      expect_idle = iters * c.n_idle(t) - c.idle_weight(c.m - 1, 0, t);
      checks += 2;
      if (int'(use_b ? idle_b : idle_a) != expect_idle) begin
        failures++; $display("%s: idle cycles %0d, closed form %0d", name, use_b ? idle_b : idle_a, expect_idle);
      end
      if (lat != iters * c.edges() + expect_idle + t + c.deg(c.m - 1)) begin
        failures++; $display("%s: latency %0d, expected %0d", name, lat, iters * c.edges() + expect_idle + t + c.deg(c.m - 1));
      end
    end
  endtask

  qc_code code;
  int llr[][];

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1) four regular layers, only adjacent layers share columns: closed form exact
    code = new(Z, NCOL, 4);
    code.col[0] = '{0, 1, 2, 3, 4, 5};
    code.col[1] = '{3, 4, 5, 6, 7, 8};
    code.col[2] = '{8, 9, 10, 11, 12, 13};
    code.col[3] = '{11, 12, 13, 14, 0, 1};
    for (int p = 0; p < 4; p++) begin
      code.shift[p] = new[6];
      foreach (code.shift[p][i]) code.shift[p][i] = $urandom_range(Z - 1);
    end
    code.make_orders();
    load_code(code);
    make_llr(llr, 12, 8);
    decode_check(code, llr, 3, 0, 5, 1, "regular/T5");
    make_llr(llr, 12, 10);
    decode_check(code, llr, 2, 1, 9, 0, "regular/T9");

    // 2) random irregular code, layers sorted by degree (smallest first)
    code = new(Z, NCOL, 12);
    for (int p = 0; p < 12; p++) code.random_layer(p, 3 + p / 2);
    code.make_orders();
    load_code(code);
    for (int n = 0; n < 3; n++) begin
      make_llr(llr, 12, 12 - 3 * n);
      decode_check(code, llr, 1 + n, 0, 5, 0, "irregular/T5");
      make_llr(llr, 12, 12 - 3 * n);
      decode_check(code, llr, 1 + n, 1, 9, 0, "irregular/T9");
    end

    // 3) disjoint short layers with T = 9: more layers in flight than banks
    code = new(12, NCOL, 8);
    for (int p = 0; p < 8; p++) begin
      code.col[p] = '{3*p, 3*p + 1, 3*p + 2};
      code.shift[p] = '{$urandom_range(11), $urandom_range(11), $urandom_range(11)};
    end
    code.make_orders();
    load_code(code);
    make_llr(llr, 60, 40);
    decode_check(code, llr, 2, 1, 9, 0, "disjoint/T9");

    $display("mechanisms: conflict idle %0d, bank stall %0d, write-back wait %0d, read/write overlap %0d, SO saturation %0d, multi-iteration %0d, words improved %0d",
             m_conflict, m_bank, m_wbwait, m_overlap, m_sat, m_iter, m_fixed);
    checks += 7;
    if (m_conflict == 0) begin failures++; $display("conflict idle cycles never happened"); end
    if (m_bank == 0)     begin failures++; $display("bank stall never happened"); end
    if (m_wbwait == 0)   begin failures++; $display("write-back wait never happened"); end
    if (m_overlap == 0)  begin failures++; $display("read/write overlap never happened"); end
    if (m_sat == 0)      begin failures++; $display("SO saturation never happened"); end
    if (m_iter == 0)     begin failures++; $display("multi-iteration never happened"); end
    if (m_fixed == 0)    begin failures++; $display("no noisy word was improved"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
