// tb_ldpc_decoder_full -- complete decodes with the decoder at its default size (Z = 384
// lanes, 68 block columns, 46 layers, 316 circulants, layer degree up to 19) in the four
// configurations the schedule study evaluates: the 5G NR base graph 1 codes with
// R = 1/3, K = 8448 (lifting size 384, all 68 columns and 46 layers) and R = 1/2, K = 2112
// (lifting size 96, 46 columns and 24 layers), each at SO path latency t = 4 and t = 9.
// The codes are random stand-ins with those dimensions, not the standard's table: the
// large code has four layers of degree 19 and 42 of degree 5 or 6 (316 circulants), the
// small one four of degree 19 and 20 of degree 5 to 7. Layers are scheduled in ascending
// order of degree, the order the study's performance-aware policy keeps.
// Each case loads the schedule and a noisy all-zero codeword, runs two iterations,
// compares every SO value and hard decision with the sequential reference decoder, and
// checks that the decode took iterations * circulants + idle cycles + t + last degree
// cycles and that the idle cycles are at least what the closed-form count charges to
// the pairs of adjacent layers that share a column. The closed form also charges
// max(t - d, 0) to pairs that share none; with t = 9 above the smallest degree the
// decoder, which waits only for real conflicts, can therefore need fewer idle cycles
// than the closed form. Both counts are printed.
module tb_ldpc_decoder_full;
  import ldpc_pkg::*;
  import ldpc_tb_pkg::*;
  localparam int Z = Z_DEF, NCOL = NCOL_DEF, ITERS = 2;

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
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One workload: a stand-in code of m layers over ncol columns at lifting size z,
  // decoded at SO path latency t.
  task automatic run_case(string name, int z, int ncol, int m, int t, bit big);
    qc_code code;
    int llr[][], ref_so[][];
    int t0, lat, bound, formula, errs_in, errs_out, d, e_expect;

    code = new(z, ncol, m);
    for (int p = 0; p < m; p++) begin
      if (big) d = (p < 12) ? 5 : (p < 42) ? 6 : 19;
      else     d = (p < 6) ? 5 : (p < 14) ? 6 : (p < 20) ? 7 : 19;
      code.random_layer(p, d);
    end
    code.make_orders();
    e_expect = big ? EMAX_DEF : (6 * 5 + 8 * 6 + 6 * 7 + 4 * 19);
    checks++;
    if (code.edges() != e_expect) begin
      failures++;
      $display("%s: stand-in code has %0d circulants", name, code.edges());
    end

    for (int p = 0; p < m; p++) begin
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

    // noisy all-zero codeword: LLR mean 3.0, sum of four uniforms for the noise
    llr = new[ncol];
    ref_so = new[ncol];
    foreach (llr[c]) begin
      llr[c] = new[z];
      foreach (llr[c][r]) begin
        int n;
        n = 0;
        for (int i = 0; i < 4; i++) n += $urandom_range(200) - 100;
        llr[c][r] = sat(12 + (n * 8) / 115, 127);
      end
      ref_so[c] = llr[c];
    end
    code.decode(ref_so, ITERS);

    for (int c = 0; c < ncol; c++) begin
      @(negedge clk);
      llr_we = 1; llr_col = COL_W'(c);
      llr_data = '0;
      for (int r = 0; r < z; r++) llr_data[r*QSO +: QSO] = QSO'(llr[c][r]);
    end
    @(negedge clk);
    llr_we = 0;

    n_layers = (L_W+1)'(m); n_iter = 8'(ITERS); start = 1;
    z_size = (SHIFT_W+1)'(z); t_lat = 5'(t);
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    lat = cyc - t0;
    @(negedge clk);

    errs_in = 0; errs_out = 0;
    for (int c = 0; c < ncol; c++) begin
      out_rd_en = 1; out_rd_col = COL_W'(c);
      @(negedge clk);
      out_rd_en = 0;
      for (int r = 0; r < z; r++) begin
        so_t g;
        g = out_so[r*QSO +: QSO];
        checks += 2;
        if (int'(g) != ref_so[c][r]) begin
          failures++;
          if (failures < 10) $display("%s: col %0d lane %0d SO %0d, reference %0d", name, c, r, g, ref_so[c][r]);
        end
        if (out_hard[r] != (ref_so[c][r] < 0)) failures++;
        if (llr[c][r] < 0) errs_in++;
        if (ref_so[c][r] < 0) errs_out++;
      end
    end

    // Pairs of layers with a common column must wait at least the closed-form count;
    // the first iteration has no transition from the last layer into the first.
    bound   = ITERS * code.n_conflict(t) - code.conflict_weight(m - 1, 0, t);
    formula = ITERS * code.n_idle(t) - code.idle_weight(m - 1, 0, t);
    $display("%s: z=%0d, %0d columns, %0d layers, t=%0d, %0d iterations, latency %0d cycles, idle cycles %0d (closed form %0d, of it %0d on pairs with a common column), hard errors %0d -> %0d",
             name, z, ncol, m, t, ITERS, lat, idle_cycles, formula, bound, errs_in, errs_out);
    checks += 3;
    if (int'(idle_cycles) < bound) begin failures++; $display("%s: fewer idle cycles than the conflicts need", name); end
    if (lat != ITERS * code.edges() + int'(idle_cycles) + t + code.deg(m - 1)) begin
      failures++;
      $display("%s: latency %0d, expected %0d", name, lat, ITERS * code.edges() + int'(idle_cycles) + t + code.deg(m - 1));
    end
    if (errs_out > errs_in) begin failures++; $display("%s: decoding made more hard errors", name); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_case("BG1 R=1/3 K=8448 t=4", 384, 68, 46, 4, 1'b1);
    run_case("BG1 R=1/3 K=8448 t=9", 384, 68, 46, 9, 1'b1);
    run_case("BG1 R=1/2 K=2112 t=4",  96, 46, 24, 4, 1'b0);
    run_case("BG1 R=1/2 K=2112 t=9",  96, 46, 24, 9, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
