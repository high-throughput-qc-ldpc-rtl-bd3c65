// tb_check_node_unit -- feeds layers of random V2C messages (random degree, random write
// order, gaps between columns and between layers) into a small check node unit and checks
// every write-back: its column, shift and edge address, the C2V and SO values against the
// check-node rule evaluated with real-valued phi, and its cycle: the first column of a
// layer must leave exactly T cycles after the layer's last read, or right after the
// previous layer's write-back if that is later, and the rest one per cycle. The latency
// T is changed between layers (2, 4 and 9).
module tb_check_node_unit;
  import ldpc_pkg::*;
  import ldpc_tb_pkg::*;
  localparam int Z = 8, DMAX = 6, NBANK = 4, NL = 60;

  logic clk = 0, rst_n = 0;
  logic [4:0] t_lat;
  logic in_valid;
  rd_tag_t in_tag;
  logic [Z*QSO-1:0] in_v2c, wr_so;
  logic wr_valid, bank_done;
  logic [COL_W-1:0] wr_col;
  logic [SHIFT_W-1:0] wr_shift;
  logic [E_W-1:0] wr_eaddr;
  logic [Z*QC2V-1:0] wr_c2v;
  logic [BANK_W-1:0] bank_done_id;

  check_node_unit #(.Z(Z), .DMAX(DMAX), .NBANK(NBANK)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int deg[NL], col[NL][DMAX], sh[NL][DMAX], wk[NL][DMAX], v[NL][DMAX][Z];
  int rlast[NL];               // cycle of the layer's last read
  int tl[NL];                  // SO path latency the layer is given
  bit bank_busy[NBANK];
  int queued_waits = 0;        // layers whose write-back waited for the previous one

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stimulus
  initial begin
    in_valid = 0; in_tag = '0; in_v2c = '0; t_lat = 5'd4;
    foreach (bank_busy[b]) bank_busy[b] = 0;
    for (int l = 0; l < NL; l++) begin
      deg[l] = (l % 10 < 5) ? DMAX : $urandom_range(DMAX, 2);
      tl[l]  = (l < 20) ? 4 : (l < 40) ? 9 : 2;
      for (int k = 0; k < deg[l]; k++) begin
        col[l][k] = l * 8 + k;
        sh[l][k]  = $urandom_range(Z - 1);
        wk[l][k]  = k;
        for (int r = 0; r < Z; r++) begin
          v[l][k][r] = $urandom_range(254) - 127;
          if ($urandom_range(3) == 0) v[l][k][r] = $urandom_range(16) - 8;
        end
      end
      for (int k = deg[l] - 1; k > 0; k--) begin
        int j, tmp;
        j = $urandom_range(k); tmp = wk[l][k];
        wk[l][k] = wk[l][j]; wk[l][j] = tmp;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      int b;
      b = l % NBANK;
      while (bank_busy[b]) @(negedge clk);
      bank_busy[b] = 1;
      for (int k = 0; k < deg[l]; k++) begin
        @(negedge clk);
        in_valid     = 1;
        in_tag.bank  = BANK_W'(b);
        in_tag.k     = K_W'(k);
        in_tag.col   = COL_W'(col[l][k] % 128);
        in_tag.shift = SHIFT_W'(sh[l][k]);
        in_tag.eaddr = E_W'(l * DMAX + k);
        in_tag.wr_k  = K_W'(wk[l][k]);
        in_tag.last  = (k == deg[l] - 1);
        for (int r = 0; r < Z; r++) in_v2c[r*QSO +: QSO] = QSO'(v[l][k][r]);
        if (in_tag.last) begin rlast[l] = cyc - 1; t_lat = 5'(tl[l]); end
        if (l % 7 == 3 && k == 1) begin @(negedge clk); in_valid = 0; end
      end
      @(negedge clk);
      in_valid = 0;
      if (l % 5 == 0) repeat ($urandom_range(6)) @(negedge clk);
    end
  end

  // checker
  initial begin
    int prev_end;
    prev_end = -1;
    @(posedge rst_n);
    for (int l = 0; l < NL; l++) begin
      int s[Z];
      bit p[Z];
      int due;
      for (int r = 0; r < Z; r++) begin
        s[r] = 0; p[r] = 0;
        for (int k = 0; k < deg[l]; k++) begin
          int a;
          a = (v[l][k][r] < 0) ? -v[l][k][r] : v[l][k][r];
          s[r] += phi_ref((a > 31) ? 31 : a);
          p[r] = p[r] ^ (v[l][k][r] < 0);
        end
      end
      for (int j = 0; j < deg[l]; j++) begin
        int k;
        k = wk[l][j];
        @(negedge clk);
        while (!wr_valid) @(negedge clk);
        if (j == 0) begin
          due = rlast[l] + tl[l];
          if (prev_end + 1 > due) begin due = prev_end + 1; queued_waits++; end
          checks++;
          if (cyc != due) begin
            failures++;
            $display("layer %0d: first write in cycle %0d, expected %0d", l, cyc, due);
          end
        end
        checks += 4;
        if (int'(wr_col) != col[l][k] % 128) begin failures++; $display("layer %0d slot %0d: column %0d", l, j, wr_col); end
        if (int'(wr_shift) != sh[l][k]) failures++;
        if (int'(wr_eaddr) != l * DMAX + k) failures++;
        if (bank_done != (j == deg[l] - 1)) failures++;
        for (int r = 0; r < Z; r++) begin
          int a, x, mg, c, so;
          c2v_t gc;
          so_t  gs;
          a  = (v[l][k][r] < 0) ? -v[l][k][r] : v[l][k][r];
          x  = s[r] - phi_ref((a > 31) ? 31 : a);
          mg = phi_ref((x > 31) ? 31 : x);
          c  = (p[r] ^ (v[l][k][r] < 0)) ? -mg : mg;
          so = sat(v[l][k][r] + c, 127);
          gc = wr_c2v[r*QC2V +: QC2V];
          gs = wr_so[r*QSO +: QSO];
          checks += 2;
          if (int'(gc) != c) begin
            failures++;
            if (failures < 10) $display("layer %0d slot %0d lane %0d: c2v %0d expected %0d", l, j, r, gc, c);
          end
          if (int'(gs) != so) failures++;
        end
        if (j == deg[l] - 1) begin
          prev_end = cyc;
          bank_busy[l % NBANK] = 0;
        end
      end
    end
    checks++;
    if (queued_waits == 0) begin failures++; $display("write-back queueing never exercised"); end
    $display("layers %0d, write-backs that waited for the previous layer %0d", NL, queued_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
