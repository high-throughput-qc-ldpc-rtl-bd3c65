// tb_v2c_unit -- random SO and C2V words, including the saturation corners, checked lane
// by lane against sat(so - c2v, +-127).
module tb_v2c_unit;
  import ldpc_pkg::*;
  localparam int Z = 16;
  logic [Z*QSO-1:0] so, v2c;
  logic [Z*QC2V-1:0] c2v;
  int checks = 0, failures = 0, nsat = 0;

  v2c_unit #(.Z(Z)) dut (.so_in(so), .c2v_in(c2v), .v2c_out(v2c));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      for (int r = 0; r < Z; r++) begin
        int a, b;
        a = $urandom_range(254) - 127;
        b = $urandom_range(62) - 31;
        if (n % 10 == 0) begin a = (r % 2) ? 127 : -127; b = (r % 2) ? -31 : 31; end
        so[r*QSO +: QSO]    = QSO'(a);
        c2v[r*QC2V +: QC2V] = QC2V'(b);
      end
      #1;
      for (int r = 0; r < Z; r++) begin
        int e, g;
        so_t sv, gv;
        c2v_t cv;
        sv = so[r*QSO +: QSO];
        cv = c2v[r*QC2V +: QC2V];
        gv = v2c[r*QSO +: QSO];
        e = int'(sv) - int'(cv);
        g = int'(gv);
        if (e > 127) begin e = 127; nsat++; end
        if (e < -127) begin e = -127; nsat++; end
        checks++;
        if (g != e) begin
          failures++;
          if (failures < 5) $display("lane %0d got %0d expected %0d", r, g, e);
        end
      end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
