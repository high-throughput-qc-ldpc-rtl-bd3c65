// tb_cyclic_shifter -- drives the rotator at the full lane count (Z = 384) with random
// lifting sizes z (384, 96 and others) and at a small odd lane count, with random words
// and shifts, and checks every lane against out[r] = in[(r + s) mod z] for r < z and
// out[r] = in[r] above, and the inverse rotation against the forward one.
module tb_cyclic_shifter;
  import ldpc_pkg::*;
  localparam int Z1 = 384, Z2 = 13, W = 8;
  logic [SHIFT_W-1:0] s1, s2;
  logic [SHIFT_W:0]   zs1, zs2;
  int small_z = 0;
  logic [Z1*W-1:0] a1, f1, b1;
  logic [Z2*W-1:0] a2, f2, b2;
  int checks = 0, failures = 0;

  cyclic_shifter #(.Z(Z1), .W(W), .INVERSE(1'b0)) u_f1 (.z_size(zs1), .shift(s1), .din(a1), .dout(f1));
  cyclic_shifter #(.Z(Z1), .W(W), .INVERSE(1'b1)) u_b1 (.z_size(zs1), .shift(s1), .din(f1), .dout(b1));
  cyclic_shifter #(.Z(Z2), .W(W), .INVERSE(1'b0)) u_f2 (.z_size(zs2), .shift(s2), .din(a2), .dout(f2));
  cyclic_shifter #(.Z(Z2), .W(W), .INVERSE(1'b1)) u_b2 (.z_size(zs2), .shift(s2), .din(f2), .dout(b2));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 60; n++) begin
      for (int r = 0; r < Z1; r++) a1[r*W +: W] = W'($urandom);
      for (int r = 0; r < Z2; r++) a2[r*W +: W] = W'($urandom);
      zs1 = (n % 3 == 0) ? (SHIFT_W+1)'(Z1) : (n % 3 == 1) ? (SHIFT_W+1)'(96)
                                           : (SHIFT_W+1)'($urandom_range(Z1, 2));
      zs2 = (SHIFT_W+1)'(Z2);
      if (zs1 < (SHIFT_W+1)'(Z1)) small_z++;
      s1 = (n < 3) ? SHIFT_W'(n) : SHIFT_W'($urandom_range(int'(zs1) - 1));
      s2 = (n < 3) ? SHIFT_W'(Z2 - 1 - n) : SHIFT_W'($urandom_range(Z2 - 1));
      #1;
      for (int r = 0; r < Z1; r++) begin
        checks++;
        if (r < int'(zs1)) begin
          if (f1[r*W +: W] !== a1[((r + int'(s1)) % int'(zs1))*W +: W]) failures++;
        end else begin
          if (f1[r*W +: W] !== a1[r*W +: W]) failures++;
        end
      end
      for (int r = 0; r < Z2; r++) begin
        checks++;
        if (f2[r*W +: W] !== a2[((r + int'(s2)) % Z2)*W +: W]) failures++;
      end
      checks += 2;
      if (b1 !== a1) begin failures++; $display("inverse mismatch Z=%0d s=%0d", Z1, s1); end
      if (b2 !== a2) begin failures++; $display("inverse mismatch Z=%0d s=%0d", Z2, s2); end
    end
    checks++;
    if (small_z == 0) begin failures++; $display("no lifting size below the lane count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
