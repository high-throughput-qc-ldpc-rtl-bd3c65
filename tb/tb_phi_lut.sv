// tb_phi_lut -- checks all 32 entries of the phi table against -ln(tanh(x/2))
// evaluated in real arithmetic and rounded to quarter units.
module tb_phi_lut;
  import ldpc_tb_pkg::*;
  logic [4:0] x, y;
  int checks = 0, failures = 0;

  phi_lut dut (.x, .y);

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++) begin
      x = 5'(i);
      #1;
      checks++;
      if (int'(y) != phi_ref(i)) begin
        failures++;
        $display("phi(%0d): got %0d expected %0d", i, y, phi_ref(i));
      end
    end
    // phi is (close to) its own inverse: phi(phi(x)) ~ x for mid-range x
    for (int i = 2; i < 6; i++) begin
      checks++;
      if ((phi_ref(phi_ref(i)) - i) > 1 || (i - phi_ref(phi_ref(i))) > 1) begin
        failures++;
        $display("phi not an involution at %0d", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
