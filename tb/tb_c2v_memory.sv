// tb_c2v_memory -- random reads and writes against a model; the model returns zero for
// an edge not written since the last clear. Clears are issued in between.
module tb_c2v_memory;
  import ldpc_pkg::*;
  localparam int Z = 4, EMAX = 40;
  logic clk = 0, rst_n = 0, clear, rd_en, wr_en;
  logic [E_W-1:0] rd_addr, wr_addr;
  logic [Z*QC2V-1:0] rd_data, wr_data;
  logic [Z*QC2V-1:0] model [EMAX];
  bit               mvalid [EMAX];
  logic [Z*QC2V-1:0] expect_q;
  logic             chk_q;
  int checks = 0, failures = 0, zeros = 0;

  c2v_memory #(.Z(Z), .EMAX(EMAX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; rd_en = 0; wr_en = 0; rd_addr = '0; wr_addr = '0; wr_data = '0; chk_q = 0;
    foreach (mvalid[e]) mvalid[e] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (chk_q) begin
        checks++;
        if (rd_data !== expect_q) begin failures++; $display("read mismatch at %0d", n); end
      end
      clear   = (n % 500 == 250);
      rd_en   = 1'($urandom);
      rd_addr = E_W'($urandom_range(EMAX - 1));
      wr_en   = !clear && ($urandom_range(3) == 0);
      wr_addr = E_W'($urandom_range(EMAX - 1));
      wr_data = Z*QC2V'($urandom);
      chk_q   = rd_en;
      if (rd_en) begin
        expect_q = (mvalid[rd_addr] && !clear) ? model[rd_addr] : '0;
        if (!(mvalid[rd_addr] && !clear)) zeros++;
      end
      if (clear) foreach (mvalid[e]) mvalid[e] = 0;
      if (wr_en) begin model[wr_addr] = wr_data; mvalid[wr_addr] = 1; end
    end
    checks++;
    if (zeros == 0) begin failures++; $display("zero start never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
