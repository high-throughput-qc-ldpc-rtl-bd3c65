// tb_so_memory -- random simultaneous reads and writes against a model array; checks
// the one-cycle read latency and that a read of the address written in the same cycle
// returns the old word.
module tb_so_memory;
  import ldpc_pkg::*;
  localparam int Z = 4, NCOL = 20;
  logic clk = 0, rd_en, wr_en;
  logic [COL_W-1:0] rd_addr, wr_addr;
  logic [Z*QSO-1:0] rd_data, wr_data;
  logic [Z*QSO-1:0] model [NCOL];
  logic [Z*QSO-1:0] expect_q;
  logic             chk_q;
  int checks = 0, failures = 0, same = 0;

  so_memory #(.Z(Z), .NCOL(NCOL)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; wr_en = 0; rd_addr = '0; wr_addr = '0; wr_data = '0; chk_q = 0;
    // fill
    for (int c = 0; c < NCOL; c++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = COL_W'(c); wr_data = {$urandom, $urandom};
      model[c] = wr_data;
    end
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      if (chk_q) begin
        checks++;
        if (rd_data !== expect_q) begin failures++; $display("read mismatch at %0d", n); end
      end
      rd_en   = 1'($urandom);
      rd_addr = COL_W'($urandom_range(NCOL - 1));
      wr_en   = 1'($urandom);
      wr_addr = (n % 7 == 0) ? rd_addr : COL_W'($urandom_range(NCOL - 1));
      wr_data = {$urandom, $urandom};
      chk_q   = rd_en;
      if (rd_en) expect_q = model[rd_addr];
      if (rd_en && wr_en && rd_addr == wr_addr) same++;
      if (wr_en) model[wr_addr] = wr_data;
    end
    checks++;
    if (same == 0) begin failures++; $display("same-address case never hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
