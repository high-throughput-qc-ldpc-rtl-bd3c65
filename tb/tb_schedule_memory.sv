// tb_schedule_memory -- writes random headers and entries, reads them back through the
// decoder-side ports, and checks that writes are ignored while the memory is locked.
module tb_schedule_memory;
  import ldpc_pkg::*;
  localparam int NLAYER = 8, EMAX = 30;
  logic clk = 0, lock, cfg_we, cfg_hdr;
  logic [E_W-1:0] cfg_addr, ent_addr;
  logic [CFG_W-1:0] cfg_wdata;
  logic [L_W-1:0] hdr_addr;
  layer_t hdr, mh [NLAYER];
  entry_t ent, me [EMAX];
  int checks = 0, failures = 0;

  schedule_memory #(.NLAYER(NLAYER), .EMAX(EMAX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(bit h, int a, logic [CFG_W-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_hdr = h; cfg_addr = E_W'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    lock = 0; cfg_we = 0; cfg_hdr = 0; cfg_addr = '0; cfg_wdata = '0;
    hdr_addr = '0; ent_addr = '0;
    for (int i = 0; i < NLAYER; i++) begin
      mh[i] = layer_t'($urandom);
      wr(1, i, CFG_W'(mh[i]));
    end
    for (int i = 0; i < EMAX; i++) begin
      me[i] = entry_t'($urandom);
      wr(0, i, CFG_W'(me[i]));
    end
    lock = 1;
    wr(1, 3, CFG_W'(~mh[3]));
    wr(0, 5, CFG_W'(~me[5]));
    lock = 0;
    for (int i = 0; i < NLAYER; i++) begin
      hdr_addr = L_W'(i); #1;
      checks++;
      if (hdr !== mh[i]) begin failures++; $display("header %0d mismatch", i); end
    end
    for (int i = 0; i < EMAX; i++) begin
      ent_addr = E_W'(i); #1;
      checks++;
      if (ent !== me[i]) begin failures++; $display("entry %0d mismatch", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
