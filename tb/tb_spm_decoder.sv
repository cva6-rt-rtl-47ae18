// tb_spm_decoder: checks the SPM window decode against arithmetic done in
// the testbench: inside/outside the window for every SPM way count, and the
// way, set and byte offset of random addresses inside it.
module tb_spm_decoder;
  import cva6rt_pkg::*;
  localparam logic [PLEN-1:0] BASE = 56'h0000_1000_0000;
  logic [PLEN-1:0] paddr;
  logic [3:0] nways;
  logic is_spm;
  logic [2:0] way;
  logic [7:0] set;
  logic [3:0] off;
  int checks = 0, failures = 0;

  spm_decoder #(.WAYS(8), .WAY_BYTES(4096), .LINE_BYTES(16), .SPM_BASE(BASE)) dut (
    .paddr_i(paddr), .spm_ways_i(nways), .is_spm_o(is_spm), .way_o(way), .set_o(set), .off_o(off));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s addr=%h n=%0d", what, paddr, nways); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n <= 8; n++) begin
      nways = 4'(n);
      paddr = BASE - 1;                     #1 check(!is_spm, "below window");
      paddr = BASE;                         #1 check(is_spm == (n > 0), "window start");
      paddr = BASE + PLEN'(n * 4096) - 1;   #1 check(n == 0 || (is_spm && way == 3'(n - 1)), "last byte");
      paddr = BASE + PLEN'(n * 4096);       #1 check(!is_spm, "first byte past window");
    end
    for (int t = 0; t < 1000; t++) begin
      automatic int unsigned rel = $urandom % (10 * 4096);
      nways = 4'($urandom % 9);
      paddr = BASE + PLEN'(rel);
      #1;
      check(is_spm == (rel < nways * 4096), "inside test");
      if (is_spm) check(way == 3'(rel / 4096) && set == 8'((rel % 4096) / 16) && off == 4'(rel % 16),
                        "way/set/offset");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
