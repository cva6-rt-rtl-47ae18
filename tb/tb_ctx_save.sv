// tb_ctx_save: checks hardware register stacking: for random register
// masks, exactly the selected registers (never x0) are stored, each at
// base + 8*index with the register's value, in ascending order; with the
// store port always granted n registers take n cycles; with random grants
// the pending mask only loses the register just stored; busy/done behave.
module tb_ctx_save;
  import cva6rt_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, mem_req, mem_gnt, busy, done;
  logic [31:0] mask, pending;
  logic [PLEN-1:0] base, mem_addr;
  logic [4:0] raddr;
  logic [63:0] rdata, wdata;
  logic [7:0] be;
  logic [63:0] rf [32];
  bit grant_always;
  int checks = 0, failures = 0;

  ctx_save #(.NREGS(32)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .mask_i(mask), .base_i(base),
    .rf_raddr_o(raddr), .rf_rdata_i(rdata), .mem_req_o(mem_req), .mem_addr_o(mem_addr),
    .mem_wdata_o(wdata), .mem_be_o(be), .mem_gnt_i(mem_gnt), .busy_o(busy), .done_o(done),
    .pending_o(pending));

  assign rdata = rf[raddr];
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic g_rand;
  always @(posedge clk) g_rand <= $urandom % 2;
  assign mem_gnt = mem_req && (grant_always || g_rand);

  // store monitor
  logic [63:0] stored [logic [PLEN-1:0]];
  int n_stores, last_idx, order_ok, dones;
  always @(posedge clk) if (rst_n) begin
    if (mem_req && mem_gnt) begin
      stored[mem_addr] = wdata;
      if (int'((mem_addr - base) >> 3) <= last_idx) order_ok = 0;
      last_idx = int'((mem_addr - base) >> 3);
      n_stores++;
      if (be != 8'hff) order_ok = 0;
    end
    if (done) dones++;
  end

  task automatic run(logic [31:0] m, bit always_g);
    int cyc = 0;
    grant_always = always_g;
    stored.delete(); n_stores = 0; last_idx = -1; order_ok = 1; dones = 0;
    foreach (rf[i]) rf[i] = {$urandom, $urandom};
    base = 56'h0000_1010_0000 + PLEN'($urandom % 64) * 256;
    @(negedge clk) start = 1; mask = m;
    @(negedge clk) start = 0; mask = '1;
    while (busy) begin @(negedge clk); cyc++; end
    begin
      int expect_n = $countones(m & ~32'h1);
      check(n_stores == expect_n, "number of stores");
      check(order_ok == 1, "ascending order, full words");
      for (int i = 1; i < 32; i++) if (m[i])
        check(stored.exists(base + PLEN'(8 * i)) && stored[base + PLEN'(8 * i)] == rf[i], "register stored at base+8*i");
      check(!stored.exists(base), "x0 never stored");
      check(dones == (expect_n > 0 ? 1 : 0), "done pulses once");
      if (always_g) check(cyc == expect_n, "one register per cycle");
    end
  endtask

  logic [31:0] prev_pending;
  initial begin
    start = 0; mask = 0; base = 0; grant_always = 1;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    check(!busy && !mem_req, "idle after reset");
    run(32'hFFFF_FFFF, 1);
    run(32'h0000_0001, 1);
    run(32'h8000_00F2, 1);
    for (int t = 0; t < 20; t++) run($urandom, t % 2);
    // pending mask shrinks by exactly the stored register
    grant_always = 0;
    @(negedge clk) start = 1; mask = 32'h0F0F_0F0E; @(negedge clk) start = 0;
    check(pending == 32'h0F0F_0F0E, "pending holds the mask after start");
    while (busy) begin
      prev_pending = pending;
      @(posedge clk); #1;
      if (pending != prev_pending) check(pending == (prev_pending & (prev_pending - 1)), "lowest pending register saved");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
