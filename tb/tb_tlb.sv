// tb_tlb: checks translation (4 KiB, 2 MiB, 1 GiB pages, ASID and global
// matching), fills through the replacement logic, partition isolation (a
// task filling only its own partition cannot evict another partition's
// entries), locked entries (never evicted, survive a flush) and dropped
// fills when no partition is enabled. Expected physical addresses are built
// in the testbench from the page-table entries it installs.
module tb_tlb;
  import cva6rt_pkg::*;
  logic clk = 0, rst_n = 0;
  logic flush, lu_access, lu_hit, upd_valid, upd_drop, cfg_we;
  logic [ASID_W-1:0] asid;
  logic [VLEN-1:0] vaddr;
  logic [PLEN-1:0] paddr;
  tlb_entry_t lu_entry, upd_entry, cfg_entry;
  logic [3:0] part_en, cfg_idx;
  logic [4:0] lock_cnt;
  int checks = 0, failures = 0;

  tlb #(.ENTRIES(16), .NUM_PART(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .lu_access_i(lu_access), .lu_asid_i(asid),
    .lu_vaddr_i(vaddr), .lu_hit_o(lu_hit), .lu_paddr_o(paddr), .lu_entry_o(lu_entry),
    .upd_valid_i(upd_valid), .upd_entry_i(upd_entry), .upd_drop_o(upd_drop),
    .part_en_i(part_en), .lock_cnt_i(lock_cnt), .cfg_we_i(cfg_we), .cfg_idx_i(cfg_idx),
    .cfg_entry_i(cfg_entry));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic tlb_entry_t mk(logic [26:0] vpn, logic [43:0] ppn, logic [15:0] a,
                                    bit g = 0, bit m2 = 0, bit g1 = 0);
    tlb_entry_t e = '0;
    e.valid = 1; e.asid = a; e.vpn2 = vpn[26:18]; e.vpn1 = vpn[17:9]; e.vpn0 = vpn[8:0];
    e.ppn = ppn; e.g = g; e.is_2m = m2; e.is_1g = g1; e.r = 1; e.a = 1;
    return e;
  endfunction

  task automatic fill(tlb_entry_t e);
    upd_valid = 1; upd_entry = e; @(posedge clk); #1 upd_valid = 0;
  endtask

  // look up, return hit and address
  task automatic look(logic [38:0] va, logic [15:0] a, output bit h, output logic [55:0] pa);
    vaddr = va; asid = a; lu_access = 1; #1;
    h = lu_hit; pa = paddr;
    @(posedge clk); #1 lu_access = 0;
  endtask

  bit h; logic [55:0] pa;
  initial begin
    flush = 0; lu_access = 0; upd_valid = 0; cfg_we = 0; asid = 0; vaddr = 0;
    upd_entry = '0; cfg_entry = '0; cfg_idx = 0; part_en = 4'hf; lock_cnt = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1; #1;
    look(39'h12345678, 1, h, pa); check(!h, "empty TLB misses");
    // 4 KiB, 2 MiB, 1 GiB and global pages
    fill(mk(27'h0012345, 44'hABCDE, 1));
    fill(mk(27'h0040200, 44'h77000, 1, 0, 1));   // 2 MiB
    fill(mk(27'h1000000, 44'h40000, 1, 0, 0, 1)); // 1 GiB
    fill(mk(27'h0000077, 44'h00123, 5, 1));       // global
    look({27'h0012345, 12'h9a8}, 1, h, pa);
    check(h && pa == {44'hABCDE, 12'h9a8}, "4 KiB translation");
    look({27'h0012345, 12'h9a8}, 2, h, pa);
    check(!h, "other ASID misses");
    look({27'h0040200 | 27'h0000133, 12'h004}, 1, h, pa);
    check(h && pa == {44'h77000 | 44'h133, 12'h004}, "2 MiB translation keeps vpn0");
    look({27'h1000000 | 27'h3_fedc, 12'hfff}, 1, h, pa);
    check(h && pa == {44'h40000 | 44'h3fedc, 12'hfff}, "1 GiB translation keeps vpn1, vpn0");
    look({27'h0000077, 12'h010}, 9, h, pa);
    check(h && pa == {44'h00123, 12'h010}, "global entry matches any ASID");
    // partition isolation: task B owns partition 1, task A partition 0
    flush = 1; @(posedge clk); #1 flush = 0;
    look({27'h0012345, 12'h0}, 1, h, pa); check(!h, "flush clears unlocked entries");
    part_en = 4'b0010;
    for (int i = 0; i < 4; i++) fill(mk(27'h100 + 27'(i), 44'h500 + 44'(i), 2));
    part_en = 4'b0001;
    for (int i = 0; i < 40; i++) begin
      fill(mk(27'h900 + 27'(i), 44'h900 + 44'(i), 3));
      look({27'h900 + 27'(i), 12'h0}, 3, h, pa);
      check(h && pa == {44'h900 + 44'(i), 12'h0}, "partition 0 fill hits");
    end
    for (int i = 0; i < 4; i++) begin
      look({27'h100 + 27'(i), 12'h8}, 2, h, pa);
      check(h && pa == {44'h500 + 44'(i), 12'h8}, "partition 1 entries survive partition 0 fills");
    end
    // only 4 of the 40 partition-0 translations can remain
    begin
      automatic int n = 0;
      for (int i = 0; i < 40; i++) begin look({27'h900 + 27'(i), 12'h0}, 3, h, pa); n += h; end
      check(n == 4, "partition 0 holds exactly 4 entries");
    end
    // locked entry: pinned into slot 0 by software
    cfg_we = 1; cfg_idx = 0; cfg_entry = mk(27'h7777, 44'hCAFE, 4);
    @(posedge clk); #1 cfg_we = 0; lock_cnt = 1; part_en = 4'b0001;
    for (int i = 0; i < 30; i++) fill(mk(27'h2000 + 27'(i), 44'h2000 + 44'(i), 4));
    look({27'h7777, 12'h123}, 4, h, pa);
    check(h && pa == {44'hCAFE, 12'h123}, "locked entry not evicted by fills");
    begin
      automatic int n = 0;
      for (int i = 0; i < 30; i++) begin look({27'h2000 + 27'(i), 12'h0}, 4, h, pa); n += h; end
      check(n == 3, "lock removes one slot from partition 0");
    end
    flush = 1; @(posedge clk); #1 flush = 0;
    look({27'h7777, 12'h0}, 4, h, pa);
    check(h, "locked entry survives flush");
    // locking a whole partition leaves no victim
    lock_cnt = 4; #1;
    upd_valid = 1; upd_entry = mk(27'h5555, 44'h1, 4); #1;
    check(upd_drop, "fill dropped when every allowed entry is locked");
    @(posedge clk); #1 upd_valid = 0;
    look({27'h5555, 12'h0}, 4, h, pa); check(!h, "dropped fill not installed");
    part_en = 4'b0000; lock_cnt = 0; #1;
    upd_valid = 1; #1; check(upd_drop, "fill dropped with no partition");
    @(posedge clk); #1 upd_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
