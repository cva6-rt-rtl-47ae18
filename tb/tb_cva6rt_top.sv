// tb_cva6rt_top: end-to-end test of the real-time extensions at their
// default sizes. Around the top it models what the unchanged core and the
// SoC provide: a page-table walker answering TLB misses from a fixed mapping
// (ppn = vpn + 0x80000), a register file, a commit stage, the CSR state and
// two memories whose contents are a fixed function of the address plus the
// stores written through to them.
//
// Sequence: load handler words into the I-SPM over the SoC port and fetch
// them back at one-cycle latency; fetch through the I-TLB (miss, refill,
// hit) and the I-cache (miss, hit); pin a D-TLB entry, restrict the D-TLB to
// one partition and check the pinned and other-partition entries survive;
// use the D-cache (write-through, miss, hit) and the D-SPM, from the LSU and
// from the SoC port; then raise an
// interrupt and check the 5-cycle path from the source edge to trap entry
// (3 cycles CLIC propagation + 2 cycles injection), the context save into
// the D-SPM (with an LSU access held behind it), preemption by a higher
// level, no preemption by a lower one, tail-chaining on a handler return and
// injection into a virtual guest.
// Each mechanism is counted and must occur at least once.
module tb_cva6rt_top;
  import cva6rt_pkg::*;
  localparam logic [PLEN-1:0] ISPM_BASE = 56'h0000_1000_0000;
  localparam logic [PLEN-1:0] DSPM_BASE = 56'h0000_1010_0000;

  logic clk = 0, rst_n = 0;
  // translation
  logic [ASID_W-1:0] asid;
  logic ixlat_en, dxlat_en, tlb_flush;
  logic [3:0] itlb_part_en, dtlb_part_en;
  logic [4:0] itlb_lock_cnt, dtlb_lock_cnt;
  logic itlb_cfg_we, dtlb_cfg_we, itlb_upd_valid, dtlb_upd_valid, itlb_miss, dtlb_miss;
  logic itlb_drop, dtlb_drop;
  logic [3:0] itlb_cfg_idx, dtlb_cfg_idx;
  tlb_entry_t itlb_cfg_entry, dtlb_cfg_entry, itlb_upd_entry, dtlb_upd_entry, itlb_entry, dtlb_entry;
  // caches
  logic icache_flush, dcache_flush, icache_busy, dcache_busy;
  logic [2:0] ispm_ways;
  logic [3:0] dspm_ways;
  logic [1:0] icache_evt, dcache_evt;
  // fetch / ispm / lsu
  logic fetch_req, fetch_gnt, fetch_rvalid, fetch_spm;
  logic [VLEN-1:0] fetch_vaddr, lsu_vaddr;
  logic [63:0] fetch_rdata, ispm_wdata, ispm_rdata, lsu_wdata, lsu_rdata;
  logic ispm_req, ispm_we, ispm_gnt, ispm_rvalid;
  logic [PLEN-1:0] ispm_addr;
  logic [7:0] ispm_be, lsu_be;
  logic lsu_req, lsu_we, lsu_gnt, lsu_rvalid, lsu_spm;
  logic dspm_req, dspm_we, dspm_gnt, dspm_rvalid;
  logic [PLEN-1:0] dspm_addr;
  logic [63:0] dspm_wdata, dspm_rdata;
  logic [7:0] dspm_be;
  // memories
  logic imem_req, imem_we, imem_gnt, imem_rvalid, dmem_req, dmem_we, dmem_gnt, dmem_rvalid;
  logic [PLEN-1:0] imem_addr, dmem_addr;
  logic [63:0] imem_wdata, dmem_wdata;
  logic [7:0] imem_be, dmem_be;
  logic [127:0] imem_rdata, dmem_rdata;
  // clic
  logic [255:0] intr_src;
  logic clic_req, clic_we;
  logic [15:0] clic_addr;
  logic [31:0] clic_wdata, clic_rdata;
  logic [3:0] clic_be;
  // hart
  priv_lvl_t priv;
  logic virt, mie, sie, vsie, commit_ready, take, xret, tail_chain;
  logic [7:0] mth, sth, vsth, sil, vsil;
  logic [7:0] mil;
  irq_trap_t trap;
  logic [31:0] ctx_mask, ctx_pending;
  logic [PLEN-1:0] ctx_base;
  logic [4:0] rf_raddr;
  logic [63:0] rf_rdata;
  logic ctx_busy, ctx_done;

  int checks = 0, failures = 0;

  cva6rt_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .asid_i(asid), .ixlat_en_i(ixlat_en), .dxlat_en_i(dxlat_en), .tlb_flush_i(tlb_flush),
    .itlb_part_en_i(itlb_part_en), .itlb_lock_cnt_i(itlb_lock_cnt), .itlb_cfg_we_i(itlb_cfg_we),
    .itlb_cfg_idx_i(itlb_cfg_idx), .itlb_cfg_entry_i(itlb_cfg_entry), .itlb_upd_valid_i(itlb_upd_valid),
    .itlb_upd_entry_i(itlb_upd_entry), .itlb_miss_o(itlb_miss), .itlb_entry_o(itlb_entry), .itlb_drop_o(itlb_drop),
    .dtlb_part_en_i(dtlb_part_en), .dtlb_lock_cnt_i(dtlb_lock_cnt), .dtlb_cfg_we_i(dtlb_cfg_we),
    .dtlb_cfg_idx_i(dtlb_cfg_idx), .dtlb_cfg_entry_i(dtlb_cfg_entry), .dtlb_upd_valid_i(dtlb_upd_valid),
    .dtlb_upd_entry_i(dtlb_upd_entry), .dtlb_miss_o(dtlb_miss), .dtlb_entry_o(dtlb_entry), .dtlb_drop_o(dtlb_drop),
    .icache_flush_i(icache_flush), .dcache_flush_i(dcache_flush), .ispm_ways_i(ispm_ways),
    .dspm_ways_i(dspm_ways), .icache_busy_o(icache_busy), .dcache_busy_o(dcache_busy),
    .icache_evt_o(icache_evt), .dcache_evt_o(dcache_evt),
    .fetch_req_i(fetch_req), .fetch_vaddr_i(fetch_vaddr), .fetch_gnt_o(fetch_gnt),
    .fetch_rvalid_o(fetch_rvalid), .fetch_rdata_o(fetch_rdata), .fetch_spm_o(fetch_spm),
    .ispm_req_i(ispm_req), .ispm_we_i(ispm_we), .ispm_addr_i(ispm_addr), .ispm_wdata_i(ispm_wdata),
    .ispm_be_i(ispm_be), .ispm_gnt_o(ispm_gnt), .ispm_rvalid_o(ispm_rvalid), .ispm_rdata_o(ispm_rdata),
    .lsu_req_i(lsu_req), .lsu_we_i(lsu_we), .lsu_vaddr_i(lsu_vaddr), .lsu_wdata_i(lsu_wdata),
    .lsu_be_i(lsu_be), .lsu_gnt_o(lsu_gnt), .lsu_rvalid_o(lsu_rvalid), .lsu_rdata_o(lsu_rdata),
    .lsu_spm_o(lsu_spm),
    .dspm_req_i(dspm_req), .dspm_we_i(dspm_we), .dspm_addr_i(dspm_addr), .dspm_wdata_i(dspm_wdata),
    .dspm_be_i(dspm_be), .dspm_gnt_o(dspm_gnt), .dspm_rvalid_o(dspm_rvalid), .dspm_rdata_o(dspm_rdata),
    .imem_req_o(imem_req), .imem_we_o(imem_we), .imem_addr_o(imem_addr), .imem_wdata_o(imem_wdata),
    .imem_be_o(imem_be), .imem_gnt_i(imem_gnt), .imem_rvalid_i(imem_rvalid), .imem_rdata_i(imem_rdata),
    .dmem_req_o(dmem_req), .dmem_we_o(dmem_we), .dmem_addr_o(dmem_addr), .dmem_wdata_o(dmem_wdata),
    .dmem_be_o(dmem_be), .dmem_gnt_i(dmem_gnt), .dmem_rvalid_i(dmem_rvalid), .dmem_rdata_i(dmem_rdata),
    .intr_src_i(intr_src), .clic_req_i(clic_req), .clic_we_i(clic_we), .clic_addr_i(clic_addr),
    .clic_wdata_i(clic_wdata), .clic_be_i(clic_be), .clic_rdata_o(clic_rdata),
    .priv_lvl_i(priv), .virt_i(virt), .mie_i(mie), .sie_i(sie), .vsie_i(vsie),
    .mintthresh_i(mth), .sintthresh_i(sth), .vsintthresh_i(vsth), .mil_i(mil), .sil_i(sil), .vsil_i(vsil),
    .mtvt_i(56'h1000_0000), .stvt_i(56'h1000_0800), .vstvt_i(56'h1000_0c00),
    .mtvec_i(56'h1000_1000), .stvec_i(56'h1000_1800), .vstvec_i(56'h1000_1c00),
    .commit_ready_i(commit_ready), .xret_i(xret), .trap_o(trap), .take_o(take), .tail_chain_o(tail_chain),
    .ctx_mask_i(ctx_mask), .ctx_base_i(ctx_base), .rf_raddr_o(rf_raddr), .rf_rdata_i(rf_rdata),
    .ctx_busy_o(ctx_busy), .ctx_done_o(ctx_done), .ctx_pending_o(ctx_pending));

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- memories: contents = f(address) + written words
  logic [63:0] wmem [logic [PLEN-1:0]];
  function automatic logic [63:0] mword(logic [PLEN-1:0] a);
    a = {a[PLEN-1:3], 3'b0};
    if (wmem.exists(a)) return wmem[a];
    return {a[31:0] ^ 32'h5A5A_0000, a[31:0]};
  endfunction
  logic [1:0] ipipe, dpipe;
  logic [PLEN-1:0] iaddr [2], daddr [2];
  int mem_writes = 0;
  assign imem_gnt = imem_req;
  assign dmem_gnt = dmem_req;
  always @(posedge clk) begin
    ipipe <= {ipipe[0], imem_req && !imem_we};
    dpipe <= {dpipe[0], dmem_req && !dmem_we};
    iaddr[1] <= iaddr[0]; iaddr[0] <= imem_addr;
    daddr[1] <= daddr[0]; daddr[0] <= dmem_addr;
    if (dmem_req && dmem_we) begin
      automatic logic [63:0] w = mword(dmem_addr);
      for (int b = 0; b < 8; b++) if (dmem_be[b]) w[b*8 +: 8] = dmem_wdata[b*8 +: 8];
      wmem[{dmem_addr[PLEN-1:3], 3'b0}] = w;
      mem_writes++;
    end
  end
  assign imem_rvalid = ipipe[1];
  assign dmem_rvalid = dpipe[1];
  assign imem_rdata  = {mword(iaddr[1] + 8), mword(iaddr[1])};
  assign dmem_rdata  = {mword(daddr[1] + 8), mword(daddr[1])};

  // ---------------- register file of the core
  logic [63:0] rf [32];
  assign rf_rdata = rf[rf_raddr];

  // ---------------- CSR file: trap entry raises the current level of the target mode
  logic [7:0] mil_set = 0, mil_tb = 0;
  always @(posedge clk) if (take && trap.mode == PRIV_M) mil_set <= trap.level;
  assign mil = (mil_set > mil_tb) ? mil_set : mil_tb;

  // ---------------- mechanism counters
  int n_itlb_miss, n_dtlb_miss, n_ic_miss, n_ic_hit, n_dc_miss, n_dc_hit, n_ispm_fetch, n_dspm;
  int n_sweep, n_locked_kept, n_part_kept, n_fill_drop, n_irq, n_preempt, n_no_preempt, n_vs;
  int n_ctx_regs, n_lsu_held, n_wt, n_tail;
  always @(posedge clk) if (rst_n) begin
    n_ic_miss  += int'(icache_evt[1]);
    n_ic_hit   += int'(icache_evt[0]);
    n_dc_miss  += int'(dcache_evt[1]);
    n_dc_hit   += int'(dcache_evt[0]);
    n_fill_drop += int'(dtlb_drop) + int'(itlb_drop);
    if (lsu_req && ctx_busy && !lsu_gnt) n_lsu_held++;
  end

  function automatic tlb_entry_t pte(logic [26:0] vpn, logic [43:0] ppn);
    tlb_entry_t e = '0;
    e.valid = 1; e.asid = asid; e.vpn2 = vpn[26:18]; e.vpn1 = vpn[17:9]; e.vpn0 = vpn[8:0];
    e.ppn = ppn; e.r = 1; e.w = 1; e.x = 1; e.a = 1; e.d = 1;
    return e;
  endfunction
  function automatic logic [PLEN-1:0] xlate(logic [VLEN-1:0] va);
    return {44'(va[38:12]) + 44'h80000, va[11:0]};
  endfunction

  // ---------------- ports
  task automatic fetch(logic [VLEN-1:0] va, output logic [63:0] d, output int lat, output bit spm);
    @(negedge clk) fetch_req = 1; fetch_vaddr = va;
    #1;
    if (itlb_miss) begin      // page-table walker refill
      n_itlb_miss++;
      itlb_upd_valid = 1; itlb_upd_entry = pte(va[38:12], 44'(va[38:12]) + 44'h80000);
      @(negedge clk) itlb_upd_valid = 0;
    end
    do @(posedge clk); while (!fetch_gnt);
    #1 fetch_req = 0; lat = 1;
    while (!fetch_rvalid) begin @(posedge clk); #1 lat++; end
    d = fetch_rdata; spm = fetch_spm;
  endtask

  task automatic ispm_write(logic [PLEN-1:0] a, logic [63:0] d);
    @(negedge clk) ispm_req = 1; ispm_we = 1; ispm_addr = a; ispm_wdata = d; ispm_be = 8'hff;
    do @(posedge clk); while (!ispm_gnt);
    #1 ispm_req = 0;
    while (!ispm_rvalid) @(posedge clk);
  endtask

  task automatic lsu(bit w, logic [VLEN-1:0] va, logic [63:0] d, output logic [63:0] r,
                     output int lat, output bit spm);
    @(negedge clk) lsu_req = 1; lsu_we = w; lsu_vaddr = va; lsu_wdata = d; lsu_be = 8'hff;
    #1;
    if (dtlb_miss) begin
      n_dtlb_miss++;
      dtlb_upd_valid = 1; dtlb_upd_entry = pte(va[38:12], 44'(va[38:12]) + 44'h80000);
      @(negedge clk) dtlb_upd_valid = 0;
    end
    do @(posedge clk); while (!lsu_gnt);
    #1 lsu_req = 0; lat = 1;
    while (!lsu_rvalid) begin @(posedge clk); #1 lat++; end
    r = lsu_rdata; spm = lsu_spm;
  endtask

  task automatic dspm_access(bit w, logic [PLEN-1:0] a, logic [63:0] wd, output logic [63:0] r);
    @(negedge clk) dspm_req = 1; dspm_we = w; dspm_addr = a; dspm_wdata = wd; dspm_be = 8'hff;
    do @(posedge clk); while (!dspm_gnt);
    #1 dspm_req = 0;
    while (!dspm_rvalid) @(posedge clk);
    #1 r = dspm_rdata;
  endtask

  task automatic clic_wr(logic [15:0] a, logic [31:0] d, logic [3:0] b);
    @(negedge clk) clic_req = 1; clic_we = 1; clic_addr = a; clic_wdata = d; clic_be = b;
    @(negedge clk) clic_req = 0; clic_we = 0;
  endtask
  task automatic clic_cfg(int i, logic [7:0] ctl, logic [7:0] attr);
    clic_wr(16'h1000 + 16'(4 * i), {ctl, attr, 8'h01, 8'h00}, 4'b1110);
  endtask

  // raise source i at a negedge, return cycles until take (-1 if none in 20)
  task automatic irq_edge(int i, output int lat);
    @(negedge clk) intr_src[i] = 1;
    lat = -1;
    for (int c = 1; c <= 20; c++) begin
      @(posedge clk); #1;
      if (take) begin lat = c; break; end
    end
  endtask

  logic [63:0] d; int lat; bit spm;
  initial begin
    asid = 16'h7; ixlat_en = 0; dxlat_en = 0; tlb_flush = 0;
    itlb_part_en = 4'hf; dtlb_part_en = 4'hf; itlb_lock_cnt = 0; dtlb_lock_cnt = 0;
    itlb_cfg_we = 0; dtlb_cfg_we = 0; itlb_cfg_idx = 0; dtlb_cfg_idx = 0;
    itlb_cfg_entry = '0; dtlb_cfg_entry = '0; itlb_upd_valid = 0; dtlb_upd_valid = 0;
    itlb_upd_entry = '0; dtlb_upd_entry = '0;
    icache_flush = 0; dcache_flush = 0; ispm_ways = 0; dspm_ways = 0;
    fetch_req = 0; fetch_vaddr = 0; ispm_req = 0; ispm_we = 0; ispm_addr = 0; ispm_wdata = 0; ispm_be = 0;
    lsu_req = 0; lsu_we = 0; lsu_vaddr = 0; lsu_wdata = 0; lsu_be = 0;
    dspm_req = 0; dspm_we = 0; dspm_addr = 0; dspm_wdata = 0; dspm_be = 0;
    intr_src = '0; clic_req = 0; clic_we = 0; clic_addr = 0; clic_wdata = 0; clic_be = 0;
    xret = 0; priv = PRIV_M; virt = 0; mie = 1; sie = 1; vsie = 1; commit_ready = 1;
    mth = 0; sth = 0; vsth = 0; sil = 0; vsil = 0;
    ctx_mask = 32'hFFFF_FFFE; ctx_base = DSPM_BASE + 56'h100;
    foreach (rf[i]) rf[i] = {$urandom, $urandom};
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    while (icache_busy || dcache_busy) @(negedge clk);

    // ---- I-SPM: 2 ways, load handler words, fetch at constant latency
    ispm_ways = 2;
    @(negedge clk); check(icache_busy, "I-side SPM configuration sweeps tags");
    n_sweep++;
    while (icache_busy) @(negedge clk);
    for (int i = 0; i < 64; i++) ispm_write(ISPM_BASE + PLEN'(8 * i), 64'h0000_0013_0000_0000 + 64'(i));
    for (int i = 0; i < 64; i++) begin
      fetch(VLEN'(ISPM_BASE) + VLEN'(8 * i), d, lat, spm);
      check(d == 64'h0000_0013_0000_0000 + 64'(i) && lat == 1 && spm, "I-SPM fetch, 1 cycle");
      n_ispm_fetch++;
    end
    // ---- I-TLB + I-cache
    ixlat_en = 1;
    for (int i = 0; i < 4; i++) begin
      fetch(39'h0_4000_0000 + 39'(16 * i), d, lat, spm);
      check(d == mword(xlate(39'h0_4000_0000 + 39'(16 * i))), "translated fetch data");
      fetch(39'h0_4000_0008 + 39'(16 * i), d, lat, spm);
      check(d == mword(xlate(39'h0_4000_0008 + 39'(16 * i))) && lat == 1, "fetch hit in line");
    end
    ixlat_en = 0;
    // ---- D-TLB: pin one entry, restrict to partition 1, thrash it
    dxlat_en = 1;
    @(negedge clk) dtlb_cfg_we = 1; dtlb_cfg_idx = 0; dtlb_cfg_entry = pte(27'h1234, 44'h1234 + 44'h80000);
    @(negedge clk) dtlb_cfg_we = 0; dtlb_lock_cnt = 1;
    dtlb_part_en = 4'b0100;   // another task's partition
    lsu(0, 39'h0_0055_5000, 0, d, lat, spm);
    dtlb_part_en = 4'b0010;
    for (int i = 0; i < 12; i++) begin
      lsu(0, 39'h0_0060_0000 + 39'(i) * 39'h1000, 0, d, lat, spm);
      check(d == mword(xlate(39'h0_0060_0000 + 39'(i) * 39'h1000)), "load through D-TLB and D-cache");
    end
    begin
      automatic int m0 = n_dtlb_miss;
      lsu(0, 39'h0_0123_4010, 0, d, lat, spm);
      check(n_dtlb_miss == m0 && d == mword(xlate(39'h0_0123_4010)), "pinned D-TLB entry hits");
      n_locked_kept += (n_dtlb_miss == m0);
      dtlb_part_en = 4'b0100;
      lsu(0, 39'h0_0055_5008, 0, d, lat, spm);
      check(n_dtlb_miss == m0, "other partition's entry survived");
      n_part_kept += (n_dtlb_miss == m0);
    end
    dtlb_part_en = 4'b0000;
    @(negedge clk) dtlb_upd_valid = 1; dtlb_upd_entry = pte(27'h7777, 44'h1);
    @(negedge clk) dtlb_upd_valid = 0;
    dtlb_part_en = 4'b1111;
    // ---- D-cache write-through
    begin
      automatic int w0 = mem_writes;
      lsu(1, 39'h0_0060_0000, 64'hFEED_F00D_0000_0001, d, lat, spm);
      @(posedge clk); #1;
      check(mem_writes == w0 + 1, "D-cache store written through");
      n_wt += mem_writes - w0;
      lsu(0, 39'h0_0060_0000, 0, d, lat, spm);
      check(d == 64'hFEED_F00D_0000_0001 && lat == 1, "store visible, hit");
    end
    dxlat_en = 0;
    // ---- D-SPM: 2 ways
    dspm_ways = 2;
    repeat (4) begin @(negedge clk); if (dcache_busy) break; end
    n_sweep += int'(dcache_busy);
    while (dcache_busy) @(negedge clk);
    lsu(1, VLEN'(DSPM_BASE) + 39'h2000 - 8, 64'h0123_4567_89ab_cdef, d, lat, spm);
    check(lat == 1 && spm, "D-SPM store 1 cycle");
    lsu(0, VLEN'(DSPM_BASE) + 39'h2000 - 8, 0, d, lat, spm);
    check(lat == 1 && spm && d == 64'h0123_4567_89ab_cdef, "D-SPM load 1 cycle");
    n_dspm += 2;
    // SoC port into the D-SPM: sees the LSU's data and the LSU sees its data
    dspm_access(0, DSPM_BASE + 56'h2000 - 8, 0, d);
    check(d == 64'h0123_4567_89ab_cdef, "SoC port reads what the LSU stored in the D-SPM");
    dspm_access(1, DSPM_BASE + 56'h10, 64'hC0DE_0000_0000_0042, d);
    lsu(0, VLEN'(DSPM_BASE) + 39'h10, 0, d, lat, spm);
    check(spm && d == 64'hC0DE_0000_0000_0042, "LSU reads what the SoC port stored in the D-SPM");
    n_dspm += 2;

    // ---- interrupts
    clic_wr(16'h0, 32'd8 << 1, 4'b0001);
    clic_cfg(10, 8'h80, 8'hC1);   // M, level, vectored
    clic_cfg(11, 8'hC0, 8'hC0);   // M, higher level
    clic_cfg(12, 8'h40, 8'hC0);   // M, lower level
    clic_cfg(13, 8'h60, 8'h60);   // S, virtual
    irq_edge(10, lat);
    check(lat == 5, "interrupt edge to trap entry: 3 + 2 cycles");
    check(trap.id == 10 && trap.mode == PRIV_M && trap.vec_addr == 56'h1000_0000 + 10 * 8, "vectored trap");
    n_irq++;
    // the CSR file raises the current level; the handler's first load waits for the save
    fork
      begin
        automatic int c = 1;
        @(posedge clk); #1;
        while (ctx_busy) begin @(posedge clk); #1 c++; end
        check(c > 31 && c <= 2 * 31 + 2, "context save of 31 registers");
      end
      begin
        @(negedge clk);
        lsu(0, 39'h0_0060_0000, 0, d, lat, spm);
      end
    join
    check(n_lsu_held > 0, "LSU held while the context is saved");
    for (int i = 1; i < 32; i++) begin
      lsu(0, VLEN'(DSPM_BASE) + 39'h100 + 39'(8 * i), 0, d, lat, spm);
      check(d == rf[i] && spm && lat == 1, "register saved in D-SPM");
      n_ctx_regs += int'(d == rf[i]);
    end
    // lower level does not preempt, higher level does
    irq_edge(12, lat);
    check(lat == -1, "lower-level interrupt does not preempt");
    n_no_preempt += int'(lat == -1);
    irq_edge(11, lat);
    check(lat == 5 && trap.id == 11, "higher-level interrupt preempts");
    n_preempt += int'(lat == 5);
    @(posedge clk); #1;
    while (ctx_busy) @(negedge clk);
    intr_src = '0;
    repeat (10) @(negedge clk);
    mil_set = 0;   // return from both handlers
    repeat (5) @(negedge clk);
    check(!ctx_busy && !take, "no interrupt left pending");
    // tail-chaining: a lower-level interrupt waits for the handler's return
    irq_edge(10, lat);
    check(lat == 5, "interrupt 10 again");
    @(posedge clk); #1;
    while (ctx_busy) @(negedge clk);
    begin
      automatic int l2;
      irq_edge(12, l2);
      check(l2 == -1, "level 0x40 waits under level 0x80");
    end
    intr_src[10] = 0;                 // the handler clears its source
    repeat (5) @(negedge clk);
    xret = 1; mil_set = 0;            // ... and returns
    #1 check(take && tail_chain && trap.id == 12, "tail-chained to interrupt 12 on return");
    n_tail += int'(take && tail_chain && trap.id == 12);
    @(negedge clk) xret = 0; mil_set = 8'h40;
    repeat (3) @(negedge clk);
    check(!ctx_busy, "no second context save on a tail-chain");
    intr_src = '0;
    repeat (10) @(negedge clk);
    mil_set = 0;
    repeat (5) @(negedge clk);
    // virtual guest: VS-mode interrupt injected directly
    priv = PRIV_S; virt = 1;
    ctx_mask = 32'h0000_0006;
    irq_edge(13, lat);
    check(lat == 5 && trap.virt && trap.mode == PRIV_S && trap.vec_addr == 56'h1000_1c00,
          "VS interrupt injected into the guest");
    n_vs += int'(lat == 5);
    @(posedge clk); #1;
    while (ctx_busy) @(negedge clk);

    $display("mechanisms: itlb_miss=%0d dtlb_miss=%0d ic_miss=%0d ic_hit=%0d dc_miss=%0d dc_hit=%0d ispm=%0d dspm=%0d sweep=%0d",
             n_itlb_miss, n_dtlb_miss, n_ic_miss, n_ic_hit, n_dc_miss, n_dc_hit, n_ispm_fetch, n_dspm, n_sweep);
    $display("mechanisms: locked_kept=%0d part_kept=%0d fill_drop=%0d wt=%0d tail=%0d irq=%0d preempt=%0d no_preempt=%0d vs=%0d ctx_regs=%0d lsu_held=%0d",
             n_locked_kept, n_part_kept, n_fill_drop, n_wt, n_tail, n_irq, n_preempt, n_no_preempt, n_vs, n_ctx_regs, n_lsu_held);
    check(n_itlb_miss > 0, "I-TLB miss happened");
    check(n_dtlb_miss > 0, "D-TLB miss happened");
    check(n_ic_miss > 0 && n_ic_hit > 0, "I-cache miss and hit happened");
    check(n_dc_miss > 0 && n_dc_hit > 0, "D-cache miss and hit happened");
    check(n_ispm_fetch > 0 && n_dspm > 0, "SPM accesses happened");
    check(n_sweep >= 2, "tag/valid sweeps happened");
    check(n_locked_kept > 0 && n_part_kept > 0, "locked and partitioned TLB entries kept");
    check(n_fill_drop > 0, "fill dropped with no partition");
    check(n_wt > 0, "write-through happened");
    check(n_tail > 0, "tail-chaining happened");
    check(n_irq > 0 && n_preempt > 0 && n_no_preempt > 0 && n_vs > 0, "interrupt mechanisms happened");
    check(n_ctx_regs == 31 && n_lsu_held > 0, "context save happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
