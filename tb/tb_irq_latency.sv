// tb_irq_latency: the interrupt-latency case study run on the whole top at
// its default sizes, with many interrupts instead of one. The harness around
// the top (memories, page-table walker, register file, CSR levels) is the
// same model as in the end-to-end test.
//
// Each of 200 rounds picks one of 32 configured M-mode edge-triggered
// interrupts (random level, half of them hardware-vectored), a random
// context-save register mask and, at random, one cycle in which the commit
// stage cannot take a trap. The source is raised at a falling edge; the test
// counts rising edges until take_o and checks: the trap carries the raised id
// and its vector (mtvt + 8*id or mtvec); the latency is 3 cycles of CLIC
// propagation plus 2 of injection, or 3 of injection when commit stalled, and
// does not depend on how many registers are saved (the save runs after
// trap entry, in the background); the save unit then holds exactly the
// selected registers (x0 excluded) as pending. It prints the minimum,
// average and maximum of the measured part. Adding the 7-cycle pipeline flush
// of the unchanged core, the no-stall case gives the 12-cycle figure and the
// stall case 13. Each case (stall, no stall, vectored, non-vectored) must
// occur at least once.
module tb_irq_latency;
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


  localparam int NIRQ = 32;
  logic [7:0] lvl_of [NIRQ];
  bit         shv_of [NIRQ];
  initial begin
    automatic int lmin = 1000, lmax = 0, lsum = 0, n_stall = 0, n_free = 0, n_shv = 0, n_dir = 0;
    asid = 16'h7; ixlat_en = 0; dxlat_en = 0; tlb_flush = 0;
    itlb_part_en = 4'hf; dtlb_part_en = 4'hf; itlb_lock_cnt = 0; dtlb_lock_cnt = 0;
    itlb_cfg_we = 0; dtlb_cfg_we = 0; itlb_cfg_idx = 0; dtlb_cfg_idx = 0;
    itlb_cfg_entry = '0; dtlb_cfg_entry = '0; itlb_upd_valid = 0; dtlb_upd_valid = 0;
    itlb_upd_entry = '0; dtlb_upd_entry = '0;
    icache_flush = 0; dcache_flush = 0; ispm_ways = 1; dspm_ways = 1;
    fetch_req = 0; fetch_vaddr = 0; ispm_req = 0; ispm_we = 0; ispm_addr = 0; ispm_wdata = 0; ispm_be = 0;
    lsu_req = 0; lsu_we = 0; lsu_vaddr = 0; lsu_wdata = 0; lsu_be = 0;
    dspm_req = 0; dspm_we = 0; dspm_addr = 0; dspm_wdata = 0; dspm_be = 0;
    intr_src = '0; clic_req = 0; clic_we = 0; clic_addr = 0; clic_wdata = 0; clic_be = 0;
    xret = 0; priv = PRIV_U; virt = 0; mie = 1; sie = 1; vsie = 1; commit_ready = 1;
    mth = 0; sth = 0; vsth = 0; sil = 0; vsil = 0;
    ctx_mask = 32'hFFFF_FFFE; ctx_base = DSPM_BASE;
    foreach (rf[i]) rf[i] = {$urandom, $urandom};
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    while (icache_busy || dcache_busy) @(negedge clk);

    clic_wr(16'h0, 32'd8 << 1, 4'b0001);            // nlbits = 8
    for (int i = 0; i < NIRQ; i++) begin
      lvl_of[i] = 8'($urandom_range(1, 255));
      shv_of[i] = 1'($urandom);
      clic_cfg(i, lvl_of[i], {6'b110000, 1'b1, shv_of[i]});   // M, edge
    end

    for (int r = 0; r < 200; r++) begin
      automatic int  id    = $urandom_range(0, NIRQ - 1);
      automatic bit  stall = 1'($urandom);
      automatic int  lat   = -1;
      automatic logic [31:0] m = $urandom;
      ctx_mask = m;
      @(negedge clk) intr_src[id] = 1;
      for (int c = 1; c <= 20; c++) begin
        @(posedge clk); #1;
        commit_ready = !(stall && c == 5);          // commit busy for one cycle
        #1;
        if (take) begin lat = c; break; end
      end
      commit_ready = 1;
      check(lat == (stall ? 6 : 5), $sformatf("latency %0d (stall %0d)", lat, stall));
      check(trap.id == 8'(id) && trap.mode == PRIV_M && trap.level == lvl_of[id],
            "trap carries the raised interrupt");
      check(trap.vec_addr == (shv_of[id] ? 56'h1000_0000 + 56'(8 * id) : 56'h1000_1000),
            "vector address");
      if (lat > 0) begin
        lsum += lat; lmin = (lat < lmin) ? lat : lmin; lmax = (lat > lmax) ? lat : lmax;
      end
      n_stall += int'(stall); n_free += int'(!stall);
      n_shv += int'(shv_of[id]); n_dir += int'(!shv_of[id]);
      @(posedge clk); #1;
      check(ctx_pending == (m & 32'hFFFF_FFFE), "save unit holds the selected registers");
      intr_src[id] = 0;
      while (ctx_busy) @(negedge clk);
      @(negedge clk) mil_set = 0;                   // handler returns
      repeat (4) @(negedge clk);
    end
    $display("latency (propagation + injection): min %0d avg %0d.%02d max %0d cycles",
             lmin, lsum / 200, (lsum % 200) / 2, lmax);
    $display("with the 7-cycle flush: min %0d max %0d cycles", lmin + 7, lmax + 7);
    check(lmin == 5 && lmax == 6, "latency bounds 5..6");
    check(n_stall > 0 && n_free > 0 && n_shv > 0 && n_dir > 0, "every case occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
