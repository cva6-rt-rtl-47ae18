// cva6rt_top: the real-time extensions of the CVA6-RT core, wired together.
//
//   fetch ---> I-TLB ---> spm_decoder ---> I-cache ways | I-SPM ways
//   LSU  ----> D-TLB ---> spm_decoder ---> D-cache ways | D-SPM ways
//   irq lines -> CLIC -> clic_ctrl -> commit stage (trap) -> ctx_save -> D-side
//
// The in-order pipeline itself (frontend, decode, issue, execute, commit,
// CSR file, page-table walker) is the unchanged CVA6 core and is not part of
// this RTL: its side of every interface is a port of this module.
//
// Instruction side: a fetch request carries a virtual address. With ixlat_en_i
// set it is translated by the I-TLB in the same cycle; a TLB miss raises
// itlb_miss_o instead of reaching the cache, and the walker refills the TLB
// through itlb_upd_*. Without translation the address is used as physical.
// A second requester, ispm_* (the SoC's path into the I-SPM, used to load
// handler code), shares the I-cache port and wins over fetch.
//
// Data side: the LSU request is translated by the D-TLB in the same way. The
// context-save unit's stores (already physical) share the D-cache port and
// win over the LSU; at interrupt entry they go to ctx_base_i, normally inside
// the D-SPM so that they have constant latency. A third requester, dspm_*
// (the SoC's path into the D-SPM, physical addresses), ranks between them:
// context save first, then the SoC port, then the LSU.
//
// Interrupts: the CLIC presents its winner three cycles after a source edge;
// clic_ctrl registers it twice and raises take_o as soon as commit_ready_i
// allows; take_o acknowledges the CLIC and starts the context save, unless
// it coincides with a handler return (tail-chaining), when the saved context
// is still valid and no new save starts. The
// 7-cycle pipeline flush that follows in the core is outside this RTL.
//
// Timing of the shared ports: a requester is told gnt when the cache grants
// it; the response (rvalid) returns to whichever requester was granted. The
// block structure follows the paper's block diagram; port priorities and
// port names are this design's choices.
module cva6rt_top
  import cva6rt_pkg::*;
#(
  parameter int unsigned     ITLB_ENTRIES = 16,
  parameter int unsigned     DTLB_ENTRIES = 16,
  parameter int unsigned     TLB_PARTS    = 4,
  parameter int unsigned     ICACHE_BYTES = 16384,
  parameter int unsigned     ICACHE_WAYS  = 4,
  parameter int unsigned     DCACHE_BYTES = 32768,
  parameter int unsigned     DCACHE_WAYS  = 8,
  parameter int unsigned     LINE_BITS    = 128,
  parameter logic [PLEN-1:0] ISPM_BASE    = 56'h0000_1000_0000,
  parameter logic [PLEN-1:0] DSPM_BASE    = 56'h0000_1010_0000,
  parameter int unsigned     NUM_INTR     = 256,
  localparam int unsigned    IW_W         = $clog2(ICACHE_WAYS),
  localparam int unsigned    DW_W         = $clog2(DCACHE_WAYS),
  localparam int unsigned    IT_W         = $clog2(ITLB_ENTRIES),
  localparam int unsigned    DT_W         = $clog2(DTLB_ENTRIES)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // ---------------- address translation control (CSR file / PTW)
  input  logic [ASID_W-1:0]    asid_i,
  input  logic                 ixlat_en_i,
  input  logic                 dxlat_en_i,
  input  logic                 tlb_flush_i,
  input  logic [TLB_PARTS-1:0] itlb_part_en_i,
  input  logic [IT_W:0]        itlb_lock_cnt_i,
  input  logic                 itlb_cfg_we_i,
  input  logic [IT_W-1:0]      itlb_cfg_idx_i,
  input  tlb_entry_t           itlb_cfg_entry_i,
  input  logic                 itlb_upd_valid_i,
  input  tlb_entry_t           itlb_upd_entry_i,
  output logic                 itlb_miss_o,
  output tlb_entry_t           itlb_entry_o,      // hit entry, for permission checks
  output logic                 itlb_drop_o,       // fill dropped: no partition enabled
  input  logic [TLB_PARTS-1:0] dtlb_part_en_i,
  input  logic [DT_W:0]        dtlb_lock_cnt_i,
  input  logic                 dtlb_cfg_we_i,
  input  logic [DT_W-1:0]      dtlb_cfg_idx_i,
  input  tlb_entry_t           dtlb_cfg_entry_i,
  input  logic                 dtlb_upd_valid_i,
  input  tlb_entry_t           dtlb_upd_entry_i,
  output logic                 dtlb_miss_o,
  output tlb_entry_t           dtlb_entry_o,
  output logic                 dtlb_drop_o,
  // ---------------- cache / scratchpad configuration
  input  logic                 icache_flush_i,
  input  logic                 dcache_flush_i,
  input  logic [IW_W:0]        ispm_ways_i,
  input  logic [DW_W:0]        dspm_ways_i,
  output logic                 icache_busy_o,
  output logic                 dcache_busy_o,
  output logic [1:0]           icache_evt_o,      // {miss, hit} pulses, for counters
  output logic [1:0]           dcache_evt_o,
  // ---------------- frontend fetch port
  input  logic                 fetch_req_i,
  input  logic [VLEN-1:0]      fetch_vaddr_i,
  output logic                 fetch_gnt_o,
  output logic                 fetch_rvalid_o,
  output logic [63:0]          fetch_rdata_o,
  output logic                 fetch_spm_o,
  // ---------------- SoC access to the I-SPM (physical)
  input  logic                 ispm_req_i,
  input  logic                 ispm_we_i,
  input  logic [PLEN-1:0]      ispm_addr_i,
  input  logic [63:0]          ispm_wdata_i,
  input  logic [7:0]           ispm_be_i,
  output logic                 ispm_gnt_o,
  output logic                 ispm_rvalid_o,
  output logic [63:0]          ispm_rdata_o,
  // ---------------- LSU port
  input  logic                 lsu_req_i,
  input  logic                 lsu_we_i,
  input  logic [VLEN-1:0]      lsu_vaddr_i,
  input  logic [63:0]          lsu_wdata_i,
  input  logic [7:0]           lsu_be_i,
  output logic                 lsu_gnt_o,
  output logic                 lsu_rvalid_o,
  output logic [63:0]          lsu_rdata_o,
  output logic                 lsu_spm_o,
  input  logic                 dspm_req_i,
  input  logic                 dspm_we_i,
  input  logic [PLEN-1:0]      dspm_addr_i,
  input  logic [63:0]          dspm_wdata_i,
  input  logic [7:0]           dspm_be_i,
  output logic                 dspm_gnt_o,
  output logic                 dspm_rvalid_o,
  output logic [63:0]          dspm_rdata_o,
  // ---------------- memory ports (towards the SoC interconnect)
  output logic                 imem_req_o,
  output logic                 imem_we_o,
  output logic [PLEN-1:0]      imem_addr_o,
  output logic [63:0]          imem_wdata_o,
  output logic [7:0]           imem_be_o,
  input  logic                 imem_gnt_i,
  input  logic                 imem_rvalid_i,
  input  logic [LINE_BITS-1:0] imem_rdata_i,
  output logic                 dmem_req_o,
  output logic                 dmem_we_o,
  output logic [PLEN-1:0]      dmem_addr_o,
  output logic [63:0]          dmem_wdata_o,
  output logic [7:0]           dmem_be_o,
  input  logic                 dmem_gnt_i,
  input  logic                 dmem_rvalid_i,
  input  logic [LINE_BITS-1:0] dmem_rdata_i,
  // ---------------- CLIC
  input  logic [NUM_INTR-1:0]  intr_src_i,
  input  logic                 clic_req_i,
  input  logic                 clic_we_i,
  input  logic [15:0]          clic_addr_i,
  input  logic [31:0]          clic_wdata_i,
  input  logic [3:0]           clic_be_i,
  output logic [31:0]          clic_rdata_o,
  // ---------------- hart state (CSR file)
  input  priv_lvl_t            priv_lvl_i,
  input  logic                 virt_i,
  input  logic                 mie_i,
  input  logic                 sie_i,
  input  logic                 vsie_i,
  input  logic [7:0]           mintthresh_i,
  input  logic [7:0]           sintthresh_i,
  input  logic [7:0]           vsintthresh_i,
  input  logic [7:0]           mil_i,
  input  logic [7:0]           sil_i,
  input  logic [7:0]           vsil_i,
  input  logic [PLEN-1:0]      mtvt_i,
  input  logic [PLEN-1:0]      stvt_i,
  input  logic [PLEN-1:0]      vstvt_i,
  input  logic [PLEN-1:0]      mtvec_i,
  input  logic [PLEN-1:0]      stvec_i,
  input  logic [PLEN-1:0]      vstvec_i,
  // ---------------- commit stage trap interface
  input  logic                 commit_ready_i,
  input  logic                 xret_i,            // commit retires mret/sret this cycle
  output irq_trap_t            trap_o,
  output logic                 take_o,
  output logic                 tail_chain_o,      // take_o on an xRET: no new context save
  // ---------------- hardware context save
  input  logic [31:0]          ctx_mask_i,
  input  logic [PLEN-1:0]      ctx_base_i,
  output logic [4:0]           rf_raddr_o,
  input  logic [XLEN-1:0]      rf_rdata_i,
  output logic                 ctx_busy_o,
  output logic                 ctx_done_o,
  output logic [31:0]          ctx_pending_o
);

  // =========================== instruction side
  logic            itlb_hit;
  logic [PLEN-1:0] itlb_paddr, fetch_paddr;

  tlb #(.ENTRIES(ITLB_ENTRIES), .NUM_PART(TLB_PARTS)) i_itlb (
    .clk_i, .rst_ni,
    .flush_i     (tlb_flush_i),
    .lu_access_i (fetch_req_i && ixlat_en_i && !ispm_req_i),
    .lu_asid_i   (asid_i),
    .lu_vaddr_i  (fetch_vaddr_i),
    .lu_hit_o    (itlb_hit),
    .lu_paddr_o  (itlb_paddr),
    .lu_entry_o  (itlb_entry_o),
    .upd_valid_i (itlb_upd_valid_i),
    .upd_entry_i (itlb_upd_entry_i),
    .upd_drop_o  (itlb_drop_o),
    .part_en_i   (itlb_part_en_i),
    .lock_cnt_i  (itlb_lock_cnt_i),
    .cfg_we_i    (itlb_cfg_we_i),
    .cfg_idx_i   (itlb_cfg_idx_i),
    .cfg_entry_i (itlb_cfg_entry_i)
  );

  assign fetch_paddr = ixlat_en_i ? itlb_paddr : PLEN'(fetch_vaddr_i);
  assign itlb_miss_o = fetch_req_i && ixlat_en_i && !itlb_hit;

  logic            ic_req, ic_we, ic_gnt, ic_rvalid, ic_rspm, ic_hit, ic_miss;
  logic [PLEN-1:0] ic_addr;
  logic [63:0]     ic_wdata, ic_rdata;
  logic [7:0]      ic_be;
  logic            ic_owner_ext_q;   // 1: response belongs to the SoC port
  logic            fetch_ok;

  assign fetch_ok = fetch_req_i && (!ixlat_en_i || itlb_hit);
  assign ic_req   = ispm_req_i || fetch_ok;
  assign ic_we    = ispm_req_i && ispm_we_i;
  assign ic_addr  = ispm_req_i ? ispm_addr_i : fetch_paddr;
  assign ic_wdata = ispm_wdata_i;
  assign ic_be    = ispm_req_i ? ispm_be_i : 8'hff;

  assign ispm_gnt_o     = ispm_req_i && ic_gnt;
  assign fetch_gnt_o    = !ispm_req_i && fetch_ok && ic_gnt;
  assign ispm_rvalid_o  = ic_rvalid && ic_owner_ext_q;
  assign fetch_rvalid_o = ic_rvalid && !ic_owner_ext_q;
  assign ispm_rdata_o   = ic_rdata;
  assign fetch_rdata_o  = ic_rdata;
  assign fetch_spm_o    = ic_rspm && !ic_owner_ext_q;
  assign icache_evt_o   = {ic_miss, ic_hit};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                  ic_owner_ext_q <= 1'b0;
    else if (ic_req && ic_gnt)    ic_owner_ext_q <= ispm_req_i;
  end

  l1_cache_spm #(
    .CACHE_BYTES(ICACHE_BYTES), .WAYS(ICACHE_WAYS), .LINE_BITS(LINE_BITS), .SPM_BASE(ISPM_BASE)
  ) i_icache (
    .clk_i, .rst_ni,
    .flush_i      (icache_flush_i),
    .spm_ways_i   (ispm_ways_i),
    .busy_o       (icache_busy_o),
    .req_i        (ic_req),
    .we_i         (ic_we),
    .addr_i       (ic_addr),
    .wdata_i      (ic_wdata),
    .be_i         (ic_be),
    .gnt_o        (ic_gnt),
    .rvalid_o     (ic_rvalid),
    .rdata_o      (ic_rdata),
    .rspm_o       (ic_rspm),
    .evt_hit_o    (ic_hit),
    .evt_miss_o   (ic_miss),
    .mem_req_o    (imem_req_o),
    .mem_we_o     (imem_we_o),
    .mem_addr_o   (imem_addr_o),
    .mem_wdata_o  (imem_wdata_o),
    .mem_be_o     (imem_be_o),
    .mem_gnt_i    (imem_gnt_i),
    .mem_rvalid_i (imem_rvalid_i),
    .mem_rdata_i  (imem_rdata_i)
  );

  // =========================== data side
  logic            dtlb_hit;
  logic [PLEN-1:0] dtlb_paddr, lsu_paddr;

  logic            cs_req, cs_gnt;
  logic [PLEN-1:0] cs_addr;
  logic [63:0]     cs_wdata;
  logic [7:0]      cs_be;

  tlb #(.ENTRIES(DTLB_ENTRIES), .NUM_PART(TLB_PARTS)) i_dtlb (
    .clk_i, .rst_ni,
    .flush_i     (tlb_flush_i),
    .lu_access_i (lsu_req_i && dxlat_en_i && !cs_req && !dspm_req_i),
    .lu_asid_i   (asid_i),
    .lu_vaddr_i  (lsu_vaddr_i),
    .lu_hit_o    (dtlb_hit),
    .lu_paddr_o  (dtlb_paddr),
    .lu_entry_o  (dtlb_entry_o),
    .upd_valid_i (dtlb_upd_valid_i),
    .upd_entry_i (dtlb_upd_entry_i),
    .upd_drop_o  (dtlb_drop_o),
    .part_en_i   (dtlb_part_en_i),
    .lock_cnt_i  (dtlb_lock_cnt_i),
    .cfg_we_i    (dtlb_cfg_we_i),
    .cfg_idx_i   (dtlb_cfg_idx_i),
    .cfg_entry_i (dtlb_cfg_entry_i)
  );

  assign lsu_paddr   = dxlat_en_i ? dtlb_paddr : PLEN'(lsu_vaddr_i);
  assign dtlb_miss_o = lsu_req_i && dxlat_en_i && !dtlb_hit;

  logic            dc_req, dc_we, dc_gnt, dc_rvalid, dc_rspm, dc_hit, dc_miss;
  logic [PLEN-1:0] dc_addr;
  logic [63:0]     dc_wdata, dc_rdata;
  logic [7:0]      dc_be;
  typedef enum logic [1:0] {DC_LSU, DC_CS, DC_EXT} dc_owner_e;
  dc_owner_e       dc_owner_q, dc_owner_d;   // owner of the pending response
  logic            lsu_ok, ext_sel;

  assign lsu_ok   = lsu_req_i && (!dxlat_en_i || dtlb_hit);
  assign ext_sel  = !cs_req && dspm_req_i;
  assign dc_req   = cs_req || dspm_req_i || lsu_ok;
  assign dc_we    = cs_req ? 1'b1     : ext_sel ? dspm_we_i    : lsu_we_i;
  assign dc_addr  = cs_req ? cs_addr  : ext_sel ? dspm_addr_i  : lsu_paddr;
  assign dc_wdata = cs_req ? cs_wdata : ext_sel ? dspm_wdata_i : lsu_wdata_i;
  assign dc_be    = cs_req ? cs_be    : ext_sel ? dspm_be_i    : lsu_be_i;
  assign dc_owner_d = cs_req ? DC_CS : ext_sel ? DC_EXT : DC_LSU;

  assign cs_gnt        = cs_req && dc_gnt;
  assign dspm_gnt_o    = ext_sel && dc_gnt;
  assign lsu_gnt_o     = !cs_req && !dspm_req_i && lsu_ok && dc_gnt;
  assign lsu_rvalid_o  = dc_rvalid && dc_owner_q == DC_LSU;
  assign lsu_rdata_o   = dc_rdata;
  assign lsu_spm_o     = dc_rspm && dc_owner_q == DC_LSU;
  assign dspm_rvalid_o = dc_rvalid && dc_owner_q == DC_EXT;
  assign dspm_rdata_o  = dc_rdata;
  assign dcache_evt_o  = {dc_miss, dc_hit};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)               dc_owner_q <= DC_LSU;
    else if (dc_req && dc_gnt) dc_owner_q <= dc_owner_d;
  end

  l1_cache_spm #(
    .CACHE_BYTES(DCACHE_BYTES), .WAYS(DCACHE_WAYS), .LINE_BITS(LINE_BITS), .SPM_BASE(DSPM_BASE)
  ) i_dcache (
    .clk_i, .rst_ni,
    .flush_i      (dcache_flush_i),
    .spm_ways_i   (dspm_ways_i),
    .busy_o       (dcache_busy_o),
    .req_i        (dc_req),
    .we_i         (dc_we),
    .addr_i       (dc_addr),
    .wdata_i      (dc_wdata),
    .be_i         (dc_be),
    .gnt_o        (dc_gnt),
    .rvalid_o     (dc_rvalid),
    .rdata_o      (dc_rdata),
    .rspm_o       (dc_rspm),
    .evt_hit_o    (dc_hit),
    .evt_miss_o   (dc_miss),
    .mem_req_o    (dmem_req_o),
    .mem_we_o     (dmem_we_o),
    .mem_addr_o   (dmem_addr_o),
    .mem_wdata_o  (dmem_wdata_o),
    .mem_be_o     (dmem_be_o),
    .mem_gnt_i    (dmem_gnt_i),
    .mem_rvalid_i (dmem_rvalid_i),
    .mem_rdata_i  (dmem_rdata_i)
  );

  // =========================== interrupts
  clic_irq_t  clic_irq;
  logic       ack;
  logic [7:0] ack_id;

  clic #(.NUM_INTR(NUM_INTR)) i_clic (
    .clk_i, .rst_ni,
    .intr_src_i  (intr_src_i),
    .reg_req_i   (clic_req_i),
    .reg_we_i    (clic_we_i),
    .reg_addr_i  (clic_addr_i),
    .reg_wdata_i (clic_wdata_i),
    .reg_be_i    (clic_be_i),
    .reg_rdata_o (clic_rdata_o),
    .irq_o       (clic_irq),
    .ack_i       (ack),
    .ack_id_i    (ack_id)
  );

  clic_ctrl i_clic_ctrl (
    .clk_i, .rst_ni,
    .irq_i          (clic_irq),
    .priv_lvl_i, .virt_i, .mie_i, .sie_i, .vsie_i,
    .mintthresh_i, .sintthresh_i, .vsintthresh_i,
    .mil_i, .sil_i, .vsil_i,
    .mtvt_i, .stvt_i, .vstvt_i, .mtvec_i, .stvec_i, .vstvec_i,
    .commit_ready_i,
    .xret_i,
    .ctx_busy_i     (ctx_busy_o),
    .trap_o,
    .take_o,
    .tail_chain_o,
    .ack_o          (ack),
    .ack_id_o       (ack_id)
  );

  ctx_save #(.NREGS(32)) i_ctx_save (
    .clk_i, .rst_ni,
    .start_i     (take_o && !tail_chain_o),
    .mask_i      (ctx_mask_i),
    .base_i      (ctx_base_i),
    .rf_raddr_o  (rf_raddr_o),
    .rf_rdata_i  (rf_rdata_i),
    .mem_req_o   (cs_req),
    .mem_addr_o  (cs_addr),
    .mem_wdata_o (cs_wdata),
    .mem_be_o    (cs_be),
    .mem_gnt_i   (cs_gnt),
    .busy_o      (ctx_busy_o),
    .done_o      (ctx_done_o),
    .pending_o   (ctx_pending_o)
  );

endmodule
