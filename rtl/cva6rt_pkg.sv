// cva6rt_pkg: types and constants shared by the real-time extensions of the
// RV64 core: Sv39 address widths, the TLB entry format, privilege encodings
// and the interrupt request that travels from the CLIC to the core-side
// interrupt controller. Widths follow RV64/Sv39; everything else here is an
// implementation choice of this design.
package cva6rt_pkg;

  localparam int unsigned XLEN   = 64;   // RV64
  localparam int unsigned VLEN   = 39;   // Sv39 virtual address
  localparam int unsigned PLEN   = 56;   // Sv39 physical address
  localparam int unsigned PPN_W  = 44;
  localparam int unsigned VPN_W  = 27;
  localparam int unsigned ASID_W = 16;

  // RISC-V privilege levels (encoding of mstatus.MPP)
  typedef enum logic [1:0] {
    PRIV_U = 2'b00,
    PRIV_S = 2'b01,
    PRIV_M = 2'b11
  } priv_lvl_t;

  // Sv39 leaf entry as held by a TLB slot
  typedef struct packed {
    logic              valid;
    logic [ASID_W-1:0] asid;
    logic [8:0]        vpn2;
    logic [8:0]        vpn1;
    logic [8:0]        vpn0;
    logic              is_1g;   // gigapage: vpn1 and vpn0 ignored
    logic              is_2m;   // megapage: vpn0 ignored
    logic              g;       // global: matches any ASID
    logic [PPN_W-1:0]  ppn;
    logic              u, x, w, r, d, a;
  } tlb_entry_t;

  // Interrupt as selected by the CLIC
  typedef struct packed {
    logic       valid;
    logic [7:0] id;
    logic [7:0] level;   // clicintctl upper nlbits, lower bits set to ones
    logic [7:0] ctl;     // raw clicintctl, for information
    priv_lvl_t  mode;    // target privilege mode
    logic       virt;    // S-mode interrupt routed to the virtual supervisor
    logic       shv;     // selective hardware vectoring
  } clic_irq_t;

  // Trap request handed from the core-side CLIC controller to commit
  typedef struct packed {
    logic            valid;
    logic [7:0]      id;
    logic [7:0]      level;
    priv_lvl_t       mode;
    logic            virt;
    logic            shv;
    logic [PLEN-1:0] vec_addr;   // table entry address (shv) or handler base
  } irq_trap_t;

endpackage
