// tlb: fully associative Sv39 TLB with partitioned replacement and locked
// entries, used for both the instruction and the data side.
//
// Lookup is combinational: an entry matches when it is valid, its ASID equals
// the request's (or it is global) and the VPN fields that its page size uses
// are equal. The physical address keeps the page offset and, for 2 MiB and
// 1 GiB pages, the lower VPN fields of the virtual address.
//
// Replacement: the entries are split into NUM_PART equal contiguous
// partitions; part_en_i is the bitmap of partitions the running task may
// fill. Entries 0 .. lock_cnt_i-1 are locked: they are never chosen as a
// victim and survive flush_i. Privileged software places translations into
// locked (or any) slots with the cfg_* write port. A fill (upd_valid_i) goes
// to the victim chosen by tlb_plru_part over the allowed entries; if no
// partition is allowed the fill is dropped and upd_drop_o is raised.
//
// Timing: lu_* outputs are combinational; fills, config writes and flushes
// take effect on the next clock edge. Partitioning, the bitmap and locking
// follow the paper; the partition shape, the lock position and the config
// port are this design's choices.
module tlb
  import cva6rt_pkg::*;
#(
  parameter int unsigned ENTRIES  = 16,
  parameter int unsigned NUM_PART = 4,
  localparam int unsigned IDX_W   = $clog2(ENTRIES)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               flush_i,
  // lookup
  input  logic               lu_access_i,
  input  logic [ASID_W-1:0]  lu_asid_i,
  input  logic [VLEN-1:0]    lu_vaddr_i,
  output logic               lu_hit_o,
  output logic [PLEN-1:0]    lu_paddr_o,
  output tlb_entry_t         lu_entry_o,
  // fill from the page-table walker
  input  logic               upd_valid_i,
  input  tlb_entry_t         upd_entry_i,
  output logic               upd_drop_o,
  // real-time configuration
  input  logic [NUM_PART-1:0] part_en_i,
  input  logic [IDX_W:0]      lock_cnt_i,
  input  logic                cfg_we_i,
  input  logic [IDX_W-1:0]    cfg_idx_i,
  input  tlb_entry_t          cfg_entry_i
);

  localparam int unsigned PART_SIZE = ENTRIES / NUM_PART;

  tlb_entry_t         tags_q [ENTRIES];
  logic [ENTRIES-1:0] valid, hit_vec, locked, allowed;
  logic [IDX_W-1:0]   hit_idx, repl_idx;
  logic               repl_valid;

  initial begin
    assert (ENTRIES % NUM_PART == 0 && (PART_SIZE & (PART_SIZE - 1)) == 0)
      else $error("partitions must be equal power-of-two groups");
  end

  always_comb begin
    for (int unsigned e = 0; e < ENTRIES; e++) begin
      valid[e]   = tags_q[e].valid;
      locked[e]  = (e < lock_cnt_i);
      allowed[e] = part_en_i[e / PART_SIZE] && !locked[e];
      hit_vec[e] = tags_q[e].valid
                && (tags_q[e].g || tags_q[e].asid == lu_asid_i)
                && tags_q[e].vpn2 == lu_vaddr_i[38:30]
                && (tags_q[e].is_1g || tags_q[e].vpn1 == lu_vaddr_i[29:21])
                && (tags_q[e].is_1g || tags_q[e].is_2m || tags_q[e].vpn0 == lu_vaddr_i[20:12]);
    end
  end

  always_comb begin
    hit_idx = '0;
    for (int e = ENTRIES - 1; e >= 0; e--) if (hit_vec[e]) hit_idx = IDX_W'(e);
  end

  assign lu_hit_o   = |hit_vec;
  assign lu_entry_o = tags_q[hit_idx];

  always_comb begin
    tlb_entry_t t;
    t = tags_q[hit_idx];
    lu_paddr_o = {t.ppn, lu_vaddr_i[11:0]};
    if (t.is_2m || t.is_1g) lu_paddr_o[20:12] = lu_vaddr_i[20:12];
    if (t.is_1g)            lu_paddr_o[29:21] = lu_vaddr_i[29:21];
  end

  tlb_plru_part #(.ENTRIES(ENTRIES)) i_plru (
    .clk_i,
    .rst_ni,
    .allowed_i    (allowed),
    .valid_i      (valid),
    .access_i     ((lu_access_i && lu_hit_o) || (upd_valid_i && repl_valid)),
    .access_idx_i ((upd_valid_i && repl_valid) ? repl_idx : hit_idx),
    .repl_idx_o   (repl_idx),
    .repl_valid_o (repl_valid)
  );

  assign upd_drop_o = upd_valid_i && !repl_valid;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned e = 0; e < ENTRIES; e++) tags_q[e] <= '0;
    end else begin
      if (flush_i) begin
        for (int unsigned e = 0; e < ENTRIES; e++) if (!locked[e]) tags_q[e].valid <= 1'b0;
      end else if (upd_valid_i && repl_valid) begin
        tags_q[repl_idx] <= upd_entry_i;
      end
      if (cfg_we_i) tags_q[cfg_idx_i] <= cfg_entry_i;
    end
  end

endmodule
