// l1_cache_spm: L1 cache whose ways can be turned into scratchpad memory
// (SPM) at run time; one instance serves the instruction side, one the data
// side.
//
// spm_ways_i selects how many ways (always ways 0 .. n-1, contiguous) act as
// SPM. spm_decoder maps the SPM window in the physical address space onto
// those ways, so an SPM access reads or writes the same data SRAM a cache hit
// would use and answers one cycle after the grant, with no tag check and no
// miss: its latency is constant. SPM ways are never chosen for refill, and
// whenever the SPM configuration changes, or flush_i is raised, a sweep clears
// the tags and valid bits of the affected ways so that old lines can never hit
// (the sweep also runs once after reset to initialise the tag RAM).
//
// The cache part is blocking, write-through and no-write-allocate, like the
// CVA6 write-through data cache. Lines are LINE_BITS wide and refilled whole
// from the memory port (one read request, one rvalid carrying the line);
// stores are forwarded to memory as single 64-bit writes and acknowledged to
// the core when memory grants them. The refill victim is the lowest invalid
// non-SPM way, else the first non-SPM way at or after a free-running LFSR.
//
// Core timing: gnt_o is high only when idle; a hit or SPM access raises
// rvalid_o one cycle after the grant; a read miss answers in the cycle the
// line arrives; a cached store answers in the cycle memory grants it. The
// way-as-SPM mode, replacement exclusion and tag/valid clearing follow the
// paper; the cache policy, sweep and handshake are this design's own.
module l1_cache_spm
  import cva6rt_pkg::*;
#(
  parameter int unsigned     CACHE_BYTES = 32768,
  parameter int unsigned     WAYS        = 8,
  parameter int unsigned     LINE_BITS   = 128,
  parameter logic [PLEN-1:0] SPM_BASE    = 56'h0000_1000_0000,
  localparam int unsigned    WAY_W       = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 flush_i,
  input  logic [WAY_W:0]       spm_ways_i,
  output logic                 busy_o,
  // core side
  input  logic                 req_i,
  input  logic                 we_i,
  input  logic [PLEN-1:0]      addr_i,
  input  logic [63:0]          wdata_i,
  input  logic [7:0]           be_i,
  output logic                 gnt_o,
  output logic                 rvalid_o,
  output logic [63:0]          rdata_o,
  output logic                 rspm_o,
  output logic                 evt_hit_o,
  output logic                 evt_miss_o,
  // memory side
  output logic                 mem_req_o,
  output logic                 mem_we_o,
  output logic [PLEN-1:0]      mem_addr_o,
  output logic [63:0]          mem_wdata_o,
  output logic [7:0]           mem_be_o,
  input  logic                 mem_gnt_i,
  input  logic                 mem_rvalid_i,
  input  logic [LINE_BITS-1:0] mem_rdata_i
);

  localparam int unsigned LINE_BYTES = LINE_BITS / 8;
  localparam int unsigned WAY_BYTES  = CACHE_BYTES / WAYS;
  localparam int unsigned SETS       = WAY_BYTES / LINE_BYTES;
  localparam int unsigned OFF_W      = $clog2(LINE_BYTES);
  localparam int unsigned SET_W      = $clog2(SETS);
  localparam int unsigned TAG_W      = PLEN - OFF_W - SET_W;
  localparam int unsigned WORDS      = LINE_BITS / 64;
  localparam int unsigned WRD_W      = (WORDS > 1) ? $clog2(WORDS) : 1;

  typedef enum logic [2:0] {IDLE, LOOKUP, WT, MISS_REQ, MISS_WAIT, SWEEP} state_e;

  state_e state_q;

  // storage: one tag SRAM and one data SRAM per way (in g_way), valid bits per set
  logic [WAYS-1:0]      valid_mem[SETS];

  // request registers
  logic                 we_q, spm_q;
  logic [PLEN-1:0]      addr_q;
  logic [63:0]          wdata_q;
  logic [7:0]           be_q;
  logic [SET_W-1:0]     set_q;
  logic [WAY_W-1:0]     spm_way_q, way_q;
  logic                 victim_ok_q;
  logic [TAG_W-1:0]     tag_rd  [WAYS];
  logic [LINE_BITS-1:0] data_rd [WAYS];
  logic [WAYS-1:0]      valid_rd;

  // configuration and sweep
  logic [WAY_W:0]       spm_ways_q;
  logic [WAYS-1:0]      sweep_mask_q;
  logic [SET_W-1:0]     sweep_set_q;
  logic                 flush_pend_q;
  logic [7:0]           lfsr_q;

  // address decode of the incoming request
  logic                 dec_spm;
  logic [WAY_W-1:0]     dec_way;
  logic [SET_W-1:0]     dec_set;
  logic [OFF_W-1:0]     dec_off;   // same as addr_i[OFF_W-1:0], unused

  spm_decoder #(
    .WAYS(WAYS), .WAY_BYTES(WAY_BYTES), .LINE_BYTES(LINE_BYTES), .SPM_BASE(SPM_BASE)
  ) i_dec (
    .paddr_i(addr_i), .spm_ways_i(spm_ways_q),
    .is_spm_o(dec_spm), .way_o(dec_way), .set_o(dec_set), .off_o(dec_off)
  );

  logic cfg_change, sweep_req;
  assign cfg_change = (spm_ways_i != spm_ways_q);
  assign sweep_req  = cfg_change || flush_pend_q || flush_i;
  assign gnt_o      = (state_q == IDLE) && !sweep_req;
  assign busy_o     = (state_q == SWEEP);

  // lookup
  logic [TAG_W-1:0] req_tag;
  logic [WAYS-1:0]  hit_vec, allowed;
  logic             hit;
  logic [WAY_W-1:0] hit_way, victim;
  logic             victim_ok;
  logic [WRD_W-1:0] word_idx;

  assign req_tag  = addr_q[PLEN-1 -: TAG_W];
  assign word_idx = (WORDS > 1) ? WRD_W'(addr_q[OFF_W-1:3]) : '0;

  always_comb begin
    hit_vec = '0;
    hit_way = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      hit_vec[w] = valid_rd[w] && (tag_rd[w] == req_tag);
      allowed[w] = (w >= spm_ways_q);
    end
    for (int w = WAYS - 1; w >= 0; w--) if (hit_vec[w]) hit_way = WAY_W'(w);
    hit = |hit_vec;
  end

  // victim: lowest invalid allowed way, else first allowed way from the LFSR
  always_comb begin
    int unsigned start, w;
    victim_ok = |allowed;
    victim    = '0;
    start     = int'(lfsr_q) % WAYS;
    for (int k = WAYS - 1; k >= 0; k--) begin
      w = (start + k) % WAYS;
      if (allowed[w]) victim = WAY_W'(w);
    end
    for (int k = WAYS - 1; k >= 0; k--) begin
      if (allowed[k] && !valid_rd[k]) victim = WAY_W'(k);
    end
  end

  function automatic logic [LINE_BITS-1:0] merge(input logic [LINE_BITS-1:0] line,
                                                 input logic [WRD_W-1:0] idx,
                                                 input logic [63:0] wd, input logic [7:0] be);
    logic [LINE_BITS-1:0] l;
    l = line;
    for (int b = 0; b < 8; b++) if (be[b]) l[int'(idx) * 64 + b * 8 +: 8] = wd[b*8 +: 8];
    return l;
  endfunction

  logic [LINE_BITS-1:0] sel_line;
  assign sel_line = data_rd[spm_q ? spm_way_q : hit_way];

  // core response
  always_comb begin
    rvalid_o   = 1'b0;
    rdata_o    = sel_line[int'(word_idx) * 64 +: 64];
    rspm_o     = 1'b0;
    evt_hit_o  = 1'b0;
    evt_miss_o = 1'b0;
    unique case (state_q)
      LOOKUP: begin
        if (spm_q) begin
          rvalid_o = 1'b1;
          rspm_o   = 1'b1;
        end else begin
          evt_hit_o  = hit;
          evt_miss_o = !hit && !we_q;
          rvalid_o   = hit && !we_q;
        end
      end
      WT:        rvalid_o = mem_gnt_i;
      MISS_WAIT: begin
        rvalid_o = mem_rvalid_i;
        rdata_o  = mem_rdata_i[int'(word_idx) * 64 +: 64];
      end
      default: ;
    endcase
  end

  // memory port
  always_comb begin
    mem_req_o   = (state_q == WT) || (state_q == MISS_REQ);
    mem_we_o    = (state_q == WT);
    mem_addr_o  = (state_q == WT) ? addr_q : {addr_q[PLEN-1:OFF_W], {OFF_W{1'b0}}};
    mem_wdata_o = wdata_q;
    mem_be_o    = (state_q == WT) ? be_q : 8'hff;
  end

  // SRAM write ports
  logic [WAYS-1:0]      tag_we, data_we;
  logic [SET_W-1:0]     tag_waddr, rd_set;
  logic [TAG_W-1:0]     tag_wdata;
  logic [LINE_BITS-1:0] data_wdata;
  logic                 rd_en, fill;

  assign rd_en  = (state_q == IDLE) && req_i && gnt_o;
  assign rd_set = dec_spm ? dec_set : addr_i[OFF_W +: SET_W];
  assign fill   = (state_q == MISS_WAIT) && mem_rvalid_i && victim_ok_q;

  always_comb begin
    for (int unsigned w = 0; w < WAYS; w++) begin
      data_we[w] = ((state_q == LOOKUP) && we_q
                    && (spm_q ? (spm_way_q == WAY_W'(w)) : (hit && hit_way == WAY_W'(w))))
                || (fill && way_q == WAY_W'(w));
      tag_we[w]  = (fill && way_q == WAY_W'(w)) || ((state_q == SWEEP) && sweep_mask_q[w]);
    end
    data_wdata = fill ? mem_rdata_i : merge(sel_line, word_idx, wdata_q, be_q);
    tag_waddr  = (state_q == SWEEP) ? sweep_set_q : set_q;
    tag_wdata  = (state_q == SWEEP) ? '0 : req_tag;
  end

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    logic [TAG_W-1:0]     tag_mem  [SETS];
    logic [LINE_BITS-1:0] data_mem [SETS];
    logic [TAG_W-1:0]     tag_rd_q;
    logic [LINE_BITS-1:0] data_rd_q;
    // no reset: the sweep clears the tags
    always_ff @(posedge clk_i) begin
      if (rd_en) begin
        tag_rd_q  <= tag_mem[rd_set];
        data_rd_q <= data_mem[rd_set];
      end
      if (tag_we[w])  tag_mem[tag_waddr] <= tag_wdata;
      if (data_we[w]) data_mem[set_q]    <= data_wdata;
    end
    assign tag_rd[w]  = tag_rd_q;
    assign data_rd[w] = data_rd_q;
  end

  always_ff @(posedge clk_i) begin
    if (rd_en) valid_rd <= valid_mem[rd_set];
    if (fill)  valid_mem[set_q] <= valid_rd | (WAYS'(1) << way_q);
    else if (state_q == SWEEP) valid_mem[sweep_set_q] <= valid_mem[sweep_set_q] & ~sweep_mask_q;
  end

  // control
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= SWEEP;         // initialise tags and valid bits
      sweep_mask_q <= '1;
      sweep_set_q  <= '0;
      spm_ways_q   <= '0;
      flush_pend_q <= 1'b0;
      lfsr_q       <= 8'h5a;
      we_q         <= 1'b0;
      spm_q        <= 1'b0;
      addr_q       <= '0;
      wdata_q      <= '0;
      be_q         <= '0;
      set_q        <= '0;
      spm_way_q    <= '0;
      way_q        <= '0;
      victim_ok_q  <= 1'b0;
    end else begin
      lfsr_q <= {lfsr_q[6:0], lfsr_q[7] ^ lfsr_q[5] ^ lfsr_q[4] ^ lfsr_q[3]};
      if (flush_i) flush_pend_q <= 1'b1;
      unique case (state_q)
        IDLE: begin
          if (sweep_req) begin
            // ways that are SPM before or after the change lose tags and valid bits
            for (int unsigned w = 0; w < WAYS; w++)
              sweep_mask_q[w] <= (flush_pend_q || flush_i) || (w < spm_ways_q) || (w < spm_ways_i);
            spm_ways_q   <= spm_ways_i;
            flush_pend_q <= 1'b0;
            sweep_set_q  <= '0;
            state_q      <= SWEEP;
          end else if (req_i) begin
            we_q      <= we_i;
            spm_q     <= dec_spm;
            addr_q    <= addr_i;
            wdata_q   <= wdata_i;
            be_q      <= be_i;
            set_q     <= dec_spm ? dec_set : addr_i[OFF_W +: SET_W];
            spm_way_q <= dec_way;
            state_q   <= LOOKUP;
          end
        end
        LOOKUP: begin
          if (spm_q)       state_q <= IDLE;
          else if (we_q)   state_q <= WT;
          else if (hit)    state_q <= IDLE;
          else begin
            way_q       <= victim;
            victim_ok_q <= victim_ok;
            state_q     <= MISS_REQ;
          end
        end
        WT:        if (mem_gnt_i)    state_q <= IDLE;
        MISS_REQ:  if (mem_gnt_i)    state_q <= MISS_WAIT;
        MISS_WAIT: if (mem_rvalid_i) state_q <= IDLE;
        SWEEP: begin
          sweep_set_q <= sweep_set_q + 1'b1;
          if (sweep_set_q == SET_W'(SETS - 1)) state_q <= IDLE;
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  // a request must be held until granted
  property p_req_stable;
    @(posedge clk_i) disable iff (!rst_ni) (req_i && !gnt_o) |=> req_i;
  endproperty
  a_req_stable: assert property (p_req_stable);

endmodule
