// tb_l1_cache_spm: checks the L1 cache with scratchpad ways at its default
// size (32 KiB, 8 ways, 16-byte lines).
// A memory model behind the cache grants at random and returns lines two
// cycles after a read grant; its contents are a fixed function of the
// address plus every write-through store it has seen. Checked: reset sweep,
// read miss/refill and hit data, one-cycle hit and SPM latency, write-through,
// SPM reads/writes with no memory traffic, SPM data surviving a thrash of the
// same set (SPM ways out of replacement), stale lines in newly assigned SPM
// ways never hitting (tags and valid bits cleared), all-SPM bypass and flush.
module tb_l1_cache_spm;
  import cva6rt_pkg::*;
  localparam logic [PLEN-1:0] SPM_BASE = 56'h0000_1000_0000;
  logic clk = 0, rst_n = 0;
  logic flush, busy, req, we, gnt, rvalid, rspm, hit_e, miss_e;
  logic [3:0] spm_ways;
  logic [PLEN-1:0] addr;
  logic [63:0] wdata, rdata;
  logic [7:0] be;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [PLEN-1:0] mem_addr;
  logic [63:0] mem_wdata;
  logic [7:0] mem_be;
  logic [127:0] mem_rdata;
  int checks = 0, failures = 0;
  int mem_reads = 0, mem_writes = 0;

  l1_cache_spm #(.CACHE_BYTES(32768), .WAYS(8), .LINE_BITS(128), .SPM_BASE(SPM_BASE)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .spm_ways_i(spm_ways), .busy_o(busy),
    .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wdata), .be_i(be), .gnt_o(gnt),
    .rvalid_o(rvalid), .rdata_o(rdata), .rspm_o(rspm), .evt_hit_o(hit_e), .evt_miss_o(miss_e),
    .mem_req_o(mem_req), .mem_we_o(mem_we), .mem_addr_o(mem_addr), .mem_wdata_o(mem_wdata),
    .mem_be_o(mem_be), .mem_gnt_i(mem_gnt), .mem_rvalid_i(mem_rvalid), .mem_rdata_i(mem_rdata));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- memory model
  logic [63:0] wmem [logic [PLEN-1:0]];
  function automatic logic [63:0] mword(logic [PLEN-1:0] a);
    a = {a[PLEN-1:3], 3'b0};
    if (wmem.exists(a)) return wmem[a];
    return {a[31:0] ^ 32'hA5A5_0000, a[31:0]};
  endfunction
  logic gnt_rand;
  always @(posedge clk) gnt_rand <= ($urandom % 3) != 0;
  assign mem_gnt = mem_req && gnt_rand;
  logic [1:0] rd_pipe;
  logic [PLEN-1:0] rd_addr [2];
  always @(posedge clk) begin
    rd_pipe <= {rd_pipe[0], mem_req && mem_gnt && !mem_we};
    rd_addr[1] <= rd_addr[0];
    rd_addr[0] <= mem_addr;
    if (mem_req && mem_gnt) begin
      if (mem_we) begin
        automatic logic [63:0] w = mword(mem_addr);
        for (int b = 0; b < 8; b++) if (mem_be[b]) w[b*8 +: 8] = mem_wdata[b*8 +: 8];
        wmem[{mem_addr[PLEN-1:3], 3'b0}] = w;
        mem_writes++;
      end else mem_reads++;
    end
  end
  assign mem_rvalid = rd_pipe[1];
  assign mem_rdata  = {mword(rd_addr[1] + 8), mword(rd_addr[1])};

  // ---------------- core-side access
  task automatic access(bit w, logic [PLEN-1:0] a, logic [63:0] d, logic [7:0] b,
                        output logic [63:0] rd, output int lat, output bit from_spm);
    req = 1; we = w; addr = a; wdata = d; be = b;
    do @(posedge clk); while (!gnt);
    #1 req = 0;
    lat = 1;
    while (!rvalid) begin @(posedge clk); #1 lat++; end
    rd = rdata; from_spm = rspm;
    @(posedge clk); #1;
  endtask

  task automatic wait_idle();
    #1; while (busy) begin @(posedge clk); #1; end
  endtask

  logic [63:0] rd; int lat; bit sp;
  int sweep_cycles;
  logic [PLEN-1:0] A = 56'h0000_8000_1230;
  initial begin
    flush = 0; req = 0; we = 0; addr = 0; wdata = 0; be = 0; spm_ways = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1; #1;
    sweep_cycles = 0;
    while (busy) begin @(posedge clk); #1 sweep_cycles++; end
    check(sweep_cycles == 256, "reset sweep takes one cycle per set");
    // miss then hit
    access(0, A, 0, 0, rd, lat, sp);
    check(rd == mword(A) && lat > 2 && !sp, "read miss refills with memory data");
    access(0, A + 8, 0, 0, rd, lat, sp);
    check(rd == mword(A + 8) && lat == 1, "second word of line hits in one cycle");
    // write-through
    begin
      automatic int w0 = mem_writes;
      access(1, A, 64'h1122_3344_5566_7788, 8'h0f, rd, lat, sp);
      check(mem_writes == w0 + 1, "store written through");
      access(0, A, 0, 0, rd, lat, sp);
      check(rd[31:0] == 32'h5566_7788 && rd == mword(A) && lat == 1, "store merged into hit line");
    end
    // occupy all 8 ways of set 0x40 with cached lines
    for (int i = 0; i < 8; i++) access(0, 56'h0000_9000_0400 + PLEN'(i) * 56'h1000, 0, 0, rd, lat, sp);
    for (int i = 0; i < 8; i++) begin
      access(0, 56'h0000_9000_0400 + PLEN'(i) * 56'h1000, 0, 0, rd, lat, sp);
      check(lat == 1, "8 lines of one set all hit");
    end
    // two ways become SPM: sweep
    spm_ways = 2;
    @(posedge clk); #1;
    check(busy, "configuration change starts a sweep");
    wait_idle();
    // write SPM way 0 and 1 at set 0x40 (offset 0x400 within each way)
    begin
      automatic int r0 = mem_reads, w0 = mem_writes;
      for (int k = 0; k < 2; k++) begin
        access(1, SPM_BASE + PLEN'(k) * 4096 + 56'h400, 64'hBEEF_0000 + 64'(k), 8'hff, rd, lat, sp);
        check(lat == 1 && sp, "SPM store takes one cycle");
      end
      for (int k = 0; k < 2; k++) begin
        access(0, SPM_BASE + PLEN'(k) * 4096 + 56'h400, 0, 0, rd, lat, sp);
        check(rd == 64'hBEEF_0000 + 64'(k) && lat == 1 && sp, "SPM read back in one cycle");
      end
      check(mem_reads == r0 && mem_writes == w0, "SPM accesses cause no memory traffic");
    end
    // stale lines of the 8 cached addresses must not hit SPM ways
    for (int i = 0; i < 8; i++) begin
      access(0, 56'h0000_9000_0400 + PLEN'(i) * 56'h1000, 0, 0, rd, lat, sp);
      check(rd == mword(56'h0000_9000_0400 + PLEN'(i) * 56'h1000) && !sp, "no hit on a way turned SPM");
    end
    // thrash set 0x40 with many lines: SPM data must stay
    for (int i = 0; i < 40; i++) begin
      access(0, 56'h0000_A000_0400 + PLEN'(i) * 56'h1000, 0, 0, rd, lat, sp);
      check(rd == mword(56'h0000_A000_0400 + PLEN'(i) * 56'h1000), "thrash read data");
    end
    for (int k = 0; k < 2; k++) begin
      access(0, SPM_BASE + PLEN'(k) * 4096 + 56'h400, 0, 0, rd, lat, sp);
      check(rd == 64'hBEEF_0000 + 64'(k) && lat == 1, "SPM way not used for refill");
    end
    // random SPM traffic against a reference array
    begin
      logic [63:0] ref_spm [1024];
      for (int i = 0; i < 1024; i++) begin
        ref_spm[i] = {$urandom, $urandom};
        access(1, SPM_BASE + PLEN'(i) * 8, ref_spm[i], 8'hff, rd, lat, sp);
      end
      for (int t = 0; t < 300; t++) begin
        automatic int i = $urandom % 1024;
        access(0, SPM_BASE + PLEN'(i) * 8, 0, 0, rd, lat, sp);
        check(rd == ref_spm[i] && lat == 1, "random SPM read");
      end
    end
    // all ways SPM: cached region is bypassed
    spm_ways = 8; @(posedge clk); wait_idle();
    access(0, A, 0, 0, rd, lat, sp);
    check(rd == mword(A) && lat > 2, "all-SPM: cached address read from memory");
    access(0, A, 0, 0, rd, lat, sp);
    check(lat > 2, "all-SPM: nothing allocated");
    // back to cache, flush
    spm_ways = 0; @(posedge clk); wait_idle();
    access(0, A, 0, 0, rd, lat, sp);
    access(0, A, 0, 0, rd, lat, sp);
    check(lat == 1, "hit before flush");
    flush = 1; @(posedge clk); #1 flush = 0; wait_idle();
    access(0, A, 0, 0, rd, lat, sp);
    check(lat > 2 && rd == mword(A), "miss after flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
