// tb_clic_ctrl: checks interrupt injection at commit: the 2-cycle injection
// time with commit ready and 3 cycles when commit waits one cycle, the
// threshold and current-level (preemption) rules, the privilege-rank rule
// for M, HS and VS targets including direct injection into a virtualised
// guest, vector addresses for vectored and non-vectored interrupts, the
// acknowledge to the CLIC, the hold while the context save is busy and
// tail-chaining on a handler return.
module tb_clic_ctrl;
  import cva6rt_pkg::*;
  logic clk = 0, rst_n = 0;
  clic_irq_t irq;
  priv_lvl_t priv;
  logic virt, mie, sie, vsie, commit_ready, ctx_busy, take, ack, xret, tail;
  logic [7:0] mth, sth, vsth, mil, sil, vsil, ack_id;
  irq_trap_t trap;
  int checks = 0, failures = 0;
  localparam logic [PLEN-1:0] MTVT = 56'h1000, STVT = 56'h2000, VSTVT = 56'h3000;
  localparam logic [PLEN-1:0] MTVEC = 56'h4000, STVEC = 56'h5000, VSTVEC = 56'h6000;

  clic_ctrl dut (
    .clk_i(clk), .rst_ni(rst_n), .irq_i(irq), .priv_lvl_i(priv), .virt_i(virt),
    .mie_i(mie), .sie_i(sie), .vsie_i(vsie), .mintthresh_i(mth), .sintthresh_i(sth),
    .vsintthresh_i(vsth), .mil_i(mil), .sil_i(sil), .vsil_i(vsil),
    .mtvt_i(MTVT), .stvt_i(STVT), .vstvt_i(VSTVT), .mtvec_i(MTVEC), .stvec_i(STVEC), .vstvec_i(VSTVEC),
    .commit_ready_i(commit_ready), .xret_i(xret), .ctx_busy_i(ctx_busy), .trap_o(trap), .take_o(take),
    .tail_chain_o(tail),
    .ack_o(ack), .ack_id_o(ack_id));

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic clic_irq_t mk(int id, logic [7:0] lvl, priv_lvl_t m, bit v = 0, bit shv = 0);
    clic_irq_t r = '0;
    r.valid = 1; r.id = 8'(id); r.level = lvl; r.ctl = lvl; r.mode = m; r.virt = v; r.shv = shv;
    return r;
  endfunction

  // present irq from a negedge; return cycles until take (or -1 within 8)
  task automatic present(clic_irq_t r, output int lat, output irq_trap_t t);
    @(negedge clk) irq = r;
    lat = -1;
    for (int c = 1; c <= 8; c++) begin
      @(posedge clk); #2;
      if (take) begin lat = c; t = trap; break; end
    end
    @(negedge clk) irq = '0;
    repeat (3) @(negedge clk);
  endtask

  int lat; irq_trap_t t;
  initial begin
    irq = '0; xret = 0; priv = PRIV_M; virt = 0; mie = 1; sie = 0; vsie = 0; commit_ready = 1; ctx_busy = 0;
    mth = 0; sth = 0; vsth = 0; mil = 0; sil = 0; vsil = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    // M-mode interrupt in M mode: 2 cycles
    present(mk(17, 8'h80, PRIV_M), lat, t);
    check(lat == 2, "injection takes 2 cycles with commit ready");
    check(t.id == 17 && t.mode == PRIV_M && t.vec_addr == MTVEC, "M trap, non-vectored handler base");
    // commit not ready for one cycle: 3 cycles
    fork
      present(mk(18, 8'h80, PRIV_M, 0, 1), lat, t);
      begin @(negedge clk); repeat (2) @(posedge clk); #1 commit_ready = 0; @(posedge clk); #1 commit_ready = 1; end
    join
    check(lat == 3, "injection takes 3 cycles when commit waits one cycle");
    check(t.vec_addr == MTVT + 18 * 8, "vectored: table entry address");
    // thresholds and current level
    mth = 8'h90;
    present(mk(19, 8'h80, PRIV_M), lat, t); check(lat == -1, "below threshold not taken");
    mth = 0; mil = 8'h80;
    present(mk(19, 8'h80, PRIV_M), lat, t); check(lat == -1, "same level as running handler not taken");
    present(mk(20, 8'hC0, PRIV_M), lat, t); check(lat == 2, "higher level preempts");
    mil = 0; mie = 0;
    present(mk(21, 8'hC0, PRIV_M), lat, t); check(lat == -1, "mie clear in M mode blocks");
    // lower-mode interrupts
    mie = 1;
    present(mk(22, 8'hC0, PRIV_S), lat, t); check(lat == -1, "S interrupt not taken in M mode");
    priv = PRIV_U;
    present(mk(23, 8'h40, PRIV_S, 0, 1), lat, t);
    check(lat == 2 && t.mode == PRIV_S && !t.virt && t.vec_addr == STVT + 23 * 8,
          "S interrupt injected directly from U mode");
    priv = PRIV_S; sie = 0;
    present(mk(24, 8'h40, PRIV_S), lat, t); check(lat == -1, "sie clear in S mode blocks");
    sie = 1;
    present(mk(24, 8'h40, PRIV_S), lat, t); check(lat == 2 && t.vec_addr == STVEC, "S interrupt in S mode");
    // virtualised guest
    present(mk(25, 8'h40, PRIV_S, 1), lat, t); check(lat == -1, "VS interrupt not taken in HS mode");
    virt = 1; vsie = 1;
    present(mk(26, 8'h40, PRIV_S, 1, 1), lat, t);
    check(lat == 2 && t.virt && t.mode == PRIV_S && t.vec_addr == VSTVT + 26 * 8,
          "VS interrupt injected into the guest");
    present(mk(27, 8'h40, PRIV_S, 0), lat, t);
    check(lat == 2 && !t.virt, "HS interrupt preempts the guest");
    vsth = 8'h50;
    present(mk(28, 8'h40, PRIV_S, 1), lat, t); check(lat == -1, "VS threshold");
    // context save busy holds the trap
    vsth = 0; priv = PRIV_M; virt = 0;
    fork
      present(mk(29, 8'h80, PRIV_M), lat, t);
      begin @(negedge clk); @(posedge clk); #1 ctx_busy = 1; repeat (3) @(posedge clk); #1 ctx_busy = 0; end
    join
    check(lat == 4, "trap held while context save is busy");
    // acknowledge accompanies take
    @(negedge clk) irq = mk(33, 8'h80, PRIV_M);
    @(posedge clk); @(posedge clk); #1;
    check(take && ack && ack_id == 33, "ack with id on take");
    @(posedge clk); #1 check(!take, "taken once");
    check(!tail, "no tail-chain without a return");
    // tail-chaining: a pending lower-level interrupt is taken on the handler's return
    @(negedge clk) irq = '0; mil = 8'h80;
    @(negedge clk) irq = mk(34, 8'h40, PRIV_M);
    repeat (4) @(negedge clk);
    check(!take, "lower level waits while the handler runs");
    mil = 0; xret = 1; #1;
    check(take && tail && trap.id == 34, "taken as a tail-chain on the return");
    @(negedge clk) xret = 0; irq = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
