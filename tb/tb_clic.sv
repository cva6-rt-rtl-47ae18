// tb_clic: checks the CLIC at its default size (256 interrupts):
// register write/read-back, the 3-cycle propagation from a source edge to
// irq_o, arbitration (mode first, then clicintctl, then id), disabled
// interrupts ignored, level formation from nlbits, edge-triggered pending
// kept until acknowledged, negative polarity, and the virtual bit.
module tb_clic;
  import cva6rt_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [255:0] src;
  logic reg_req, reg_we, ack;
  logic [15:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic [3:0] reg_be;
  logic [7:0] ack_id;
  clic_irq_t irq;
  int checks = 0, failures = 0;

  clic #(.NUM_INTR(256)) dut (
    .clk_i(clk), .rst_ni(rst_n), .intr_src_i(src), .reg_req_i(reg_req), .reg_we_i(reg_we),
    .reg_addr_i(reg_addr), .reg_wdata_i(reg_wdata), .reg_be_i(reg_be), .reg_rdata_o(reg_rdata),
    .irq_o(irq), .ack_i(ack), .ack_id_i(ack_id));

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
    if (!cond) begin failures++; $display("FAIL: %s (valid=%0d id=%0d)", what, irq.valid, irq.id); end
  endtask

  task automatic wr(logic [15:0] a, logic [31:0] d, logic [3:0] b = 4'hf);
    @(negedge clk); reg_req = 1; reg_we = 1; reg_addr = a; reg_wdata = d; reg_be = b;
    @(negedge clk); reg_req = 0; reg_we = 0;
  endtask
  // ctl, attr, ie for interrupt i
  task automatic cfg(int i, logic [7:0] ctl, logic [7:0] attr, bit ie);
    wr(16'h1000 + 16'(4 * i), {ctl, attr, 7'b0, ie, 8'h0}, 4'b1110);
  endtask
  task automatic settle(int n = 4); repeat (n) @(negedge clk); endtask

  int lat;
  initial begin
    src = '0; reg_req = 0; reg_we = 0; reg_addr = 0; reg_wdata = 0; reg_be = 0; ack = 0; ack_id = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    wr(16'h0, 32'd8 << 1);   // nlbits = 8
    // register read-back
    cfg(5, 8'h80, 8'hC0, 1);  // M mode, level, positive
    #1 reg_addr = 16'h1014; #1;
    check(reg_rdata == {8'h80, 8'hC0, 7'b0, 1'b1, 8'h0}, "clicint[5] read-back");
    // propagation latency: source rises at a negedge, count rising edges
    @(negedge clk) src[5] = 1;
    lat = 0;
    do begin @(posedge clk); #1 lat++; end while (!irq.valid && lat < 20);
    check(irq.valid && irq.id == 5 && lat == 3, "propagation is 3 cycles");
    check(irq.mode == PRIV_M && irq.level == 8'h80 && !irq.virt, "mode and level (nlbits=8)");
    // disabled interrupt with higher ctl is ignored
    cfg(9, 8'hF0, 8'hC0, 0);
    src[9] = 1; settle();
    check(irq.id == 5, "disabled interrupt not selected");
    // higher ctl wins once enabled
    cfg(9, 8'hF0, 8'hC0, 1); settle();
    check(irq.id == 9, "higher clicintctl wins");
    // equal ctl: higher id wins
    cfg(200, 8'hF0, 8'hC0, 1); src[200] = 1; settle();
    check(irq.id == 200, "equal ctl: higher id wins");
    // an M-mode interrupt beats an S-mode one with higher ctl
    cfg(201, 8'hFF, 8'h40, 1); src[201] = 1; settle();
    check(irq.id == 200, "M mode beats higher-ctl S mode");
    src[5] = 0; src[9] = 0; src[200] = 0; settle();
    check(irq.id == 201 && irq.mode == PRIV_S && !irq.virt, "S-mode interrupt alone");
    // virtual bit
    cfg(201, 8'hFF, 8'h60, 1); settle();
    check(irq.virt && irq.mode == PRIV_S, "virtual supervisor interrupt");
    src[201] = 0; settle();
    check(!irq.valid, "level interrupt drops with its source");
    // nlbits = 3: level = upper 3 bits of ctl, rest ones
    wr(16'h0, 32'd3 << 1);
    cfg(7, 8'h40, 8'hC3, 1);  // M, edge-triggered, shv
    @(negedge clk) src[7] = 1; @(negedge clk) src[7] = 0;
    settle();
    check(irq.valid && irq.id == 7 && irq.level == 8'h5F && irq.shv, "edge pending kept, level from nlbits");
    // acknowledge clears it
    @(negedge clk) ack = 1; ack_id = 7; @(negedge clk) ack = 0;
    #1 check(!irq.valid, "acknowledge removes the interrupt at once");
    settle();
    check(!irq.valid, "acknowledged edge interrupt stays cleared");
    // negative polarity, level: active while the line is low
    cfg(30, 8'h10, 8'hC4, 1); settle();
    check(irq.valid && irq.id == 30, "negative polarity active when low");
    src[30] = 1; settle();
    check(!irq.valid, "negative polarity inactive when high");
    // software sets an edge-triggered pending bit
    cfg(31, 8'h20, 8'hC2, 1);
    wr(16'h1000 + 16'(4 * 31), 32'h1, 4'b0001); settle();
    check(irq.valid && irq.id == 31, "software-set pending bit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
