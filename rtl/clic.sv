// clic: RISC-V Core-Local Interrupt Controller with a virtualisation bit.
//
// Each of NUM_INTR interrupts has four byte-wide registers, at byte offsets
// 0..3 of the word at 0x1000 + 4*i: clicintip (pending), clicintie (enable),
// clicintattr ([7:6] privilege mode, [5] virtual: an S-mode interrupt
// delivered to the virtual supervisor, [2] negative polarity, [1] edge
// triggered, [0] selective hardware vectoring) and clicintctl (level and
// priority). cliccfg at 0x0 holds nlbits in bits [4:1]: the number of upper
// clicintctl bits that form the interrupt level (the lower bits of the level
// read as ones).
//
// The interrupt path is three register stages, so a source edge reaches
// irq_o in the third clock edge after it (the propagation delay of 3 cycles
// of the design this implements):
//   1. pending: level-triggered bits follow the (polarity-corrected) source,
//      edge-triggered bits are set on an active edge and stay set;
//   2. arbitration: among pending and enabled interrupts the highest mode,
//      then highest clicintctl, then highest id is selected and registered;
//   3. output register towards the core.
// ack_i/ack_id_i from the core clear an edge-triggered pending bit and drop
// copies of that id still in stages 2 and 3, so it is not taken twice.
//
// Register bus: reg_req_i with reg_we_i and byte enables; writes take effect
// on the next edge, reads are combinational. The register layout and the
// arbitration order follow the RISC-V CLIC draft; the virtual bit's encoding,
// the fixed mode field (nmbits is not modelled) and the stage split are this
// design's choices.
module clic
  import cva6rt_pkg::*;
#(
  parameter int unsigned NUM_INTR = 256,
  localparam int unsigned ID_W    = $clog2(NUM_INTR)
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [NUM_INTR-1:0] intr_src_i,
  // register bus
  input  logic                reg_req_i,
  input  logic                reg_we_i,
  input  logic [15:0]         reg_addr_i,
  input  logic [31:0]         reg_wdata_i,
  input  logic [3:0]          reg_be_i,
  output logic [31:0]         reg_rdata_o,
  // to / from the core
  output clic_irq_t           irq_o,
  input  logic                ack_i,
  input  logic [7:0]          ack_id_i
);

  logic [NUM_INTR-1:0] ip_q, ie_q, src_q;
  logic [7:0]          attr_q [NUM_INTR];
  logic [7:0]          ctl_q  [NUM_INTR];
  logic [3:0]          nlbits_q;
  clic_irq_t           arb_d, arb_q, out_q;

  logic              reg_int;
  logic [ID_W-1:0]   reg_idx;
  assign reg_int = reg_addr_i[15:12] == 4'h1;
  assign reg_idx = reg_addr_i[ID_W+1:2];

  function automatic logic [7:0] level_of(input logic [7:0] ctl, input logic [3:0] nl);
    return ctl | (8'hff >> ((nl > 4'd8) ? 4'd8 : nl));
  endfunction

  // source after polarity correction, now and one cycle earlier
  logic [NUM_INTR-1:0] act, act_prev;
  always_comb begin
    for (int unsigned i = 0; i < NUM_INTR; i++) begin
      act[i]      = intr_src_i[i] ^ attr_q[i][2];
      act_prev[i] = src_q[i] ^ attr_q[i][2];
    end
  end

  // stage 2: arbitration over the key {mode, ctl, id}
  always_comb begin
    logic [17:0] best_key, key;
    arb_d    = '0;
    best_key = '0;
    for (int unsigned i = 0; i < NUM_INTR; i++) begin
      key = {attr_q[i][7:6], ctl_q[i], 8'(i)};
      if (ip_q[i] && ie_q[i] && (!arb_d.valid || key > best_key)) begin
        best_key    = key;
        arb_d.valid = 1'b1;
        arb_d.id    = 8'(i);
        arb_d.ctl   = ctl_q[i];
        arb_d.level = level_of(ctl_q[i], nlbits_q);
        arb_d.mode  = priv_lvl_t'(attr_q[i][7:6]);
        arb_d.virt  = attr_q[i][5] && (attr_q[i][7:6] == PRIV_S);
        arb_d.shv   = attr_q[i][0];
      end
    end
  end

  // register read
  always_comb begin
    reg_rdata_o = '0;
    if (reg_int) reg_rdata_o = {ctl_q[reg_idx], attr_q[reg_idx], 7'b0, ie_q[reg_idx], 7'b0, ip_q[reg_idx]};
    else if (reg_addr_i == 16'h0) reg_rdata_o = {27'b0, nlbits_q, 1'b0};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ip_q     <= '0;
      ie_q     <= '0;
      src_q    <= '0;
      nlbits_q <= 4'd8;
      arb_q    <= '0;
      out_q    <= '0;
      for (int unsigned i = 0; i < NUM_INTR; i++) begin
        attr_q[i] <= '0;
        ctl_q[i]  <= '0;
      end
    end else begin
      // stage 1: pending
      for (int unsigned i = 0; i < NUM_INTR; i++) begin
        if (!attr_q[i][1])                ip_q[i] <= act[i];
        else if (act[i] && !act_prev[i])  ip_q[i] <= 1'b1;
        else if (ack_i && ack_id_i == 8'(i)) ip_q[i] <= 1'b0;
      end
      src_q <= intr_src_i;
      // register writes
      if (reg_req_i && reg_we_i) begin
        if (reg_int) begin
          if (reg_be_i[0] && attr_q[reg_idx][1]) ip_q[reg_idx] <= reg_wdata_i[0];
          if (reg_be_i[1]) ie_q[reg_idx]   <= reg_wdata_i[8];
          if (reg_be_i[2]) attr_q[reg_idx] <= reg_wdata_i[23:16];
          if (reg_be_i[3]) ctl_q[reg_idx]  <= reg_wdata_i[31:24];
        end else if (reg_addr_i == 16'h0 && reg_be_i[0]) begin
          nlbits_q <= reg_wdata_i[4:1];
        end
      end
      // stages 2 and 3
      arb_q <= arb_d;
      out_q <= arb_q;
      if (ack_i && arb_d.id == ack_id_i) arb_q.valid <= 1'b0;
      if (ack_i && arb_q.id == ack_id_i) out_q.valid <= 1'b0;
    end
  end

  assign irq_o = out_q;

endmodule
