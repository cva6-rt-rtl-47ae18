// ctx_save: hardware register stacking on interrupt entry.
//
// On start_i (the cycle the commit stage takes an interrupt) the unit latches
// mask_i and base_i and then stores, in ascending register order, every
// register whose mask bit is set: it reads the register through rf_raddr_o /
// rf_rdata_i (a combinational register-file read port) and issues a 64-bit
// store of it to base + 8*i on the mem_* port, moving to the next register in
// the cycle the store is granted. With the port always granted, n registers
// take n cycles. x0 is never saved. mem_wdata_o is the register read data
// passed straight through and mem_be_o is always all-ones (whole words).
//
// The save runs in the background while the pipeline is flushed and the
// handler is fetched, which is why it adds no cycles to the interrupt
// latency. pending_o marks the registers not yet stored; the issue stage has
// to hold any write to them until their bit clears. busy_o is high from the
// cycle after start_i until the last store is granted; done_o pulses then.
//
// Saving a configurable register subset to a fixed memory area on interrupt
// entry follows the paper; the memory layout, the ordering and the
// pending-register interlock are this design's choices.
module ctx_save
  import cva6rt_pkg::*;
#(
  parameter int unsigned NREGS = 32,
  localparam int unsigned RW   = $clog2(NREGS)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             start_i,
  input  logic [NREGS-1:0] mask_i,
  input  logic [PLEN-1:0]  base_i,
  // register-file read port
  output logic [RW-1:0]    rf_raddr_o,
  input  logic [XLEN-1:0]  rf_rdata_i,
  // store port
  output logic             mem_req_o,
  output logic [PLEN-1:0]  mem_addr_o,
  output logic [XLEN-1:0]  mem_wdata_o,
  output logic [7:0]       mem_be_o,
  input  logic             mem_gnt_i,
  // status
  output logic             busy_o,
  output logic             done_o,
  output logic [NREGS-1:0] pending_o
);

  logic [NREGS-1:0] todo_q;
  logic [PLEN-1:0]  base_q;
  logic [RW-1:0]    cur;

  // lowest register still to save
  always_comb begin
    cur = '0;
    for (int r = NREGS - 1; r >= 0; r--) if (todo_q[r]) cur = RW'(r);
  end

  assign busy_o      = |todo_q;
  assign pending_o   = todo_q;
  assign rf_raddr_o  = cur;
  assign mem_req_o   = busy_o;
  assign mem_addr_o  = base_q + (PLEN'(cur) << 3);
  assign mem_wdata_o = rf_rdata_i;
  assign mem_be_o    = 8'hff;
  assign done_o      = busy_o && mem_gnt_i && ((todo_q & ~(NREGS'(1) << cur)) == '0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      todo_q <= '0;
      base_q <= '0;
    end else if (!busy_o) begin
      if (start_i) begin
        todo_q <= mask_i & ~NREGS'(1);
        base_q <= base_i;
      end
    end else if (mem_gnt_i) begin
      todo_q[cur] <= 1'b0;
    end
  end

  a_no_start_busy: assert property (@(posedge clk_i) disable iff (!rst_ni) start_i |-> !busy_o)
    else $error("context save started while busy");

endmodule
