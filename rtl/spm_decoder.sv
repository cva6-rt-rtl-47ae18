// spm_decoder: physical-address decoder in front of an L1 cache whose ways
// can serve as scratchpad memory (SPM).
//
// The SPM ways are the contiguous ways 0 .. spm_ways_i-1. Together they form
// one window in the physical address space that starts at SPM_BASE and is
// spm_ways_i * WAY_BYTES long; window offset k*WAY_BYTES + o lands in way k at
// byte o of that way, i.e. set o / LINE_BYTES and byte o % LINE_BYTES of the
// line. Addresses outside the window go to the cache.
//
// Purely combinational. Steering to SPM by address, and the SPM being made of
// contiguous ways, follow the paper; the base address, the way order and the
// way-to-window mapping are this design's choices.
module spm_decoder
  import cva6rt_pkg::*;
#(
  parameter int unsigned     WAYS       = 8,
  parameter int unsigned     WAY_BYTES  = 4096,
  parameter int unsigned     LINE_BYTES = 16,
  parameter logic [PLEN-1:0] SPM_BASE   = 56'h0000_1000_0000,
  localparam int unsigned    WAY_W      = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned    SET_W      = $clog2(WAY_BYTES / LINE_BYTES),
  localparam int unsigned    OFF_W      = $clog2(LINE_BYTES)
) (
  input  logic [PLEN-1:0] paddr_i,
  input  logic [WAY_W:0]  spm_ways_i,
  output logic            is_spm_o,
  output logic [WAY_W-1:0] way_o,
  output logic [SET_W-1:0] set_o,
  output logic [OFF_W-1:0] off_o
);

  localparam int unsigned WOFF_W = $clog2(WAY_BYTES);

  logic [PLEN-1:0] rel;
  logic [PLEN-1:0] way_num;

  assign rel     = paddr_i - SPM_BASE;
  assign way_num = rel >> WOFF_W;
  assign is_spm_o = (paddr_i >= SPM_BASE) && (way_num < PLEN'(spm_ways_i));
  assign way_o   = way_num[WAY_W-1:0];
  assign set_o   = rel[WOFF_W-1:OFF_W];
  assign off_o   = rel[OFF_W-1:0];

endmodule
