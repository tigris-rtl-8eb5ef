// tb_tigris_top: end-to-end test of the accelerator at reduced size
// (4 recursion units, 2 search units of 4 PEs, 8 top-tree leaves). It runs
// one frame with exact search and one with approximate search and checks
// every result and that each mechanism of the design occurred.
module tb_tigris_top;
  import tigris_pkg::*;
  localparam int HTOP          = 3;
  localparam int NPTS_MAX_LEAF = 24;
  localparam int NQ            = 240;
  localparam int DUP           = 60;
  localparam int HOT           = 0;
  localparam int BOX_LOG       = 12;
  localparam longint THD_SQ    = 400;
  localparam int WATCHDOG      = 200000;

`include "tigris_tb_body.svh"

  tigris_top #(.NRU(4), .NSU(2), .NPE(4), .QMAX(256), .PBUF_DEPTH(1024), .BQB_DEPTH(16),
               .BQB_GROUP(8), .LB_SLOTS(4), .NC_ENTRIES(2), .NC_SET_MAX(20)) dut (.*);
endmodule
