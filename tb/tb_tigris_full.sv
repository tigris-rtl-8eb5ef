// tb_tigris_full: one frame through the accelerator with every parameter at
// its default (64 recursion units, 32 search units of 32 PEs, buffers sized
// for 131072 points and queries) and the paper's top-tree height of 10
// (1024 leaves). The Node Sets are kept small (1 to 3 points per leaf) and the
// query count modest so that the simulation stays within minutes; the tree,
// the checks and the mechanism counts are those of tb_tigris_top.
module tb_tigris_full;
  import tigris_pkg::*;
  localparam int HTOP          = 10;
  localparam int NPTS_MAX_LEAF = 3;
  localparam int NQ            = 600;
  localparam int DUP           = 150;
  localparam int HOT           = 48;
  localparam int BOX_LOG       = 16;
  localparam longint THD_SQ    = 10000;
  localparam int WATCHDOG      = 3000000;

`include "tigris_tb_body.svh"

  tigris_top dut (.*);
endmodule
