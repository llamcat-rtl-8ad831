// tb_llamcat_full: the end-to-end run of tb_llamcat_top on the LLC
// subsystem at its evaluated size, with every parameter of llamcat_top at
// its default (16 cores, 8 slices of 4096 sets x 8 ways = 16 MB, BMA
// arbitration, 2000-cycle throttling period). The key-line footprint fits in
// the cache, so misses are compulsory; write-backs come from the output
// lines, which all map to one set per slice. See llamcat_tb_body.svh for
// the traffic and the checks.
module tb_llamcat_full;
  import llamcat_pkg::*;
  localparam int NL      = 1024;        // key lines per head group
  localparam int TBL     = 8;           // lines per thread block
  localparam int MLP     = 4;           // reads in flight per thread block
  localparam int LAG     = 2;           // block offset between group members
  localparam int TB_SETS = SLICE_SETS;  // sets per slice (the default)
  localparam int DLAT    = 120;         // DRAM latency, cycles
  localparam int WATCH   = 200000;

  llamcat_top dut (.*);

`include "llamcat_tb_body.svh"
endmodule
