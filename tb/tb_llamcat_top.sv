// tb_llamcat_top: end-to-end run of the whole LLC subsystem (16 cores,
// 8 slices, BMA arbitration, two-level throttling) on a grouped-query
// Logit-like kernel, with the slices shrunk to 16 sets (1 MB -> 64 KB in
// total) so that capacity misses, evictions and write-backs occur within a
// short run. See llamcat_tb_body.svh for the traffic and the checks.
module tb_llamcat_top;
  import llamcat_pkg::*;
  localparam int NL    = 1024;   // key lines per head group
  localparam int TBL   = 8;      // lines per thread block
  localparam int MLP   = 4;      // reads in flight per thread block
  localparam int LAG   = 2;      // block offset between group members
  localparam int TB_SETS = 16;   // sets per slice in this run
  localparam int DLAT  = 120;    // DRAM latency, cycles
  localparam int WATCH = 200000;

  llamcat_top #(.SETS(TB_SETS)) dut (.*);

`include "llamcat_tb_body.svh"
endmodule
