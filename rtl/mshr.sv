// mshr: miss status holding registers of one LLC slice.
//
// NUM_ENTRY entries each track one line address that is pending in DRAM
// (numEntry) and the requesters merged into it, at most NUM_TARGET requests
// (numTarget). Requesters are kept as a core bit mask plus a request count;
// responses to cores are identified by line address, so a core that asks
// twice for the same line is served by one response.
//
// Allocate port (used by the read miss at the end of the slice's MSHR
// stage): alloc_ok says whether the request can be taken, by merging into a
// matching entry that still has a free target or by opening a free entry
// (which also needs dram_ok, room in the DRAM request queue). alloc_new says
// an entry would be opened, so a DRAM read must be sent. Nothing changes
// unless alloc_fire is high. When alloc_ok is low the slice stalls.
//
// Fill port: when DRAM returns a line (fill_valid), fill_mask names the
// cores to forward it to and the entry is freed in the same cycle. A request
// whose line is being freed in that very cycle does not merge into it (it
// would miss the data); it opens a new entry instead.
//
// The snapshot outputs are the entries themselves, wired straight to the
// arbiter (valid, address, number of targets).
module mshr
  import llamcat_pkg::*;
#(
  parameter int NUM_ENTRY  = MSHR_ENTRIES,
  parameter int NUM_TARGET = MSHR_TARGETS
) (
  input  logic      clk,
  input  logic      rst_n,
  // allocate / merge
  input  logic      alloc_valid,
  input  logic      alloc_fire,
  input  laddr_t    alloc_addr,
  input  core_id_t  alloc_src,
  input  logic      dram_ok,
  output logic      alloc_ok,
  output logic      alloc_new,
  // DRAM return
  input  logic      fill_valid,
  input  laddr_t    fill_addr,
  output logic      fill_hit,
  output coremask_t fill_mask,
  // snapshot to the arbiter
  output logic      snap_valid [NUM_ENTRY],
  output laddr_t    snap_addr  [NUM_ENTRY],
  output logic [$clog2(NUM_TARGET+1)-1:0] snap_num [NUM_ENTRY],
  output logic [$clog2(NUM_ENTRY+1)-1:0]  used_entries
);
  localparam int NW = $clog2(NUM_TARGET + 1);

  logic      v    [NUM_ENTRY];
  laddr_t    a    [NUM_ENTRY];
  logic [NW-1:0] n [NUM_ENTRY];
  coremask_t m    [NUM_ENTRY];

  // fill lookup
  int fill_idx;
  always_comb begin
    fill_idx = -1;
    for (int i = NUM_ENTRY - 1; i >= 0; i--)
      if (v[i] && a[i] == fill_addr) fill_idx = i;
    fill_hit  = fill_valid && (fill_idx >= 0);
    fill_mask = fill_hit ? m[fill_idx] : '0;
  end

  // allocate lookup
  int match_idx, free_idx;
  always_comb begin
    match_idx = -1;
    free_idx  = -1;
    for (int i = NUM_ENTRY - 1; i >= 0; i--) begin
      if (v[i] && a[i] == alloc_addr && !(fill_hit && fill_idx == i)) match_idx = i;
      if (!v[i]) free_idx = i;
    end
    if (match_idx >= 0) begin
      alloc_ok  = alloc_valid && (n[match_idx] < NW'(NUM_TARGET));
      alloc_new = 1'b0;
    end else begin
      alloc_ok  = alloc_valid && (free_idx >= 0) && dram_ok;
      alloc_new = alloc_valid;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_ENTRY; i++) begin
        v[i] <= 1'b0;
        a[i] <= '0;
        n[i] <= '0;
        m[i] <= '0;
      end
    end else begin
      if (fill_hit) v[fill_idx] <= 1'b0;
      if (alloc_fire && alloc_ok) begin
        if (match_idx >= 0) begin
          n[match_idx] <= n[match_idx] + 1'b1;
          m[match_idx][alloc_src] <= 1'b1;
        end else begin
          v[free_idx] <= 1'b1;
          a[free_idx] <= alloc_addr;
          n[free_idx] <= NW'(1);
          m[free_idx] <= coremask_t'(1) << alloc_src;
        end
      end
    end
  end

  always_comb begin
    used_entries = '0;
    for (int i = 0; i < NUM_ENTRY; i++) begin
      snap_valid[i] = v[i];
      snap_addr[i]  = a[i];
      snap_num[i]   = v[i] ? n[i] : '0;
      used_entries += v[i];
    end
  end

  a_fire_ok: assert property (@(posedge clk) disable iff (!rst_n) alloc_fire |-> alloc_ok);
endmodule
