// llc_storage: tag and data arrays of one LLC slice.
//
// SETS sets of WAYS ways of one 64-byte line each (defaults: 4096 x 8, i.e.
// 2 MB, one eighth of the 16 MB LLC). The line address splits into
// {tag, set, slice}; the slice bits are the same for every line of this
// slice (parameter SLICE_ID) and are not stored.
//
// Lookup port: combinational; lk_hit and lk_data for lk_addr.
// Write port: one write per cycle, of one of two kinds.
//   * wr_core = 1, a core write of a full line: a present line is
//     overwritten and marked dirty; otherwise the line is allocated
//     (write-allocate, no fetch needed since the whole line is written).
//   * wr_core = 0, a fill from DRAM (allocate-on-fill): a line already
//     present is left as it is (it may hold newer data), otherwise the line
//     is written clean.
// An allocation replaces the way named by the set's round-robin pointer;
// if that way holds a dirty line, ev_valid/ev_addr/ev_data describe it in
// the same cycle so the slice can queue the write-back. The replacement
// policy is this design's choice: the source design names none.
//
// Arrays: each way's data is a memory of SETS lines; the per-set state
// (valid and dirty bits, round-robin pointer and the WAYS tags) is one
// memory word per set, so both map onto RAM macros rather than flip-flops.
// Because RAMs have no reset, after rst_n the module walks through the
// sets, one per cycle, clearing their state; `ready` goes high when this
// sweep is done (SETS cycles after reset) and the user must neither write
// nor rely on lookups before then (lk_hit reads 0 meanwhile).
module llc_storage
  import llamcat_pkg::*;
#(
  parameter int SETS     = SLICE_SETS,
  parameter int WAYS     = L2_WAYS,
  parameter int SLICE_ID = 0
) (
  input  logic   clk,
  input  logic   rst_n,
  output logic   ready,
  input  laddr_t lk_addr,
  output logic   lk_hit,
  output line_t  lk_data,
  input  logic   wr_en,
  input  logic   wr_core,
  input  laddr_t wr_addr,
  input  line_t  wr_data,
  output logic   ev_valid,
  output laddr_t ev_addr,
  output line_t  ev_data
);
  localparam int SET_W = $clog2(SETS);
  localparam int WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int TAG_W = LADDR_W - SLICE_W - SET_W;
  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [SET_W-1:0] set_t;

  typedef struct packed {
    logic [WAYS-1:0]            valid;
    logic [WAYS-1:0]            dirty;
    logic [WAY_W-1:0]           rr;
    logic [WAYS-1:0][TAG_W-1:0] tag;
  } meta_t;

  meta_t meta [SETS];

  function automatic set_t set_of(input laddr_t x);
    return x[SLICE_W +: SET_W];
  endfunction
  function automatic tag_t tag_of(input laddr_t x);
    return x[LADDR_W-1 -: TAG_W];
  endfunction

  // reset sweep
  logic init;
  set_t init_ptr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init     <= 1'b1;
      init_ptr <= '0;
    end else if (init) begin
      init_ptr <= init_ptr + 1'b1;
      if (init_ptr == set_t'(SETS - 1)) init <= 1'b0;
    end
  end
  assign ready = !init;

  // per-way data memories, read at the lookup set and at the write set
  set_t  lk_set, wr_set;
  assign lk_set = set_of(lk_addr);
  assign wr_set = set_of(wr_addr);
  line_t lk_way_data [WAYS];
  line_t wr_way_data [WAYS];
  logic  [WAY_W-1:0] wr_way, victim;
  logic  do_alloc, do_update;

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    line_t dmem [SETS];
    wire we = (do_alloc && victim == WAY_W'(w)) || (do_update && wr_way == WAY_W'(w));
    always_ff @(posedge clk)
      if (we) dmem[wr_set] <= wr_data;
    assign lk_way_data[w] = dmem[lk_set];
    assign wr_way_data[w] = dmem[wr_set];
  end

  // lookup
  meta_t lk_meta;
  always_comb begin
    lk_meta = meta[lk_set];
    lk_hit  = 1'b0;
    lk_data = '0;
    for (int w = 0; w < WAYS; w++)
      if (!init && lk_meta.valid[w] && lk_meta.tag[w] == tag_of(lk_addr)) begin
        lk_hit  = 1'b1;
        lk_data = lk_way_data[w];
      end
  end

  // write
  meta_t wr_meta, new_meta;
  logic  wr_hit;
  always_comb begin
    wr_meta = meta[wr_set];
    wr_hit  = 1'b0;
    wr_way  = '0;
    for (int w = 0; w < WAYS; w++)
      if (wr_meta.valid[w] && wr_meta.tag[w] == tag_of(wr_addr)) begin
        wr_hit = 1'b1;
        wr_way = WAY_W'(w);
      end
    victim    = wr_meta.rr;
    do_alloc  = wr_en && !init && !wr_hit;
    do_update = wr_en && !init && wr_hit && wr_core;
    ev_valid  = do_alloc && wr_meta.valid[victim] && wr_meta.dirty[victim];
    ev_addr   = {wr_meta.tag[victim], wr_set, SLICE_W'(SLICE_ID)};
    ev_data   = wr_way_data[victim];

    new_meta = wr_meta;
    if (do_alloc) begin
      new_meta.valid[victim] = 1'b1;
      new_meta.dirty[victim] = wr_core;
      new_meta.tag[victim]   = tag_of(wr_addr);
      new_meta.rr            = (wr_meta.rr == WAY_W'(WAYS - 1)) ? '0 : wr_meta.rr + 1'b1;
    end else if (do_update) begin
      new_meta.dirty[wr_way] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (init)
      meta[init_ptr] <= '0;
    else if (do_alloc || do_update)
      meta[wr_set] <= new_meta;
  end
endmodule
