// llc_slice: one slice of the shared last-level cache with its CAT arbiter.
//
// Request path (numbers follow the usual description of this cache):
//  (1) requests from the interconnect wait in the arbiter's request queue;
//  (2) the arbiter sends one request into the tag pipeline; after HIT_LAT
//      cycles the tag lookup resolves. A read hit is returned to its core
//      DATA_LAT cycles later on hit_resp and its address is recorded in the
//      hit_buffer. A write (always a full line) updates or allocates the
//      line in storage and is done;
//  (3) a read miss spends MSHR_LAT more cycles and then merges into a
//      matching MSHR entry or opens a new one, which queues a DRAM read. If
//      neither is possible (entries or targets exhausted, or no room in the
//      DRAM read queue) the whole request pipeline stalls: nothing moves
//      and no request is taken from the queue, hits included.
// Response path:
//  (4)/(4') a line from DRAM is matched in the MSHR; it goes straight to
//      the requesting cores on fwd_resp (core mask) and into the response
//      queue, and the MSHR entry is freed in the same cycle. DRAM returns
//      are refused only when the response queue is full;
//  (5) the response queue is drained into cache storage (allocate-on-fill);
//      every fill is kept (no bypassing).
// Request/response arbitration is response-queue-first: in a cycle where a
// response is written into storage, no request enters the pipeline. A
// write at the end of the tag pipeline has the storage write port before
// the response queue, which then waits one cycle.
// Dirty victims of fills and write allocations go to a write-back queue;
// the DRAM request port takes reads first unless the write-back queue is
// full. After reset no request is issued for SETS cycles while storage
// clears its per-set state.
//
// stall_o is high in each cycle the request pipeline is stalled; its count
// over a sampling period is the cache-stall measure of the global
// throttling controller. The ev_* outputs pulse once per event and exist for
// performance counting.
//
// The latencies, sizes and MSHR geometry follow the evaluated
// configuration; the broadcast response buses, the write-back queue, the
// pipeline-over-fill write priority and the DRAM port order are this
// design's own choices.
module llc_slice
  import llamcat_pkg::*;
#(
  parameter int          SETS        = SLICE_SETS,
  parameter int          SLICE_ID    = 0,
  parameter int          H_LAT       = HIT_LAT,
  parameter int          M_LAT       = MSHR_LAT,
  parameter int          D_LAT       = DATA_LAT,
  parameter int          QSIZE       = REQ_Q_SIZE,
  parameter int          RQ_SIZE     = RESP_Q_SIZE,
  parameter int          DRAM_Q_SIZE = 8,
  parameter int          NUM_ENTRY   = MSHR_ENTRIES,
  parameter int          NUM_TARGET  = MSHR_TARGETS,
  parameter arb_policy_e POLICY      = POL_BMA
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       op_start,
  // requests from the interconnect
  input  logic       req_valid,
  input  req_t       req,
  output logic       req_ready,
  // responses to cores
  output logic       hit_resp_valid,
  output resp_t      hit_resp,
  output logic       fwd_resp_valid,
  output resp_t      fwd_resp,
  // memory side
  output logic       dram_req_valid,
  output dram_req_t  dram_req,
  input  logic       dram_req_ready,
  input  logic       dram_resp_valid,
  input  dram_resp_t dram_resp,
  output logic       dram_resp_ready,
  // to the throttling controller
  output cnt_t       cnt [NUM_CORES],
  output logic       stall_o,
  // event pulses
  output logic       ev_hit,
  output logic       ev_miss,
  output logic       ev_mshr_merge,
  output logic       ev_mshr_alloc,
  output logic       ev_writeback,
  output logic       ev_fill,
  output logic       ev_resp_first,
  output logic       ev_reorder,
  output logic       ev_spec_hit_ok
);
  // ---------------------------------------------------------------- arbiter
  logic   issue_en, arb_valid, arb_spec_hit, arb_spec_mshr, arb_not_oldest;
  req_t   arb_req;
  logic   advance;
  logic   hb_push;
  logic   snap_valid [NUM_ENTRY];
  laddr_t snap_addr  [NUM_ENTRY];
  logic [$clog2(NUM_TARGET+1)-1:0] snap_num [NUM_ENTRY];

  // pipeline registers
  logic  tp_v [H_LAT];
  req_t  tp   [H_LAT];
  logic  tp_sh[H_LAT];   // spec_hit_result the request was sent with
  logic  mp_v [M_LAT];
  req_t  mp   [M_LAT];
  logic  dp_v [D_LAT];
  resp_t dp   [D_LAT];

  cat_arbiter #(
    .QSIZE(QSIZE), .NUM_ENTRY(NUM_ENTRY), .NUM_TARGET(NUM_TARGET),
    .LIFETIME(H_LAT + M_LAT), .POLICY(POLICY)
  ) u_arb (
    .clk, .rst_n, .op_start,
    .in_valid(req_valid), .in_req(req), .in_ready(req_ready),
    .issue_en, .out_valid(arb_valid), .out_req(arb_req),
    .out_spec_hit(arb_spec_hit), .out_spec_mshr(arb_spec_mshr), .out_not_oldest(arb_not_oldest),
    .advance,
    .hb_push, .hb_addr(tp[H_LAT-1].addr),
    .snap_valid, .snap_addr, .snap_num,
    .cnt
  );

  // ---------------------------------------------------------------- storage
  logic   st_ready;
  logic   lk_hit;
  line_t  lk_data;
  logic   wr_en, wr_core;
  laddr_t wr_addr;
  line_t  wr_data;
  logic   ev_valid;
  laddr_t ev_addr;
  line_t  ev_data;

  llc_storage #(.SETS(SETS), .WAYS(L2_WAYS), .SLICE_ID(SLICE_ID)) u_store (
    .clk, .rst_n, .ready(st_ready),
    .lk_addr(tp[H_LAT-1].addr), .lk_hit, .lk_data,
    .wr_en, .wr_core, .wr_addr, .wr_data,
    .ev_valid, .ev_addr, .ev_data
  );

  // ---------------------------------------------------------------- queues
  localparam int RDW = $bits(dram_req_t);
  localparam int RSW = $bits(dram_resp_t);

  logic      rdq_push, rdq_pop, rdq_full, rdq_empty;
  dram_req_t rdq_in, rdq_out;
  logic      wbq_push, wbq_pop, wbq_full, wbq_empty;
  dram_req_t wbq_in, wbq_out;
  logic       rq_push, rq_pop, rq_full, rq_empty;
  dram_resp_t rq_out;

  sync_fifo #(.WIDTH(RDW), .DEPTH(DRAM_Q_SIZE)) u_rdq (
    .clk, .rst_n, .push(rdq_push), .wr_data(rdq_in), .pop(rdq_pop),
    .rd_data(rdq_out), .full(rdq_full), .empty(rdq_empty), .count());
  sync_fifo #(.WIDTH(RDW), .DEPTH(DRAM_Q_SIZE)) u_wbq (
    .clk, .rst_n, .push(wbq_push), .wr_data(wbq_in), .pop(wbq_pop),
    .rd_data(wbq_out), .full(wbq_full), .empty(wbq_empty), .count());
  sync_fifo #(.WIDTH(RSW), .DEPTH(RQ_SIZE)) u_respq (
    .clk, .rst_n, .push(rq_push), .wr_data(dram_resp), .pop(rq_pop),
    .rd_data(rq_out), .full(rq_full), .empty(rq_empty), .count());

  // ---------------------------------------------------------------- MSHR
  logic      alloc_ok, alloc_new, alloc_fire, fill_hit;
  coremask_t fill_mask;

  mshr #(.NUM_ENTRY(NUM_ENTRY), .NUM_TARGET(NUM_TARGET)) u_mshr (
    .clk, .rst_n,
    .alloc_valid(mp_v[M_LAT-1]), .alloc_fire, .alloc_addr(mp[M_LAT-1].addr),
    .alloc_src(mp[M_LAT-1].src), .dram_ok(!rdq_full),
    .alloc_ok, .alloc_new,
    .fill_valid(dram_resp_valid && dram_resp_ready), .fill_addr(dram_resp.addr),
    .fill_hit, .fill_mask,
    .snap_valid, .snap_addr, .snap_num, .used_entries()
  );

  // ---------------------------------------------------------------- control
  wire th_v     = tp_v[H_LAT-1];
  wire th_write = th_v && tp[H_LAT-1].write;
  wire m_block  = mp_v[M_LAT-1] && !alloc_ok;
  wire t_block  = th_write && wbq_full;   // a write may evict a dirty line
  assign stall_o = m_block || t_block;
  assign advance = !stall_o;

  wire pipe_wr   = th_write && advance;
  wire fill_fire = !rq_empty && !pipe_wr && !wbq_full;

  // nothing enters the pipeline until storage has cleared its state after
  // reset; until then requests wait in the queue
  assign issue_en   = advance && !fill_fire && st_ready;
  assign alloc_fire = mp_v[M_LAT-1] && advance;

  // storage write port
  always_comb begin
    wr_en   = pipe_wr || fill_fire;
    wr_core = pipe_wr;
    wr_addr = pipe_wr ? tp[H_LAT-1].addr : rq_out.addr;
    wr_data = pipe_wr ? tp[H_LAT-1].data : rq_out.data;
  end
  assign rq_pop = fill_fire;

  assign hb_push = th_v && advance && lk_hit;

  // DRAM read queue and write-back queue
  assign rdq_push = alloc_fire && alloc_new;
  assign rdq_in   = '{addr: mp[M_LAT-1].addr, write: 1'b0, data: '0};
  assign wbq_push = wr_en && ev_valid;
  assign wbq_in   = '{addr: ev_addr, write: 1'b1, data: ev_data};

  wire pick_wb = !wbq_empty && (wbq_full || rdq_empty);
  assign dram_req_valid = !rdq_empty || !wbq_empty;
  assign dram_req = pick_wb ? wbq_out : rdq_out;
  assign rdq_pop  = dram_req_ready && !pick_wb && !rdq_empty;
  assign wbq_pop  = dram_req_ready && pick_wb;

  // DRAM return: forward to requesters and queue for the fill
  assign dram_resp_ready = !rq_full;
  assign rq_push         = dram_resp_valid && !rq_full;
  assign fwd_resp_valid  = rq_push && fill_hit;
  assign fwd_resp        = '{addr: dram_resp.addr, mask: fill_mask, data: dram_resp.data};

  // hit data return
  assign hit_resp_valid = dp_v[D_LAT-1];
  assign hit_resp       = dp[D_LAT-1];

  // ---------------------------------------------------------------- pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < H_LAT; i++) begin tp_v[i] <= 1'b0; tp[i] <= '0; tp_sh[i] <= 1'b0; end
      for (int i = 0; i < M_LAT; i++) begin mp_v[i] <= 1'b0; mp[i] <= '0; end
      for (int i = 0; i < D_LAT; i++) begin dp_v[i] <= 1'b0; dp[i] <= '0; end
    end else begin
      if (advance) begin
        tp_v[0]  <= issue_en && arb_valid;
        tp[0]    <= arb_req;
        tp_sh[0] <= arb_spec_hit;
        for (int i = 1; i < H_LAT; i++) begin
          tp_v[i] <= tp_v[i-1]; tp[i] <= tp[i-1]; tp_sh[i] <= tp_sh[i-1];
        end
        mp_v[0] <= th_v && !th_write && !lk_hit;
        mp[0]   <= tp[H_LAT-1];
        for (int i = 1; i < M_LAT; i++) begin
          mp_v[i] <= mp_v[i-1]; mp[i] <= mp[i-1];
        end
      end
      // the data return path is not stalled
      dp_v[0] <= th_v && !th_write && lk_hit && advance;
      dp[0]   <= '{addr: tp[H_LAT-1].addr,
                   mask: coremask_t'(1) << tp[H_LAT-1].src,
                   data: lk_data};
      for (int i = 1; i < D_LAT; i++) begin
        dp_v[i] <= dp_v[i-1]; dp[i] <= dp[i-1];
      end
    end
  end

  // ---------------------------------------------------------------- events
  assign ev_hit         = th_v && advance && lk_hit;
  assign ev_miss        = th_v && advance && !lk_hit && !th_write;
  assign ev_mshr_merge  = alloc_fire && !alloc_new;
  assign ev_mshr_alloc  = alloc_fire && alloc_new;
  assign ev_writeback   = wbq_push;
  assign ev_fill        = fill_fire;
  assign ev_resp_first  = fill_fire && advance && arb_valid;
  assign ev_reorder     = issue_en && arb_valid && arb_not_oldest;
  assign ev_spec_hit_ok = th_v && advance && lk_hit && tp_sh[H_LAT-1];

  a_fwd_has_target: assert property (@(posedge clk) disable iff (!rst_n)
                                     rq_push |-> fill_hit);
  a_no_wb_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(wbq_push && wbq_full));
endmodule
