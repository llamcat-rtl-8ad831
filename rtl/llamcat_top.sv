// llamcat_top: shared last-level cache with cache arbitration and
// throttling (CAT) for NUM_CORES vector cores.
//
// Structure:
//   cores --req_xbar--> NUM_SLICES x llc_slice --> memory controllers
//   each llc_slice = cat_arbiter (request queue, hit_buffer, sent_reqs,
//                    progress counters) + tag pipeline + llc_storage + mshr
//                    + response queue
//   global_throttle  - reads every slice's stall signal and progress
//                      counters, sets the gear and picks the cores to throttle
//   incore_throttle  - one per core, turns the throttle bit and the core's
//                      memory-wait / idle status into a thread-block limit
//
// The cores and the memory controllers are outside this module. A core
//   * sends requests on core_req_* (valid/ready; hold until ready),
//   * receives lines on the per-slice broadcast buses hit_resp_* and
//     fwd_resp_* (take a response when its bit is set in the mask; the
//     buses have no back-pressure),
//   * reports core_mem_wait (all running thread blocks wait for memory) and
//     core_idle each cycle,
//   * obeys core_tb_limit, the number of thread blocks it may run.
// Each slice has its own memory port, dram_req_* / dram_resp_*
// (valid/ready; reads are answered with the line address).
// slice_stall and slice_ev report, per slice and cycle, pipeline stalls and
// cache events (hits, MSHR merges, write-backs, ...) for performance
// counters; gear and contention show the throttling state.
// op_start marks the start of an operator: it clears the progress counters
// and restarts the throttling controllers.
//
// Parameters: SETS is the number of sets per slice (4096 gives the 16 MB
// LLC); POLICY is the request selection policy (BMA by default).
module llamcat_top
  import llamcat_pkg::*;
#(
  parameter int          SETS   = SLICE_SETS,
  parameter arb_policy_e POLICY = POL_BMA
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        op_start,
  // cores
  input  logic        core_req_valid [NUM_CORES],
  input  req_t        core_req       [NUM_CORES],
  output logic        core_req_ready [NUM_CORES],
  output logic        hit_resp_valid [NUM_SLICES],
  output resp_t       hit_resp       [NUM_SLICES],
  output logic        fwd_resp_valid [NUM_SLICES],
  output resp_t       fwd_resp       [NUM_SLICES],
  input  logic        core_mem_wait  [NUM_CORES],
  input  logic        core_idle      [NUM_CORES],
  output logic        core_throttled [NUM_CORES],
  output logic [$clog2(NUM_TB+1)-1:0] core_tb_limit [NUM_CORES],
  // memory
  output logic        dram_req_valid  [NUM_SLICES],
  output dram_req_t   dram_req        [NUM_SLICES],
  input  logic        dram_req_ready  [NUM_SLICES],
  input  logic        dram_resp_valid [NUM_SLICES],
  input  dram_resp_t  dram_resp       [NUM_SLICES],
  output logic        dram_resp_ready [NUM_SLICES],
  // status
  output logic [2:0]  gear,
  output contention_e contention,
  output logic        slice_stall [NUM_SLICES],
  output slice_ev_t   slice_ev    [NUM_SLICES]
);
  logic s_valid [NUM_SLICES];
  req_t s_req   [NUM_SLICES];
  logic s_ready [NUM_SLICES];
  cnt_t cnt     [NUM_SLICES][NUM_CORES];

  req_xbar u_xbar (
    .clk, .rst_n,
    .core_valid(core_req_valid), .core_req, .core_ready(core_req_ready),
    .slice_valid(s_valid), .slice_req(s_req), .slice_ready(s_ready)
  );

  for (genvar s = 0; s < NUM_SLICES; s++) begin : g_slice
    llc_slice #(.SETS(SETS), .SLICE_ID(s), .POLICY(POLICY)) u_slice (
      .clk, .rst_n, .op_start,
      .req_valid(s_valid[s]), .req(s_req[s]), .req_ready(s_ready[s]),
      .hit_resp_valid(hit_resp_valid[s]), .hit_resp(hit_resp[s]),
      .fwd_resp_valid(fwd_resp_valid[s]), .fwd_resp(fwd_resp[s]),
      .dram_req_valid(dram_req_valid[s]), .dram_req(dram_req[s]), .dram_req_ready(dram_req_ready[s]),
      .dram_resp_valid(dram_resp_valid[s]), .dram_resp(dram_resp[s]), .dram_resp_ready(dram_resp_ready[s]),
      .cnt(cnt[s]), .stall_o(slice_stall[s]),
      .ev_hit(slice_ev[s].hit), .ev_miss(slice_ev[s].miss),
      .ev_mshr_merge(slice_ev[s].mshr_merge), .ev_mshr_alloc(slice_ev[s].mshr_alloc),
      .ev_writeback(slice_ev[s].writeback), .ev_fill(slice_ev[s].fill),
      .ev_resp_first(slice_ev[s].resp_first), .ev_reorder(slice_ev[s].reorder),
      .ev_spec_hit_ok(slice_ev[s].spec_hit_ok)
    );
  end

  global_throttle u_gthr (
    .clk, .rst_n, .op_start,
    .stall(slice_stall), .cnt,
    .throttle(core_throttled), .gear, .contention, .period_end()
  );

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    incore_throttle u_ithr (
      .clk, .rst_n, .op_start,
      .throttle(core_throttled[c]), .mem_wait(core_mem_wait[c]), .idle(core_idle[c]),
      .max_tb(), .tb_limit(core_tb_limit[c]), .sub_end()
    );
  end
endmodule
