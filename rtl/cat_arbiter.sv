// cat_arbiter: request queue and cache/MSHR-aware request selection for one
// LLC slice (the "CAT" arbiter).
//
// Requests from the interconnect wait in a REQ_Q_SIZE-entry queue kept in
// arrival order (entry 0 oldest). Each cycle every waiting request gets two
// speculation bits, computed from three structures:
//   spec_hit_result  - its line is in the hit_buffer (recent cache hits);
//   spec_mshr_result - its line is in the MSHR snapshot with targets, or in
//                      sent_reqs among requests sent in the last
//                      hit+mshr latency cycles that were not speculated hits.
// When the slice lets a request in (issue_en), the one with the best rank
// leaves:
//   1. speculated cache hit, 2. speculated MSHR hit, 3. tie-break.
// The tie-break of the balanced policies is the requester's progress
// counter (number of this core's requests this arbiter has sent; the
// smallest wins); after that, and for the other policies, the oldest wins.
// POLICY selects FCFS, B (balanced), MA (MSHR-aware) or BMA (both, the
// default and the main configuration). The chosen request is recorded in
// sent_reqs with its spec_hit_result bit.
//
// The per-core progress counters are cleared by op_start (start of an
// operator) and exported to the global throttling controller.
//
// Timing: selection is combinational from registered state; out_* are valid
// in the cycle they are consumed (issue_en && out_valid). A pushed request
// can be selected from the next cycle. in_ready is low only when the queue
// is full. The final oldest-first tie-break is this design's choice.
module cat_arbiter
  import llamcat_pkg::*;
#(
  parameter int          QSIZE     = REQ_Q_SIZE,
  parameter int          NUM_ENTRY = MSHR_ENTRIES,
  parameter int          NUM_TARGET = MSHR_TARGETS,
  parameter int          HB_DEPTH  = 4,
  parameter int          LIFETIME  = HIT_LAT + MSHR_LAT,
  parameter arb_policy_e POLICY    = POL_BMA
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     op_start,
  // from interconnect
  input  logic     in_valid,
  input  req_t     in_req,
  output logic     in_ready,
  // to the LLC pipeline
  input  logic     issue_en,
  output logic     out_valid,
  output req_t     out_req,
  output logic     out_spec_hit,
  output logic     out_spec_mshr,
  output logic     out_not_oldest, // chosen request is not the oldest
  input  logic     advance,
  // cache hit information
  input  logic     hb_push,
  input  laddr_t   hb_addr,
  // MSHR snapshot (direct wires)
  input  logic     snap_valid [NUM_ENTRY],
  input  laddr_t   snap_addr  [NUM_ENTRY],
  input  logic [$clog2(NUM_TARGET+1)-1:0] snap_num [NUM_ENTRY],
  // progress counters
  output cnt_t     cnt [NUM_CORES]
);
  localparam bit USE_MA = (POLICY == POL_MA) || (POLICY == POL_BMA);
  localparam bit USE_B  = (POLICY == POL_B)  || (POLICY == POL_BMA);

  req_t q     [QSIZE];
  logic qv    [QSIZE];
  laddr_t q_addr [QSIZE];
  logic spec_hit [QSIZE], sent_inmshr [QSIZE], spec_mshr [QSIZE];

  always_comb
    for (int i = 0; i < QSIZE; i++) q_addr[i] = q[i].addr;

  hit_buffer #(.DEPTH(HB_DEPTH), .NQ(QSIZE)) u_hb (
    .clk, .rst_n, .push(hb_push), .push_addr(hb_addr), .q_addr, .q_hit(spec_hit)
  );

  logic fire;
  int   sel;

  sent_reqs #(.LIFETIME(LIFETIME), .DEPTH(LIFETIME), .NQ(QSIZE)) u_sent (
    .clk, .rst_n, .advance,
    .push(fire), .push_addr(q[sel].addr), .push_src(q[sel].src), .push_spec_hit(spec_hit[sel]),
    .q_addr, .q_inmshr(sent_inmshr), .occupancy()
  );

  // step 1-3: combined cache & MSHR status per queued request
  always_comb begin
    for (int i = 0; i < QSIZE; i++) begin
      spec_mshr[i] = sent_inmshr[i];
      for (int e = 0; e < NUM_ENTRY; e++)
        if (snap_valid[e] && snap_num[e] != '0 && snap_addr[e] == q[i].addr) spec_mshr[i] = 1'b1;
    end
  end

  // step 4: choose
  function automatic logic better(input int i, input int b);
    if (USE_MA) begin
      if (spec_hit[i] != spec_hit[b])   return spec_hit[i];
      if (spec_mshr[i] != spec_mshr[b]) return spec_mshr[i];
    end
    if (USE_B && cnt[q[i].src] != cnt[q[b].src])
      return cnt[q[i].src] < cnt[q[b].src];
    return 1'b0; // equal rank: keep the older one
  endfunction

  always_comb begin
    sel = 0;
    out_valid = 1'b0;
    for (int i = 0; i < QSIZE; i++)
      if (qv[i]) begin
        if (!out_valid || better(i, sel)) sel = i;
        out_valid = 1'b1;
      end
    out_req       = q[sel];
    out_spec_hit  = spec_hit[sel];
    out_spec_mshr = spec_mshr[sel];
    out_not_oldest = out_valid && (sel != 0);
  end

  assign fire     = issue_en && out_valid;
  assign in_ready = !qv[QSIZE-1];

  // queue update: remove the chosen entry, close the gap, append the new one
  int count_after;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < QSIZE; i++) begin
        qv[i] <= 1'b0;
        q[i]  <= '0;
      end
    end else begin
      for (int i = 0; i < QSIZE; i++) begin
        if (fire && i >= sel) begin
          if (i + 1 < QSIZE) begin
            qv[i] <= qv[i+1];
            q[i]  <= q[i+1];
          end else begin
            qv[i] <= 1'b0;
          end
        end
      end
      if (in_valid && in_ready) begin
        qv[count_after] <= 1'b1;
        q[count_after]  <= in_req;
      end
    end
  end

  always_comb begin
    count_after = 0;
    for (int i = 0; i < QSIZE; i++) count_after += int'(qv[i]);
    if (fire) count_after -= 1;
  end

  // progress counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NUM_CORES; c++) cnt[c] <= '0;
    end else if (op_start) begin
      for (int c = 0; c < NUM_CORES; c++) cnt[c] <= '0;
    end else if (fire) begin
      cnt[q[sel].src] <= cnt[q[sel].src] + 1'b1;
    end
  end

  a_push_ok: assert property (@(posedge clk) disable iff (!rst_n) (in_valid && in_ready) |-> (count_after < QSIZE));
endmodule
