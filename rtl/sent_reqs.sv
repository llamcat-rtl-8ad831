// sent_reqs: the requests the arbiter sent to its LLC slice but that the
// MSHR cannot show yet.
//
// A request that misses in both the cache and the MSHR appears in the MSHR
// (and so in the MSHR snapshot wired to the arbiter) only LIFETIME =
// hit-latency + mshr-latency cycles after it was sent. sent_reqs covers that
// gap: every sent request is recorded with its speculated-hit bit and
// removed once it has been held LIFETIME cycles, the moment its effect
// reaches the MSHR. A lookup (q_addr -> q_inmshr) reports whether any held
// request with spec_hit = 0 has the same line address; entries with
// spec_hit = 1 are masked, because a cache hit never occupies the MSHR.
//
// Ages advance only in cycles where `advance` is high, i.e. while the slice
// pipeline moves; during a pipeline stall the recorded requests stay where
// they are, just like the requests themselves. Because every entry ages at
// the same rate, a pool of aged entries behaves as a FIFO.
//
// Timing: a push is visible from the next cycle; lookup is combinational.
module sent_reqs
  import llamcat_pkg::*;
#(
  parameter int LIFETIME = HIT_LAT + MSHR_LAT,
  parameter int DEPTH    = HIT_LAT + MSHR_LAT,
  parameter int NQ       = REQ_Q_SIZE
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     advance,
  input  logic     push,        // only in a cycle with advance = 1
  input  laddr_t   push_addr,
  input  core_id_t push_src,
  input  logic     push_spec_hit,
  input  laddr_t   q_addr   [NQ],
  output logic     q_inmshr [NQ],
  output logic [$clog2(DEPTH+1)-1:0] occupancy
);
  localparam int AW = $clog2(LIFETIME + 1);

  typedef struct packed {
    logic     valid;
    laddr_t   addr;
    core_id_t src;
    logic     spec_hit;
    logic [AW-1:0] age;
  } entry_t;

  entry_t ent [DEPTH];

  // entries that leave at this edge
  logic leaving [DEPTH];
  always_comb
    for (int i = 0; i < DEPTH; i++)
      leaving[i] = advance && ent[i].valid && (ent[i].age == AW'(LIFETIME - 1));

  // lowest slot free after this edge's removals
  int free_idx;
  always_comb begin
    free_idx = -1;
    for (int i = DEPTH - 1; i >= 0; i--)
      if (!ent[i].valid || leaving[i]) free_idx = i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) ent[i] <= '0;
    end else begin
      for (int i = 0; i < DEPTH; i++) begin
        if (leaving[i])                     ent[i].valid <= 1'b0;
        else if (advance && ent[i].valid)   ent[i].age   <= ent[i].age + 1'b1;
      end
      if (push && free_idx >= 0) begin
        ent[free_idx].valid    <= 1'b1;
        ent[free_idx].addr     <= push_addr;
        ent[free_idx].src      <= push_src;
        ent[free_idx].spec_hit <= push_spec_hit;
        ent[free_idx].age      <= AW'(1);
      end
    end
  end

  always_comb begin
    for (int q = 0; q < NQ; q++) begin
      q_inmshr[q] = 1'b0;
      for (int i = 0; i < DEPTH; i++)
        if (ent[i].valid && !ent[i].spec_hit && ent[i].addr == q_addr[q]) q_inmshr[q] = 1'b1;
    end
  end

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < DEPTH; i++) occupancy += ent[i].valid;
  end

  a_room: assert property (@(posedge clk) disable iff (!rst_n) push |-> (free_idx >= 0));
  a_push_moves: assert property (@(posedge clk) disable iff (!rst_n) push |-> advance);
endmodule
