// hit_buffer: FIFO of recent cache-hit line addresses, searched in parallel.
//
// The LLC slice pushes a line address each time its tag lookup confirms a
// hit. The arbiter looks up every request-queue entry against all entries at
// once (q_addr -> q_hit); a match is the speculation that the request will
// hit in the cache (spec_hit_result). When the buffer is full the oldest
// address is dropped. An address already held is not pushed again, which
// keeps more distinct addresses; this, and the default depth of 4 (the size
// of the example drawn for this structure), are this design's choices. The
// buffer is never invalidated on eviction: its answer is a hint only.
//
// Timing: lookup is combinational; a push becomes visible the next cycle.
module hit_buffer
  import llamcat_pkg::*;
#(
  parameter int DEPTH = 4,
  parameter int NQ    = REQ_Q_SIZE
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push,
  input  laddr_t push_addr,
  input  laddr_t q_addr [NQ],
  output logic   q_hit  [NQ]
);
  laddr_t addr_q  [DEPTH];  // index 0 is the newest
  logic   valid_q [DEPTH];

  logic present;
  always_comb begin
    present = 1'b0;
    for (int i = 0; i < DEPTH; i++)
      if (valid_q[i] && addr_q[i] == push_addr) present = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        valid_q[i] <= 1'b0;
        addr_q[i]  <= '0;
      end
    end else if (push && !present) begin
      valid_q[0] <= 1'b1;
      addr_q[0]  <= push_addr;
      for (int i = 1; i < DEPTH; i++) begin
        valid_q[i] <= valid_q[i-1];
        addr_q[i]  <= addr_q[i-1];
      end
    end
  end

  always_comb begin
    for (int q = 0; q < NQ; q++) begin
      q_hit[q] = 1'b0;
      for (int i = 0; i < DEPTH; i++)
        if (valid_q[i] && addr_q[i] == q_addr[q]) q_hit[q] = 1'b1;
    end
  end
endmodule
