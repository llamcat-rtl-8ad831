// req_xbar: request interconnect from the cores to the LLC slices.
//
// Each core offers at most one request per cycle (valid/ready, the request
// held until accepted). The destination slice is the low SLICE_W bits of the
// line address, since the LLC is interleaved across sets. Each slice
// accepts at most one request per cycle; when several cores target the
// same slice a per-slice round-robin pointer picks one, and the pointer
// moves past the winner. core_ready is combinational from core_valid and
// slice_ready. The topology and the round-robin order are this design's
// choices: the source design shows the interconnect only as a block.
module req_xbar
  import llamcat_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic core_valid [NUM_CORES],
  input  req_t core_req   [NUM_CORES],
  output logic core_ready [NUM_CORES],
  output logic slice_valid [NUM_SLICES],
  output req_t slice_req   [NUM_SLICES],
  input  logic slice_ready [NUM_SLICES]
);
  core_id_t rr    [NUM_SLICES];
  int       grant [NUM_SLICES];

  function automatic int dest(input req_t r);
    return int'(r.addr[SLICE_W-1:0]);
  endfunction
  // k-th core after the round-robin pointer
  function automatic int rot(input core_id_t p, input int k);
    return (int'(p) + k) % NUM_CORES;
  endfunction

  always_comb begin
    for (int c = 0; c < NUM_CORES; c++) core_ready[c] = 1'b0;
    for (int s = 0; s < NUM_SLICES; s++) begin
      grant[s] = -1;
      for (int k = NUM_CORES - 1; k >= 0; k--)
        if (core_valid[rot(rr[s], k)] && dest(core_req[rot(rr[s], k)]) == s) grant[s] = rot(rr[s], k);
      slice_valid[s] = (grant[s] >= 0);
      slice_req[s]   = (grant[s] >= 0) ? core_req[grant[s]] : '0;
      if (grant[s] >= 0 && slice_ready[s]) core_ready[grant[s]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NUM_SLICES; s++) rr[s] <= '0;
    end else begin
      for (int s = 0; s < NUM_SLICES; s++)
        if (grant[s] >= 0 && slice_ready[s]) rr[s] <= core_id_t'(grant[s] + 1);
    end
  end
endmodule
