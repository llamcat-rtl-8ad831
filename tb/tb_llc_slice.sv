// tb_llc_slice: one LLC slice (16 sets, default latencies and MSHR size)
// with a behavioural DRAM of 80-cycle latency and six traffic cores.
//  * Directed: a cold read sends its DRAM read H+M+1 = 9 cycles after it was
//    accepted and is forwarded to the core the cycle DRAM returns it; a read
//    of the same line after the fill is a hit returned H+D = 28 cycles after
//    acceptance; eight distinct misses exhaust the six MSHR entries and the
//    slice stalls.
//  * Random: shared and private reads (merging into MSHR entries, hitting,
//    evicting) and full-line writes to lines no core reads meanwhile. Every
//    response is checked for address, data and requesters; every read must
//    be answered. Finally every written line is read back and must hold the
//    written data (through write-allocate, eviction write-back and re-fetch).
//  * Every mechanism is counted and must occur: stall, MSHR merge and
//    allocation, write-back, fill, response-first arbitration, out-of-order
//    selection and a confirmed speculated hit.
module tb_llc_slice;
  import llamcat_pkg::*;
  localparam int SETS = 16, NC = 6, DLAT = 80;
  logic clk = 0, rst_n = 0, op_start = 0;
  logic req_valid, req_ready;
  req_t req;
  logic hit_resp_valid, fwd_resp_valid;
  resp_t hit_resp, fwd_resp;
  logic dram_req_valid, dram_req_ready, dram_resp_valid, dram_resp_ready;
  dram_req_t dram_req;
  dram_resp_t dram_resp;
  cnt_t cnt [NUM_CORES];
  logic stall_o, ev_hit, ev_miss, ev_mshr_merge, ev_mshr_alloc, ev_writeback, ev_fill,
        ev_resp_first, ev_reorder, ev_spec_hit_ok;
  int checks = 0, failures = 0;
  longint cyc = 0;

  llc_slice #(.SETS(SETS), .SLICE_ID(0)) dut (.*);
  dram_model #(.LAT(DLAT)) u_dram (
    .clk, .rst_n, .req_valid(dram_req_valid), .req(dram_req), .req_ready(dram_req_ready),
    .resp_valid(dram_resp_valid), .resp(dram_resp), .resp_ready(dram_resp_ready));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  function automatic line_t init_line(input laddr_t a);
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[i*32 +: 32] = 32'(a) * 32'h9e3779b1 + 32'(i);
    return l;
  endfunction

  // expected contents and outstanding reads
  line_t written [laddr_t];
  bit    pending [int][laddr_t];   // [core][line]
  int    n_stall = 0, n_merge = 0, n_alloc = 0, n_wb = 0, n_fill = 0, n_rf = 0, n_reo = 0, n_sh = 0, n_hit = 0;
  int    n_resp = 0;

  function automatic line_t expect_line(input laddr_t a);
    return written.exists(a) ? written[a] : init_line(a);
  endfunction

  task automatic take(input resp_t r, input string kind);
    for (int c = 0; c < NUM_CORES; c++)
      if (r.mask[c]) begin
        check(pending.exists(c) && pending[c].exists(r.addr), $sformatf("%s response to core %0d for %0h it did not ask for", kind, c, r.addr));
        if (pending.exists(c) && pending[c].exists(r.addr)) pending[c].delete(r.addr);
      end
    check(r.data == expect_line(r.addr), $sformatf("%s data for %0h", kind, r.addr));
    n_resp++;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (hit_resp_valid) begin
      check($onehot(hit_resp.mask), "hit response names one core");
      take(hit_resp, "hit");
    end
    if (fwd_resp_valid) take(fwd_resp, "forwarded");
    n_stall += stall_o; n_merge += ev_mshr_merge; n_alloc += ev_mshr_alloc; n_wb += ev_writeback;
    n_fill += ev_fill; n_rf += ev_resp_first; n_reo += ev_reorder; n_sh += ev_spec_hit_ok; n_hit += ev_hit;
  end

  // send one request; returns when accepted
  task automatic send(input int c, input laddr_t a, input bit wr, input line_t d);
    req_valid = 1; req = '0; req.addr = a; req.src = core_id_t'(c); req.write = wr; req.data = d;
    if (!wr) pending[c][a] = 1;
    else written[a] = d;
    forever begin
      bit acc;
      acc = req_ready;
      @(posedge clk); #1;
      if (acc) break;
    end
    req_valid = 0;
  endtask

  function automatic laddr_t L(input int n); return laddr_t'(n) << SLICE_W; endfunction

  task automatic wait_idle();
    int guard = 0;
    while (guard < 20000) begin
      int np;
      np = 0;
      foreach (pending[c]) np += pending[c].size();
      if (np == 0) break;
      @(posedge clk); #1; guard++;
    end
    check(guard < 20000, "all reads answered");
    repeat (100) @(posedge clk);
    #1;
  endtask

  initial begin
    longint t0, td, tr;
    int wnext = 0;
    req_valid = 0; req = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    op_start = 1; @(posedge clk); #1 op_start = 0;
    // storage clears one set per cycle after reset
    repeat (SETS) @(posedge clk);
    #1;

    // ---- directed latency
    send(0, L(5), 0, '0);
    t0 = cyc;                          // edge that accepted it
    while (!dram_req_valid) begin @(posedge clk); #1; end
    td = cyc - t0;
    check(td == HIT_LAT + MSHR_LAT + 1, $sformatf("DRAM read issued after %0d cycles", td));
    while (!fwd_resp_valid) begin @(posedge clk); #1; end
    check(fwd_resp.mask == coremask_t'(1), "forwarded to core 0 only");
    repeat (20) @(posedge clk);
    #1;
    send(1, L(5), 0, '0);
    t0 = cyc;
    while (!hit_resp_valid) begin @(posedge clk); #1; end
    tr = cyc - t0;
    check(tr == HIT_LAT + DATA_LAT, $sformatf("hit answered after %0d cycles, expected %0d", tr, HIT_LAT + DATA_LAT));
    check(hit_resp.mask == coremask_t'(2) && hit_resp.addr == L(5), "hit response to core 1");
    wait_idle();

    // ---- directed MSHR exhaustion: 8 distinct misses back to back
    begin
      int s0;
      s0 = n_stall;
      for (int i = 0; i < 8; i++) send(i % NC, L(100 + i), 0, '0);
      wait_idle();
      check(n_stall > s0, "stall when MSHR entries run out");
    end

    // ---- random traffic
    for (int i = 0; i < 4000; i++) begin
      int c, kind;
      laddr_t a;
      c = $urandom % NC;
      kind = $urandom % 10;
      if (kind < 1) begin
        a = L(2000 + wnext); wnext++;
        send(c, a, 1, {16{$urandom}});
      end else begin
        a = (kind < 7) ? L($urandom % 24) : L(24 + $urandom % 400);   // shared hot set / wide set
        if (!pending[c].exists(a)) send(c, a, 0, '0);
        else begin @(posedge clk); #1; end
      end
    end
    wait_idle();

    // ---- read back every written line
    foreach (written[a]) begin
      send(0, a, 0, '0);
      if ($urandom % 4 == 0) wait_idle();
    end
    wait_idle();

    check(n_stall > 0, "stall seen");
    check(n_merge > 0, "MSHR merge seen");
    check(n_alloc > 0, "MSHR allocation seen");
    check(n_wb > 0, "write-back seen");
    check(n_fill > 0, "fill seen");
    check(n_rf > 0, "response-first blocking seen");
    check(n_reo > 0, "out-of-order selection seen");
    check(n_sh > 0, "confirmed speculated hit seen");
    check(u_dram.n_writes == n_wb, "every write-back reached DRAM");
    $display("responses=%0d hits=%0d stall_cycles=%0d merges=%0d allocs=%0d writebacks=%0d fills=%0d resp_first=%0d reorders=%0d spec_hits=%0d",
             n_resp, n_hit, n_stall, n_merge, n_alloc, n_wb, n_fill, n_rf, n_reo, n_sh);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
