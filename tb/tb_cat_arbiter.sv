// tb_cat_arbiter: checks the BMA request selection.
// Directed part: the worked example of the selection flow (hit_buffer
// 0xc0/0x140/0x1c0/0x00, MSHR snapshot 0x100:1 and 0x40:2, sent_reqs
// 0x00(hit) 0x80 0x40 0xc0(hit)): request 0x00 from core 0 is speculated a
// cache hit and not in the MSHR, and is chosen over older requests; an MSHR
// hit beats a plain miss; equal ranks go to the core with the smaller
// progress counter. Random part: every cycle the chosen request, its
// speculation bits, in_ready and the progress counters are compared with an
// independent model of queue, hit_buffer, sent_reqs and counters.
module tb_cat_arbiter;
  import llamcat_pkg::*;
  localparam int Q = 12, E = 6, L = 8, HB = 4;
  logic clk = 0, rst_n = 0;
  logic op_start, in_valid, in_ready, issue_en, out_valid, out_spec_hit, out_spec_mshr, out_not_oldest, advance, hb_push;
  req_t in_req, out_req;
  laddr_t hb_addr;
  logic   snap_valid [E];
  laddr_t snap_addr  [E];
  logic [$clog2(MSHR_TARGETS+1)-1:0] snap_num [E];
  cnt_t cnt [NUM_CORES];
  int checks = 0, failures = 0;

  cat_arbiter #(.QSIZE(Q), .NUM_ENTRY(E), .HB_DEPTH(HB), .LIFETIME(L), .POLICY(POL_BMA)) dut (.*);
  always #5 clk = ~clk;

  // ---- models
  req_t   mq[$];
  laddr_t mhb[$];
  typedef struct { laddr_t a; bit sh; int age; } sent_t;
  sent_t  msent[$];
  int     mcnt [NUM_CORES];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic bit m_hit(input laddr_t a);
    foreach (mhb[i]) if (mhb[i] == a) return 1;
    return 0;
  endfunction
  function automatic bit m_mshr(input laddr_t a);
    for (int e = 0; e < E; e++) if (snap_valid[e] && snap_num[e] != 0 && snap_addr[e] == a) return 1;
    foreach (msent[i]) if (!msent[i].sh && msent[i].a == a) return 1;
    return 0;
  endfunction
  function automatic int m_select();
    int best = -1;
    int bk, k;
    foreach (mq[i]) begin
      // key: hit(2) mshr(1) then smaller counter, then older
      k = (m_hit(mq[i].addr) ? 2 : 0) + (m_mshr(mq[i].addr) ? 1 : 0);
      if (best < 0 || k > bk || (k == bk && mcnt[mq[i].src] < mcnt[mq[best].src])) begin
        best = i; bk = k;
      end
    end
    return best;
  endfunction

  function automatic req_t mk(input laddr_t a, input int src);
    req_t r; r = '0; r.addr = a; r.src = core_id_t'(src); r.data = {16{32'(a)}};
    return r;
  endfunction

  // one clock with model update; inputs must be set by the caller
  task automatic tick();
    int sel;
    bit rdy;
    sent_t ns[$];
    #1;
    rdy = in_ready;
    sel = m_select();
    check(out_valid == (mq.size() > 0), "out_valid");
    check(in_ready == (mq.size() < Q), "in_ready");
    if (sel >= 0) begin
      check(out_req == mq[sel], $sformatf("chosen %0h/%0d, expected %0h/%0d", out_req.addr, out_req.src, mq[sel].addr, mq[sel].src));
      check(out_spec_hit == m_hit(mq[sel].addr), "spec_hit");
      check(out_spec_mshr == m_mshr(mq[sel].addr), "spec_mshr");
    end
    for (int c = 0; c < NUM_CORES; c++) check(cnt[c] == cnt_t'(mcnt[c]), "counter");
    @(posedge clk);
    // model update (order mirrors the hardware's single edge)
    foreach (msent[i]) begin
      sent_t e = msent[i];
      if (advance && e.age == L - 1) continue;
      if (advance) e.age++;
      ns.push_back(e);
    end
    if (issue_en && sel >= 0) begin
      ns.push_back('{mq[sel].addr, m_hit(mq[sel].addr), 1});
      if (!op_start) mcnt[mq[sel].src]++;
      mq.delete(sel);
    end
    msent = ns;
    if (op_start) foreach (mcnt[c]) mcnt[c] = 0;
    if (in_valid && rdy) mq.push_back(in_req);
    if (hb_push && !m_hit(hb_addr)) begin
      mhb.push_front(hb_addr);
      if (mhb.size() > HB) void'(mhb.pop_back());
    end
    #1;
  endtask

  task automatic idle_inputs();
    op_start = 0; in_valid = 0; in_req = '0; issue_en = 0; advance = 1; hb_push = 0; hb_addr = '0;
  endtask

  initial begin
    idle_inputs();
    foreach (mcnt[c]) mcnt[c] = 0;
    for (int e = 0; e < E; e++) begin snap_valid[e] = 0; snap_addr[e] = '0; snap_num[e] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1; #1;

    // ---- directed: the worked example
    hb_push = 1;
    hb_addr = 34'h00;  tick();
    hb_addr = 34'h1c0; tick();
    hb_addr = 34'h140; tick();
    hb_addr = 34'h0c0; tick();
    hb_push = 0;
    snap_valid[0] = 1; snap_addr[0] = 34'h100; snap_num[0] = 1;
    snap_valid[1] = 1; snap_addr[1] = 34'h40;  snap_num[1] = 2;
    // fill sent_reqs: 0xc0 (core 2, hit), 0x40, 0x80 (core 1), 0x00 (core 0, hit)
    in_valid = 1; in_req = mk(34'hc0, 2); tick();
    in_valid = 0; issue_en = 1; tick(); issue_en = 0;
    in_valid = 1; in_req = mk(34'h40, 1); tick();
    in_valid = 0; issue_en = 1; tick(); issue_en = 0;
    in_valid = 1; in_req = mk(34'h80, 1); tick();
    in_valid = 0; issue_en = 1; tick(); issue_en = 0;
    // now queue: 0x300 (core 5, oldest), 0x200 (core 4), 0x00 (core 0)
    in_valid = 1; in_req = mk(34'h300, 5); tick();
    in_req = mk(34'h200, 4); tick();
    in_req = mk(34'h00, 0); tick();
    in_valid = 0; #1;
    check(out_req.addr == 34'h00 && out_req.src == 0 && out_spec_hit && !out_spec_mshr,
          "example: 0x00 from core 0 is chosen as a speculated hit, not in MSHR");
    check(out_not_oldest, "example: chosen request is not the oldest");
    issue_en = 1; tick(); issue_en = 0;
    // MSHR hit beats a plain miss: add 0x100 (in snapshot)
    in_valid = 1; in_req = mk(34'h100, 6); tick(); in_valid = 0; #1;
    check(out_req.addr == 34'h100 && out_spec_mshr, "MSHR hit chosen before misses");
    issue_en = 1; tick(); issue_en = 0; #1;
    // remaining 0x300 (core 5) and 0x200 (core 4): counters equal 0 -> oldest (core 5)
    check(out_req.src == 5, "equal rank, equal counters: oldest");
    // give core 5 a larger counter: send another request of core 5 to a hit line
    in_valid = 1; in_req = mk(34'h1c0, 5); tick(); in_valid = 0;
    issue_en = 1; tick(); issue_en = 0; #1;
    check(cnt[5] == 1 && out_req.src == 4, "balanced tie-break: core 4 (counter 0) before core 5 (counter 1)");

    // ---- random
    for (int i = 0; i < 4000; i++) begin
      op_start = ($urandom % 500) == 0;
      advance  = ($urandom % 5) != 0;
      issue_en = advance && (($urandom % 3) != 0);
      in_valid = ($urandom % 3) != 0;
      in_req   = mk(laddr_t'(($urandom % 10) * 64), $urandom % 5);
      hb_push  = ($urandom % 4) == 0;
      hb_addr  = laddr_t'(($urandom % 10) * 64);
      if ($urandom % 8 == 0)
        for (int e = 0; e < E; e++) begin
          snap_valid[e] = ($urandom % 2) != 0;
          snap_addr[e]  = laddr_t'(($urandom % 10) * 64);
          snap_num[e]   = ($urandom % 3);
        end
      tick();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
