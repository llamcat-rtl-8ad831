// Shared body of the end-to-end testbenches (included inside a module that
// instantiates llamcat_top as `dut` and defines localparams NL, TBL, MLP,
// LAG, DLAT, TB_SETS and WATCH).
//
// Traffic: a Logit-like (Q x K^T) decode kernel with grouped-query sharing.
// The 16 cores form 4 groups of 4; the cores of a group compute different
// query heads of the same KV head, so they all read the same NL key lines
// (line address = group * 2^16 + l). Each core splits its NL lines into
// thread blocks of TBL lines; core k of a group starts LAG*k blocks further
// on (wrapping), so group members touch a line at different times and see
// hits as well as MSHR merges. A running thread block keeps up to MLP reads
// outstanding and, when all its lines have arrived, writes one full output
// line of its own. Output lines are spread over the slices but all fall in
// one set of each slice, so dirty lines are evicted (written back) at any
// cache size. A core runs at most core_tb_limit
// thread blocks (4 windows), reports core_mem_wait when all running blocks
// wait for memory and core_idle when none runs. Each slice has a DRAM model
// of DLAT cycles latency.
//
// Checked: every response carries the right line, goes only to cores that
// asked for it, and every read is answered; all work finishes; every named
// mechanism happens at least once (pipeline stall, MSHR merge and
// allocation, write-back, fill, response-first arbitration, out-of-order
// selection, confirmed speculated hit, gear up and down, throttled cores,
// reduced thread-block limit).

  logic clk = 0, rst_n = 0, op_start = 0;
  logic        core_req_valid [NUM_CORES];
  req_t        core_req       [NUM_CORES];
  logic        core_req_ready [NUM_CORES];
  logic        hit_resp_valid [NUM_SLICES];
  resp_t       hit_resp       [NUM_SLICES];
  logic        fwd_resp_valid [NUM_SLICES];
  resp_t       fwd_resp       [NUM_SLICES];
  logic        core_mem_wait  [NUM_CORES];
  logic        core_idle      [NUM_CORES];
  logic        core_throttled [NUM_CORES];
  logic [$clog2(NUM_TB+1)-1:0] core_tb_limit [NUM_CORES];
  logic        dram_req_valid  [NUM_SLICES];
  dram_req_t   dram_req        [NUM_SLICES];
  logic        dram_req_ready  [NUM_SLICES];
  logic        dram_resp_valid [NUM_SLICES];
  dram_resp_t  dram_resp       [NUM_SLICES];
  logic        dram_resp_ready [NUM_SLICES];
  logic [2:0]  gear;
  contention_e contention;
  logic        slice_stall [NUM_SLICES];
  slice_ev_t   slice_ev    [NUM_SLICES];

  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  for (genvar s = 0; s < NUM_SLICES; s++) begin : g_dram
    dram_model #(.LAT(DLAT)) u_dram (
      .clk, .rst_n,
      .req_valid(dram_req_valid[s]), .req(dram_req[s]), .req_ready(dram_req_ready[s]),
      .resp_valid(dram_resp_valid[s]), .resp(dram_resp[s]), .resp_ready(dram_resp_ready[s]));
  end

  function automatic line_t init_line(input laddr_t a);
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[i*32 +: 32] = 32'(a) * 32'h9e3779b1 + 32'(i);
    return l;
  endfunction

  localparam int NTBS = NL / TBL;   // thread blocks per core

  // ---------------------------------------------------------------- cores
  typedef struct {
    bit     active;
    int     id;
    int     issued;    // reads accepted by the LLC
    int     recv;      // lines received
  } tb_t;

  tb_t    run   [NUM_CORES][NUM_TB];
  int     next_tb [NUM_CORES];
  int     done_tb [NUM_CORES];
  laddr_t wq    [NUM_CORES][$];   // output lines to write
  bit     sending_write [NUM_CORES];
  int     sending_slot  [NUM_CORES];
  int     pend  [NUM_CORES][laddr_t];   // outstanding line -> block slot
  int     n_reads = 0, n_writes = 0, n_resp = 0;
  bit     started = 0;

  function automatic int block_of(input int c, input int j);
    return (j + LAG * (c % 4)) % NTBS;
  endfunction
  function automatic laddr_t key_line(input int c, input int tbid, input int pos);
    return laddr_t'(((c / 4) << 16) + tbid * TBL + pos);
  endfunction
  function automatic laddr_t out_line(input int c, input int tbid);
    int idx;
    idx = c * NTBS + tbid;
    return laddr_t'((1 << 30) + (idx / NUM_SLICES) * NUM_SLICES * TB_SETS + (idx % NUM_SLICES));
  endfunction
  function automatic line_t out_data(input laddr_t a);
    return ~init_line(a);
  endfunction

  // response delivery
  task automatic deliver(input resp_t r, input bit is_hit);
    check(r.data == init_line(r.addr), $sformatf("line %0h data", r.addr));
    if (is_hit) check($onehot(r.mask), "hit response names one core");
    n_resp++;
    for (int c = 0; c < NUM_CORES; c++)
      if (r.mask[c]) begin
        check(pend[c].exists(r.addr), $sformatf("core %0d got %0h it did not ask for", c, r.addr));
        if (pend[c].exists(r.addr)) begin
          int t;
          t = pend[c][r.addr];
          pend[c].delete(r.addr);
          run[c][t].recv++;
          if (run[c][t].recv == TBL) begin
            wq[c].push_back(out_line(c, run[c][t].id));
            run[c][t].active = 0;
            done_tb[c]++;
          end
        end
      end
  endtask

  always @(posedge clk) if (rst_n && started) begin
    // 1. handshake of the request presented in the cycle that ends now
    for (int c = 0; c < NUM_CORES; c++)
      if (core_req_valid[c] && core_req_ready[c]) begin
        if (sending_write[c]) begin
          void'(wq[c].pop_front());
          n_writes++;
        end else begin
          run[c][sending_slot[c]].issued++;
          pend[c][core_req[c].addr] = sending_slot[c];
          n_reads++;
        end
      end
    // 2. responses
    for (int s = 0; s < NUM_SLICES; s++) begin
      if (hit_resp_valid[s]) deliver(hit_resp[s], 1);
      if (fwd_resp_valid[s]) deliver(fwd_resp[s], 0);
    end
    // 3. start thread blocks, choose next request, report status
    for (int c = 0; c < NUM_CORES; c++) begin
      int nrun, nwait, slot;
      bit hold;
      nrun = 0;
      for (int t = 0; t < NUM_TB; t++) nrun += run[c][t].active;
      for (int t = 0; t < NUM_TB; t++)
        if (!run[c][t].active && next_tb[c] < NTBS && nrun < int'(core_tb_limit[c])) begin
          run[c][t] = '{1, block_of(c, next_tb[c]), 0, 0};
          next_tb[c]++;
          nrun++;
        end
      // keep an unaccepted request on the port
      hold = core_req_valid[c] && !core_req_ready[c];
      if (!hold) begin
        slot = -1;
        for (int t = NUM_TB - 1; t >= 0; t--)
          if (run[c][t].active && run[c][t].issued < TBL && run[c][t].issued - run[c][t].recv < MLP)
            slot = t;
        if (wq[c].size() > 0) begin
          req_t r;
          r = '0; r.addr = wq[c][0]; r.src = core_id_t'(c); r.write = 1; r.data = out_data(wq[c][0]);
          core_req[c]       <= r;
          core_req_valid[c] <= 1'b1;
          sending_write[c]  <= 1'b1;
        end else if (slot >= 0) begin
          req_t r;
          r = '0; r.addr = key_line(c, run[c][slot].id, run[c][slot].issued); r.src = core_id_t'(c);
          core_req[c]       <= r;
          core_req_valid[c] <= 1'b1;
          sending_write[c]  <= 1'b0;
          sending_slot[c]   <= slot;
        end else begin
          core_req_valid[c] <= 1'b0;
        end
      end
      // a block waits for memory when it cannot issue another read
      nwait = 0;
      for (int t = 0; t < NUM_TB; t++)
        nwait += (run[c][t].active &&
                  (run[c][t].issued == TBL || run[c][t].issued - run[c][t].recv == MLP));
      core_mem_wait[c] <= (nrun > 0) && (nwait == nrun);
      core_idle[c]     <= (nrun == 0);
    end
  end

  // ---------------------------------------------------------------- events
  int ev_stall [NUM_SLICES], ev_merge [NUM_SLICES], ev_alloc [NUM_SLICES], ev_wb [NUM_SLICES],
      ev_fill [NUM_SLICES], ev_rf [NUM_SLICES], ev_reo [NUM_SLICES], ev_sh [NUM_SLICES], ev_hit [NUM_SLICES];
  for (genvar s = 0; s < NUM_SLICES; s++) begin : g_ev
    initial begin
      ev_stall[s] = 0; ev_merge[s] = 0; ev_alloc[s] = 0; ev_wb[s] = 0; ev_fill[s] = 0;
      ev_rf[s] = 0; ev_reo[s] = 0; ev_sh[s] = 0; ev_hit[s] = 0;
    end
    always @(posedge clk) if (rst_n) begin
      ev_stall[s] += slice_stall[s];
      ev_merge[s] += slice_ev[s].mshr_merge;
      ev_alloc[s] += slice_ev[s].mshr_alloc;
      ev_wb[s]    += slice_ev[s].writeback;
      ev_fill[s]  += slice_ev[s].fill;
      ev_rf[s]    += slice_ev[s].resp_first;
      ev_reo[s]   += slice_ev[s].reorder;
      ev_sh[s]    += slice_ev[s].spec_hit_ok;
      ev_hit[s]   += slice_ev[s].hit;
    end
  end

  int gear_up = 0, gear_down = 0, max_gear_seen = 0, thr_cycles = 0, limit_low = 0;
  logic [2:0] gear_q;
  always @(posedge clk) if (rst_n) begin
    gear_q <= gear;
    if (gear > gear_q) gear_up++;
    if (gear < gear_q) gear_down++;
    if (int'(gear) > max_gear_seen) max_gear_seen = gear;
    for (int c = 0; c < NUM_CORES; c++) begin
      thr_cycles += core_throttled[c];
      if (int'(core_tb_limit[c]) < NUM_TB) limit_low++;
    end
  end

  function automatic int sum(input int a [NUM_SLICES]);
    int r = 0;
    foreach (a[i]) r += a[i];
    return r;
  endfunction

  initial begin
    longint t_start, t_end;
    bit finished;
    for (int c = 0; c < NUM_CORES; c++) begin
      core_req_valid[c] = 0; core_req[c] = '0; core_mem_wait[c] = 0; core_idle[c] = 1;
      next_tb[c] = 0; done_tb[c] = 0; sending_write[c] = 0; sending_slot[c] = 0;
      for (int t = 0; t < NUM_TB; t++) run[c][t] = '{0, 0, 0, 0};
    end
    gear_q = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    op_start = 1;
    @(posedge clk); #1 op_start = 0;
    started = 1;
    t_start = cyc;
    finished = 0;
    while (!finished && cyc < WATCH) begin
      @(posedge clk); #1;
      finished = 1;
      for (int c = 0; c < NUM_CORES; c++)
        if (done_tb[c] < NTBS || wq[c].size() > 0 || core_req_valid[c]) finished = 0;
    end
    t_end = cyc;
    check(finished, "all thread blocks finished");
    // let the system go quiet so the gear comes down
    repeat (3 * SAMPLE_PERIOD + 10) @(posedge clk);
    #1;
    for (int c = 0; c < NUM_CORES; c++) check(pend[c].size() == 0, $sformatf("core %0d reads answered", c));
    check(n_reads == NUM_CORES * NL, $sformatf("%0d reads sent", n_reads));
    check(n_writes == NUM_CORES * NTBS, $sformatf("%0d writes sent", n_writes));
    check(sum(ev_stall) > 0, "pipeline stall happened");
    check(sum(ev_merge) > 0, "MSHR merge happened");
    check(sum(ev_alloc) > 0, "MSHR allocation happened");
    check(sum(ev_wb) > 0, "write-back happened");
    check(sum(ev_fill) > 0, "fill happened");
    check(sum(ev_rf) > 0, "response-first arbitration happened");
    check(sum(ev_reo) > 0, "out-of-order selection happened");
    check(sum(ev_sh) > 0, "confirmed speculated hit happened");
    check(gear_up > 0, "gear went up");
    check(gear_down > 0, "gear went down");
    check(thr_cycles > 0, "cores were throttled");
    check(limit_low > 0, "thread-block limit was reduced");
    $display("kernel cycles=%0d reads=%0d writes=%0d responses=%0d", t_end - t_start, n_reads, n_writes, n_resp);
    $display("stall=%0d merge=%0d alloc=%0d hit=%0d writeback=%0d fill=%0d resp_first=%0d reorder=%0d spec_hit=%0d",
             sum(ev_stall), sum(ev_merge), sum(ev_alloc), sum(ev_hit), sum(ev_wb), sum(ev_fill), sum(ev_rf), sum(ev_reo), sum(ev_sh));
    $display("gear up=%0d down=%0d max=%0d throttled core-cycles=%0d reduced-limit core-cycles=%0d",
             gear_up, gear_down, max_gear_seen, thr_cycles, limit_low);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCH + 4 * SAMPLE_PERIOD) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
