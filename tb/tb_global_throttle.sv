// tb_global_throttle: per sampling period of 2000 cycles, stalls all slices
// for k cycles (t_cs = k/2000) with k chosen at and around the class bounds
// 0.1 / 0.2 / 0.375 and at random, and checks at every period end: the
// contention class, the gear step of the multi-gear algorithm, that the
// gear changes exactly at the period boundary, and that the throttled cores
// are the gear's share (0, 2, 4, 8, 12 of 16) with the largest progress
// counts summed over the slices.
module tb_global_throttle;
  import llamcat_pkg::*;
  localparam int P = 2000;
  logic clk = 0, rst_n = 0, op_start = 0;
  logic stall [NUM_SLICES];
  cnt_t cnt   [NUM_SLICES][NUM_CORES];
  logic throttle [NUM_CORES];
  logic [2:0] gear;
  contention_e contention;
  logic period_end;
  int checks = 0, failures = 0;
  int mgear = 0;
  int seen_gear [5];
  int seen_class [4];

  global_throttle #(.PERIOD(P), .MAXGEAR(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int cls(input int k);
    if (k * 10 * 8 < P * 8) return 0;     // < 0.1
    if (k * 5 < P) return 1;              // < 0.2
    if (k * 8 < P * 3) return 2;          // < 0.375
    return 3;
  endfunction

  task automatic run_period(input int k);
    int c, ng, nthr, tot[NUM_CORES];
    // random progress counters, fixed for the period
    for (int s = 0; s < NUM_SLICES; s++)
      for (int cc = 0; cc < NUM_CORES; cc++) cnt[s][cc] = cnt_t'($urandom % 50);
    for (int i = 0; i < P; i++) begin
      for (int s = 0; s < NUM_SLICES; s++) stall[s] = (i < k);
      #1;
      check(period_end == (i == P - 1), "period_end position");
      if (i == P - 1) begin
        c = cls(k);
        check(int'(contention) == c, $sformatf("class for k=%0d: %0d vs %0d", k, contention, c));
        seen_class[c]++;
      end
      check(int'(gear) == mgear, $sformatf("gear stable inside period: %0d vs %0d at i=%0d k=%0d", gear, mgear, i, k));
      @(posedge clk); #1;
    end
    // model gear update
    case (cls(k))
      2: if (mgear < 4) mgear++;
      0: if (mgear > 0) mgear--;
      3: mgear = (mgear <= 2) ? mgear + 2 : 4;
      default: ;
    endcase
    seen_gear[mgear]++;
    #1;
    check(int'(gear) == mgear, $sformatf("gear %0d expected %0d", gear, mgear));
    nthr = (mgear == 0) ? 0 : (mgear == 1) ? 2 : (mgear == 2) ? 4 : (mgear == 3) ? 8 : 12;
    for (int cc = 0; cc < NUM_CORES; cc++) begin
      tot[cc] = 0;
      for (int s = 0; s < NUM_SLICES; s++) tot[cc] += int'(cnt[s][cc]);
    end
    begin
      int n = 0;
      for (int cc = 0; cc < NUM_CORES; cc++) begin
        int r = 0;
        for (int d = 0; d < NUM_CORES; d++) if (tot[d] > tot[cc] || (tot[d] == tot[cc] && d < cc)) r++;
        check(throttle[cc] == (r < nthr), $sformatf("throttle core %0d", cc));
        n += throttle[cc];
      end
      check(n == nthr, $sformatf("%0d cores throttled at gear %0d", n, mgear));
    end
  endtask

  initial begin
    int ks[] = '{750, 750, 300, 300, 500, 399, 400, 199, 200, 100, 0, 0, 0, 0, 749, 2000, 1000, 150};
    foreach (stall[s]) stall[s] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    op_start = 1; @(posedge clk); #1; op_start = 0;
    foreach (ks[i]) run_period(ks[i]);
    for (int i = 0; i < 12; i++) run_period($urandom % (P + 1));
    for (int g = 0; g <= 4; g++) check(seen_gear[g] > 0, $sformatf("gear %0d reached", g));
    for (int c = 0; c < 4; c++) check(seen_class[c] > 0, $sformatf("class %0d seen", c));
    // op_start resets
    op_start = 1; @(posedge clk); #1; op_start = 0;
    check(gear == 0, "op_start resets gear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (P * 40) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
