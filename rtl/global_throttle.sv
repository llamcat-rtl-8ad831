// global_throttle: global dynamic multi-gear throttling controller.
//
// Every SAMPLE_PERIOD cycles it classifies cache contention from t_cs, the
// proportion of stalled cycles: all slices' stall cycles in the period
// divided by SAMPLE_PERIOD x NUM_SLICES. Classes (Low / Normal / High /
// Extremely high) split at 0.1, 0.2 and 0.375, evaluated exactly with
// integer products. The gear then moves:
//   High     -> gear + 1 (up to max_gear)
//   Low      -> gear - 1 (down to 0)
//   Extreme  -> gear + 2, capped at max_gear
//   Normal   -> unchanged.
// The gear sets how many cores are throttled: none, 1/8, 1/4, 1/2 or 3/4 of
// them (gears 0-4). The throttled cores are the fastest ones, i.e. those with
// the largest progress count (requests served, summed over all slices);
// among equal counts the lower core index ranks as faster. Gear and the
// throttled set are registered and change only at period boundaries;
// op_start restarts the period, resets the gear and releases all cores.
//
// The period, thresholds, gear table and gear algorithm follow the source
// design; summing stalls over slices, the tie order and the update instant
// are this design's choices.
module global_throttle
  import llamcat_pkg::*;
#(
  parameter int PERIOD   = SAMPLE_PERIOD,
  parameter int MAXGEAR  = MAX_GEAR
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        op_start,
  input  logic        stall [NUM_SLICES],
  input  cnt_t        cnt   [NUM_SLICES][NUM_CORES],
  output logic        throttle [NUM_CORES],
  output logic [2:0]  gear,
  output contention_e contention,
  output logic        period_end
);
  localparam int PW = $clog2(PERIOD + 1);
  localparam int SW = $clog2(PERIOD * NUM_SLICES + 1);
  localparam longint TOTAL = longint'(PERIOD) * NUM_SLICES;
  localparam int TW = CNT_W + SLICE_W;

  logic [PW-1:0] tick;
  logic [SW-1:0] stall_acc;

  // stalls this cycle
  logic [SLICE_W:0] stall_now;
  always_comb begin
    stall_now = '0;
    for (int s = 0; s < NUM_SLICES; s++) stall_now += (SLICE_W+1)'(stall[s]);
  end

  assign period_end = (tick == PW'(PERIOD - 1));
  wire [SW-1:0] stall_total = stall_acc + SW'(stall_now);

  // contention class of the period that ends now
  always_comb begin
    longint st;
    st = longint'(stall_total);
    if      (st * 10 < TOTAL)     contention = CON_LOW;
    else if (st * 5  < TOTAL)     contention = CON_NORMAL;
    else if (st * 8  < TOTAL * 3) contention = CON_HIGH;
    else                          contention = CON_EXTREME;
  end

  // Algorithm: next gear
  logic [2:0] gear_next;
  always_comb begin
    gear_next = gear;
    unique case (contention)
      CON_HIGH:    if (gear < 3'(MAXGEAR)) gear_next = gear + 3'd1;
      CON_LOW:     if (gear > 3'd0) gear_next = gear - 3'd1;
      CON_EXTREME: gear_next = (int'(gear) <= MAXGEAR - 2) ? gear + 3'd2 : 3'(MAXGEAR);
      default:     gear_next = gear;
    endcase
  end

  // number of cores throttled at a gear
  function automatic int n_throttled(input logic [2:0] g);
    case (g)
      3'd1:    return NUM_CORES / 8;
      3'd2:    return NUM_CORES / 4;
      3'd3:    return NUM_CORES / 2;
      3'd4:    return NUM_CORES * 3 / 4;
      default: return 0;
    endcase
  endfunction

  // progress per core and rank (0 = fastest)
  logic [TW-1:0] total [NUM_CORES];
  int            rank  [NUM_CORES];
  always_comb begin
    for (int c = 0; c < NUM_CORES; c++) begin
      total[c] = '0;
      for (int s = 0; s < NUM_SLICES; s++) total[c] += TW'(cnt[s][c]);
    end
    for (int c = 0; c < NUM_CORES; c++) begin
      rank[c] = 0;
      for (int d = 0; d < NUM_CORES; d++)
        if (total[d] > total[c] || (total[d] == total[c] && d < c)) rank[c]++;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick      <= '0;
      stall_acc <= '0;
      gear      <= '0;
      for (int c = 0; c < NUM_CORES; c++) throttle[c] <= 1'b0;
    end else if (op_start) begin
      tick      <= '0;
      stall_acc <= '0;
      gear      <= '0;
      for (int c = 0; c < NUM_CORES; c++) throttle[c] <= 1'b0;
    end else if (period_end) begin
      tick      <= '0;
      stall_acc <= '0;
      gear      <= gear_next;
      for (int c = 0; c < NUM_CORES; c++) throttle[c] <= rank[c] < n_throttled(gear_next);
    end else begin
      tick      <= tick + 1'b1;
      stall_acc <= stall_total;
    end
  end

  a_gear_range: assert property (@(posedge clk) disable iff (!rst_n) gear <= 3'(MAXGEAR));
endmodule
