// incore_throttle: per-core limit on running thread blocks (second level of
// the two-level dynamic multi-gear throttling).
//
// The core reports, each cycle, whether all its running thread blocks wait
// for memory (mem_wait) and whether it is idle (idle). Over each sub-period
// of SUB cycles the controller counts both (C_mem, C_idle); at the end of
// the sub-period it updates max_tb:
//   C_idle > CIDLE_HI          -> max_tb + 1   (core starved: relax)
//   else C_mem > CMEM_HI       -> max_tb - 1   (memory contention: tighten)
//   else C_mem < CMEM_LO       -> max_tb + 1
//   otherwise unchanged,
// saturating at 1 and NTB. The limit is applied only while the global
// controller throttles this core (throttle = 1); otherwise tb_limit = NTB.
// op_start restarts the sub-period and sets max_tb back to NTB.
//
// The sub-period length and the three bounds follow the source design's
// tuned values (400, 4, 250, 180). The order of the three tests and the
// saturation limits are this design's reading of a DYNCTA-style controller.
module incore_throttle
  import llamcat_pkg::*;
#(
  parameter int SUB       = SUB_PERIOD,
  parameter int NTB       = NUM_TB,
  parameter int CIDLE_MAX = CIDLE_HI,
  parameter int CMEM_MAX  = CMEM_HI,
  parameter int CMEM_MIN  = CMEM_LO
) (
  input  logic clk,
  input  logic rst_n,
  input  logic op_start,
  input  logic throttle,
  input  logic mem_wait,
  input  logic idle,
  output logic [$clog2(NTB+1)-1:0] max_tb,
  output logic [$clog2(NTB+1)-1:0] tb_limit,
  output logic sub_end
);
  localparam int CW = $clog2(SUB + 1);
  localparam int TW = $clog2(NTB + 1);

  logic [CW-1:0] tick, c_mem, c_idle;

  assign sub_end  = (tick == CW'(SUB - 1));
  assign tb_limit = throttle ? max_tb : TW'(NTB);

  // counts including this cycle
  wire [CW-1:0] c_mem_f  = c_mem  + CW'(mem_wait);
  wire [CW-1:0] c_idle_f = c_idle + CW'(idle);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick   <= '0;
      c_mem  <= '0;
      c_idle <= '0;
      max_tb <= TW'(NTB);
    end else if (op_start) begin
      tick   <= '0;
      c_mem  <= '0;
      c_idle <= '0;
      max_tb <= TW'(NTB);
    end else if (sub_end) begin
      tick   <= '0;
      c_mem  <= '0;
      c_idle <= '0;
      if (int'(c_idle_f) > CIDLE_MAX) begin
        if (max_tb < TW'(NTB)) max_tb <= max_tb + 1'b1;
      end else if (int'(c_mem_f) > CMEM_MAX) begin
        if (max_tb > TW'(1)) max_tb <= max_tb - 1'b1;
      end else if (int'(c_mem_f) < CMEM_MIN) begin
        if (max_tb < TW'(NTB)) max_tb <= max_tb + 1'b1;
      end
    end else begin
      tick   <= tick + 1'b1;
      c_mem  <= c_mem_f;
      c_idle <= c_idle_f;
    end
  end

  a_range: assert property (@(posedge clk) disable iff (!rst_n) max_tb >= TW'(1) && max_tb <= TW'(NTB));
endmodule
