// tb_incore_throttle: drives sub-periods of 400 cycles with chosen C_mem and
// C_idle counts around the bounds (idle > 4, mem > 250, mem < 180) and checks
// max_tb after each sub-period boundary, its saturation at 1 and 4, that
// tb_limit follows max_tb only while throttled, and the sub-period length.
module tb_incore_throttle;
  import llamcat_pkg::*;
  localparam int SUB = 400;
  logic clk = 0, rst_n = 0, op_start = 0, throttle, mem_wait, idle, sub_end;
  logic [2:0] max_tb, tb_limit;
  int checks = 0, failures = 0, mtb = 4, n_up = 0, n_down = 0;

  incore_throttle #(.SUB(SUB), .NTB(4), .CIDLE_MAX(4), .CMEM_MAX(250), .CMEM_MIN(180)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic sub_period(input int nmem, input int nidle, input bit thr);
    throttle = thr;
    for (int i = 0; i < SUB; i++) begin
      mem_wait = (i < nmem);
      idle     = (i >= SUB - nidle);
      #1;
      check(sub_end == (i == SUB - 1), "sub_end position");
      check(int'(tb_limit) == (thr ? mtb : 4), $sformatf("tb_limit %0d thr=%0d mtb=%0d i=%0d t=%0t maxtb=%0d nmem=%0d", tb_limit, thr, mtb, i, $time, max_tb, nmem));
      @(posedge clk); #1;
    end
    if (nidle > 4) begin if (mtb < 4) begin mtb++; n_up++; end end
    else if (nmem > 250) begin if (mtb > 1) begin mtb--; n_down++; end end
    else if (nmem < 180) begin if (mtb < 4) begin mtb++; n_up++; end end
    #1;
    check(int'(max_tb) == mtb, $sformatf("max_tb %0d expected %0d (mem=%0d idle=%0d)", max_tb, mtb, nmem, nidle));
  endtask

  initial begin
    throttle = 0; mem_wait = 0; idle = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    op_start = 1; @(posedge clk); #1; op_start = 0;
    check(max_tb == 4, "reset value");
    sub_period(251, 0, 1); sub_period(300, 0, 1); sub_period(400, 0, 1); sub_period(399, 0, 1);
    sub_period(250, 0, 1); sub_period(180, 0, 1); sub_period(179, 0, 1);
    sub_period(300, 5, 1); sub_period(300, 4, 0); sub_period(300, 4, 1); sub_period(0, 0, 1);
    sub_period(0, 0, 1); sub_period(0, 0, 1); sub_period(0, 0, 1);
    for (int i = 0; i < 30; i++) sub_period($urandom % 401, $urandom % 8, $urandom % 2);
    check(n_up > 3 && n_down > 3, "both directions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (SUB * 60) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
