// tb_sync_fifo: random push/pop traffic against a SystemVerilog queue model.
// Checks head data, full, empty and count every cycle, plus a fill-to-full
// and drain sequence. Ends with a TB_RESULT line; a watchdog stops it.
module tb_sync_fifo;
  localparam int W = 8, D = 5;
  logic clk = 0, rst_n = 0;
  logic push, pop, full, empty;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic step(input bit pu, input bit po, input logic [W-1:0] d);
    push = pu; pop = po; wr_data = d;
    #1;
    check(empty == (model.size() == 0), "empty");
    check(full == (model.size() == D), "full");
    check(int'(count) == model.size(), "count");
    if (model.size() > 0) check(rd_data == model[0], $sformatf("head %0h vs %0h", rd_data, model[0]));
    @(posedge clk);
    if (po && model.size() > 0) void'(model.pop_front());
    if (pu && model.size() < D) model.push_back(d);
    #1;
  endtask

  initial begin
    push = 0; pop = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < D; i++) step(1, 0, 8'(i + 100));
    step(0, 0, 0);
    check(full, "full after D pushes");
    for (int i = 0; i < D; i++) step(0, 1, 0);
    check(empty, "empty after drain");
    for (int i = 0; i < 400; i++) begin
      bit pu, po;
      pu = ($urandom % 3) != 0;
      po = ($urandom % 2) != 0;
      if (model.size() == D) pu = 0;
      if (model.size() == 0) po = 0;
      step(pu, po, 8'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
