// tb_hit_buffer: pushes hit addresses and checks the parallel lookup against
// a model that keeps the DEPTH most recent distinct addresses (oldest
// dropped), including a repeated push that must not displace anything.
module tb_hit_buffer;
  import llamcat_pkg::*;
  localparam int D = 4, NQ = 6;
  logic clk = 0, rst_n = 0;
  logic push;
  laddr_t push_addr;
  laddr_t q_addr [NQ];
  logic   q_hit  [NQ];
  int checks = 0, failures = 0;
  laddr_t model[$];

  hit_buffer #(.DEPTH(D), .NQ(NQ)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic bit in_model(input laddr_t a);
    foreach (model[i]) if (model[i] == a) return 1;
    return 0;
  endfunction

  task automatic do_push(input laddr_t a);
    push = 1; push_addr = a;
    @(posedge clk); #1;
    push = 0;
    if (!in_model(a)) begin
      model.push_front(a);
      if (model.size() > D) void'(model.pop_back());
    end
  endtask

  task automatic probe();
    for (int q = 0; q < NQ; q++) begin
      if (q < 3 && model.size() > 0) q_addr[q] = model[$urandom % model.size()];
      else q_addr[q] = laddr_t'($urandom % 12);
    end
    #1;
    for (int q = 0; q < NQ; q++)
      check(q_hit[q] == in_model(q_addr[q]), $sformatf("lookup %0h", q_addr[q]));
  endtask

  initial begin
    push = 0; push_addr = '0;
    foreach (q_addr[i]) q_addr[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    probe();
    // directed: 4 pushes fill, 5th drops the oldest
    do_push(34'h0c0); do_push(34'h140); do_push(34'h1c0); do_push(34'h000);
    q_addr[0] = 34'h0c0; q_addr[1] = 34'h000; q_addr[2] = 34'h100; #1;
    check(q_hit[0] && q_hit[1] && !q_hit[2], "four held");
    do_push(34'h0c0); // already present: no change
    q_addr[0] = 34'h140; #1;
    check(q_hit[0], "repeat push keeps 0x140");
    do_push(34'h100);
    q_addr[0] = 34'h0c0; q_addr[1] = 34'h100; #1;
    check(!q_hit[0] && q_hit[1], "oldest dropped");
    for (int i = 0; i < 300; i++) begin
      if ($urandom % 2) do_push(laddr_t'($urandom % 12));
      else @(posedge clk);
      #1 probe();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
