// tb_sent_reqs: checks that a sent request is visible to lookups for exactly
// LIFETIME-1 moving cycles after the one it was sent in (so it disappears
// in the cycle its miss reaches the MSHR), that stalls (advance = 0) freeze
// it, that spec_hit entries are masked, and random traffic against a model.
module tb_sent_reqs;
  import llamcat_pkg::*;
  localparam int L = 8, NQ = 4;
  logic clk = 0, rst_n = 0;
  logic advance, push, push_spec_hit;
  laddr_t push_addr;
  core_id_t push_src;
  laddr_t q_addr [NQ];
  logic   q_inmshr [NQ];
  logic [$clog2(L+1)-1:0] occupancy;
  int checks = 0, failures = 0;

  typedef struct { laddr_t a; bit sh; int age; } ent_t;
  ent_t model[$];

  sent_reqs #(.LIFETIME(L), .DEPTH(L), .NQ(NQ)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic bit m_in(input laddr_t a);
    foreach (model[i]) if (!model[i].sh && model[i].a == a) return 1;
    return 0;
  endfunction

  task automatic cyc(input bit adv, input bit pu, input laddr_t a, input bit sh);
    ent_t nm[$];
    advance = adv; push = pu && adv; push_addr = a; push_spec_hit = sh;
    push_src = core_id_t'($urandom);
    for (int q = 0; q < NQ; q++) q_addr[q] = laddr_t'($urandom % 6);
    #1;
    for (int q = 0; q < NQ; q++) check(q_inmshr[q] == m_in(q_addr[q]), $sformatf("lookup %0d", q_addr[q]));
    check(int'(occupancy) == model.size(), "occupancy");
    @(posedge clk);
    foreach (model[i]) begin
      ent_t e = model[i];
      if (adv && e.age == L - 1) continue;
      if (adv) e.age++;
      nm.push_back(e);
    end
    if (pu && adv) nm.push_back('{a, sh, 1});
    model = nm;
    #1;
  endtask

  initial begin
    int vis;
    advance = 0; push = 0; push_addr = '0; push_spec_hit = 0; push_src = '0;
    foreach (q_addr[i]) q_addr[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    // directed lifetime: push 0x40 once, count visible cycles
    advance = 1; push = 1; push_addr = 34'h40; push_spec_hit = 0;
    @(posedge clk); #1;
    push = 0; vis = 0;
    for (int i = 0; i < 20; i++) begin
      q_addr[0] = 34'h40; #1;
      if (q_inmshr[0]) vis++;
      @(posedge clk); #1;
    end
    check(vis == L - 1, $sformatf("visible %0d cycles, expected %0d", vis, L - 1));
    // stall freezes: push, then 5 stalled cycles, still visible L-1 moving cycles
    push = 1; push_addr = 34'h80; @(posedge clk); #1; push = 0;
    advance = 0; repeat (5) @(posedge clk); #1;
    advance = 1; vis = 0;
    for (int i = 0; i < 20; i++) begin
      q_addr[0] = 34'h80; #1;
      if (q_inmshr[0]) vis++;
      @(posedge clk); #1;
    end
    check(vis == L - 1 + 0, $sformatf("stalled entry visible %0d moving cycles", vis));
    // spec_hit masked
    push = 1; push_addr = 34'hc0; push_spec_hit = 1; @(posedge clk); #1; push = 0;
    q_addr[0] = 34'hc0; #1;
    check(!q_inmshr[0], "spec_hit entry is masked");
    check(occupancy == 1, "masked entry still held");
    repeat (L) @(posedge clk); #1;
    model.delete();
    for (int i = 0; i < 500; i++)
      cyc(($urandom % 4) != 0, ($urandom % 3) != 0, laddr_t'($urandom % 6), ($urandom % 3) == 0);
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
