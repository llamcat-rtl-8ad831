// tb_llc_storage: random core writes and fills into a small storage (4 sets,
// 2 ways) checked against a model with round-robin replacement: lookup hit
// and data after the reset sweep, in-place update of present lines (core write) or no change
// (fill), allocation, and dirty-victim write-back reports.
module tb_llc_storage;
  import llamcat_pkg::*;
  localparam int S = 4, W = 2, SID = 3;
  logic clk = 0, rst_n = 0;
  laddr_t lk_addr, wr_addr, ev_addr;
  logic lk_hit, wr_en, wr_core, ev_valid, ready;
  line_t lk_data, wr_data, ev_data;
  int checks = 0, failures = 0, n_ev = 0, n_fillkeep = 0;

  bit     mv [S][W];
  bit     md [S][W];
  laddr_t ma [S][W];
  line_t  mdata [S][W];
  int     mrr [S];

  llc_storage #(.SETS(S), .WAYS(W), .SLICE_ID(SID)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic laddr_t rnd_addr();
    // slice bits fixed at SID; set in 0..3; tag in 0..3
    return laddr_t'((($urandom % 4) << (SLICE_W + 2)) | (($urandom % S) << SLICE_W) | SID);
  endfunction
  function automatic int set_of(input laddr_t a); return int'(a[SLICE_W +: 2]); endfunction
  function automatic int find(input laddr_t a);
    for (int w = 0; w < W; w++) if (mv[set_of(a)][w] && ma[set_of(a)][w] == a) return w;
    return -1;
  endfunction

  initial begin
    for (int s = 0; s < S; s++) begin mrr[s] = 0; for (int w = 0; w < W; w++) begin mv[s][w] = 0; md[s][w] = 0; end end
    wr_en = 0; wr_core = 0; wr_addr = '0; wr_data = '0; lk_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    check(!ready, "busy clearing after reset");
    repeat (S) @(posedge clk);
    #1 check(ready, "ready after the reset sweep");
    for (int i = 0; i < 2000; i++) begin
      int s, w, v;
      lk_addr = rnd_addr();
      wr_en   = ($urandom % 2) != 0;
      wr_core = ($urandom % 2) != 0;
      wr_addr = rnd_addr();
      wr_data = {16{$urandom}};
      #1;
      w = find(lk_addr);
      check(lk_hit == (w >= 0), "lk_hit");
      if (w >= 0) check(lk_data == mdata[set_of(lk_addr)][w], "lk_data");
      s = set_of(wr_addr);
      w = find(wr_addr);
      v = mrr[s];
      check(ev_valid == (wr_en && w < 0 && mv[s][v] && md[s][v]), "ev_valid");
      if (ev_valid) begin
        n_ev++;
        check(ev_addr == ma[s][v] && ev_data == mdata[s][v], "ev addr/data");
      end
      @(posedge clk);
      if (wr_en) begin
        if (w >= 0) begin
          if (wr_core) begin mdata[s][w] = wr_data; md[s][w] = 1; end
          else n_fillkeep++;
        end else begin
          mv[s][v] = 1; ma[s][v] = wr_addr; mdata[s][v] = wr_data; md[s][v] = wr_core;
          mrr[s] = (v + 1) % W;
        end
      end
      #1;
    end
    check(n_ev > 10 && n_fillkeep > 10, "evictions and kept fills seen");
    $display("evictions=%0d kept-fills=%0d", n_ev, n_fillkeep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
