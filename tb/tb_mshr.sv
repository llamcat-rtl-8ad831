// tb_mshr: random allocate/merge/fill traffic checked against a model of
// numEntry entries with numTarget targets each: alloc_ok / alloc_new, the
// forwarded core mask, the snapshot counts, stalls when entries or targets
// run out or the DRAM queue is full, and no merge into an entry being freed.
module tb_mshr;
  import llamcat_pkg::*;
  localparam int E = 3, T = 3;
  logic clk = 0, rst_n = 0;
  logic alloc_valid, alloc_fire, dram_ok, alloc_ok, alloc_new;
  laddr_t alloc_addr, fill_addr;
  core_id_t alloc_src;
  logic fill_valid, fill_hit;
  coremask_t fill_mask;
  logic   snap_valid [E];
  laddr_t snap_addr  [E];
  logic [$clog2(T+1)-1:0] snap_num [E];
  logic [$clog2(E+1)-1:0] used_entries;
  int checks = 0, failures = 0;
  int n_full_stall = 0, n_merge = 0, n_alloc = 0, n_tgt_stall = 0;

  typedef struct { int n; coremask_t m; } ent_t;
  ent_t model [laddr_t];

  mshr #(.NUM_ENTRY(E), .NUM_TARGET(T)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    alloc_valid = 0; alloc_fire = 0; dram_ok = 1; alloc_addr = '0; alloc_src = '0;
    fill_valid = 0; fill_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    for (int i = 0; i < 3000; i++) begin
      bit exp_ok, exp_new, fhit, match;
      coremask_t fmask;
      int used;
      alloc_valid = ($urandom % 4) != 0;
      alloc_addr  = laddr_t'($urandom % 6);
      alloc_src   = core_id_t'($urandom);
      dram_ok     = ($urandom % 8) != 0;
      fill_valid  = ($urandom % 3) == 0;
      fill_addr   = laddr_t'($urandom % 6);
      alloc_fire  = 0;
      #1;
      fhit  = fill_valid && model.exists(fill_addr);
      fmask = fhit ? model[fill_addr].m : '0;
      check(fill_hit == fhit, "fill_hit");
      check(fill_mask == fmask, "fill_mask");
      match = model.exists(alloc_addr) && !(fhit && fill_addr == alloc_addr);
      used = model.size();
      if (match) begin
        exp_ok = alloc_valid && model[alloc_addr].n < T; exp_new = 0;
      end else begin
        exp_ok = alloc_valid && used < E && dram_ok; exp_new = alloc_valid;
      end
      check(alloc_ok == exp_ok, $sformatf("alloc_ok addr=%0d", alloc_addr));
      check(alloc_new == exp_new, "alloc_new");
      check(int'(used_entries) == used, "used_entries");
      for (int e = 0; e < E; e++)
        if (snap_valid[e]) check(model.exists(snap_addr[e]) && int'(snap_num[e]) == model[snap_addr[e]].n, "snapshot");
      if (alloc_valid && !exp_ok) begin
        if (match) n_tgt_stall++; else n_full_stall++;
      end
      alloc_fire = alloc_valid && exp_ok && ($urandom % 4 != 0);
      @(posedge clk);
      if (fhit) model.delete(fill_addr);
      if (alloc_fire) begin
        if (match) begin
          model[alloc_addr].n++; model[alloc_addr].m[alloc_src] = 1'b1; n_merge++;
        end else begin
          model[alloc_addr] = '{1, coremask_t'(1) << alloc_src}; n_alloc++;
        end
      end
      #1;
    end
    check(n_full_stall > 0 && n_tgt_stall > 0 && n_merge > 0 && n_alloc > 0, "all cases covered");
    $display("allocs=%0d merges=%0d entry-stalls=%0d target-stalls=%0d", n_alloc, n_merge, n_full_stall, n_tgt_stall);
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
