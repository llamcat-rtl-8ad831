// tb_req_xbar: 16 cores with held valid/ready requests to random slices and
// random slice back-pressure. Checks every cycle the routing (slice = low
// line-address bits), one grant per slice, the round-robin winner against a
// model pointer, and that no request is lost or duplicated.
module tb_req_xbar;
  import llamcat_pkg::*;
  logic clk = 0, rst_n = 0;
  logic core_valid [NUM_CORES];
  req_t core_req   [NUM_CORES];
  logic core_ready [NUM_CORES];
  logic slice_valid [NUM_SLICES];
  req_t slice_req   [NUM_SLICES];
  logic slice_ready [NUM_SLICES];
  int checks = 0, failures = 0, sent = 0, recv = 0;
  int rr [NUM_SLICES];

  req_xbar dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic req_t new_req(input int c);
    req_t r; r = '0;
    r.addr = laddr_t'({$urandom, $urandom});
    r.src  = core_id_t'(c);
    r.data = {16{$urandom}};
    return r;
  endfunction

  initial begin
    for (int c = 0; c < NUM_CORES; c++) begin core_valid[c] = 0; core_req[c] = new_req(c); end
    for (int s = 0; s < NUM_SLICES; s++) begin slice_ready[s] = 0; rr[s] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    for (int i = 0; i < 3000; i++) begin
      for (int c = 0; c < NUM_CORES; c++)
        if (!core_valid[c]) begin
          core_valid[c] = ($urandom % 3) == 0;
          if (core_valid[c]) begin core_req[c] = new_req(c); sent++; end
        end
      for (int s = 0; s < NUM_SLICES; s++) slice_ready[s] = ($urandom % 4) != 0;
      #1;
      for (int s = 0; s < NUM_SLICES; s++) begin
        int g;
        g = -1;
        for (int k = NUM_CORES - 1; k >= 0; k--) begin
          int c;
          c = (rr[s] + k) % NUM_CORES;
          if (core_valid[c] && int'(core_req[c].addr[SLICE_W-1:0]) == s) g = c;
        end
        check(slice_valid[s] == (g >= 0), "slice_valid");
        if (g >= 0) begin
          check(slice_req[s] == core_req[g], $sformatf("slice %0d carries core %0d", s, g));
          if (slice_ready[s]) begin
            check(core_ready[g], "winner sees ready");
            rr[s] = (g + 1) % NUM_CORES;
            recv++;
          end
        end
      end
      for (int c = 0; c < NUM_CORES; c++) begin
        int s;
        s = int'(core_req[c].addr[SLICE_W-1:0]);
        if (core_ready[c]) check(core_valid[c] && slice_valid[s] && slice_ready[s] && slice_req[s].src == core_id_t'(c), "ready only for the granted core");
      end
      @(posedge clk); #1;
      for (int c = 0; c < NUM_CORES; c++) if (accepted[c]) core_valid[c] = 0;
    end
    check(recv > 1000, "traffic flowed");
    $display("sent=%0d accepted=%0d", sent, recv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // remember which cores were accepted at the edge
  logic accepted [NUM_CORES];
  always @(posedge clk) for (int c = 0; c < NUM_CORES; c++) accepted[c] <= core_valid[c] && core_ready[c];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
