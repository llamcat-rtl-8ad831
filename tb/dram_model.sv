// dram_model: behavioural stand-in for one memory controller and its DRAM
// channel (not synthesizable; testbench use only).
//
// Accepts one request per cycle while fewer than QDEPTH are pending (and
// refuses some cycles at random if BUSY_PCT > 0). Writes update a sparse
// line store at once. Reads are answered in order, LAT cycles after they
// were accepted at the earliest, one per cycle while resp_ready is high (the response
// offered after an accepted one appears one cycle later),
// with the stored line or, for a line never written, init_line(addr).
// Counts reads and writes for the testbench.
module dram_model
  import llamcat_pkg::*;
#(
  parameter int LAT      = 100,
  parameter int QDEPTH   = 32,
  parameter int BUSY_PCT = 0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  input  dram_req_t  req,
  output logic       req_ready,
  output logic       resp_valid,
  output dram_resp_t resp,
  input  logic       resp_ready
);
  line_t mem [laddr_t];
  typedef struct { laddr_t a; longint due; } pend_t;
  pend_t pend[$];
  longint now = 0;
  int n_reads = 0, n_writes = 0;
  bit busy;

  function automatic line_t init_line(input laddr_t a);
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[i*32 +: 32] = 32'(a) * 32'h9e3779b1 + 32'(i);
    return l;
  endfunction

  function automatic line_t read_line(input laddr_t a);
    return mem.exists(a) ? mem[a] : init_line(a);
  endfunction

  // outputs are registered so that the design samples them race-free
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready  <= 1'b0;
      resp_valid <= 1'b0;
      resp       <= '0;
    end else begin
      now = now + 1;
      if (resp_valid && resp_ready) void'(pend.pop_front());
      if (req_valid && req_ready) begin
        if (req.write) begin
          mem[req.addr] = req.data;
          n_writes++;
        end else begin
          pend.push_back('{req.addr, now + LAT});
          n_reads++;
        end
      end
      busy = (BUSY_PCT > 0) && (($urandom % 100) < BUSY_PCT);
      req_ready  <= !busy && (pend.size() < QDEPTH);
      resp_valid <= (pend.size() > 0) && (pend[0].due <= now);
      resp.addr  <= (pend.size() > 0) ? pend[0].a : '0;
      resp.data  <= (pend.size() > 0) ? read_line(pend[0].a) : '0;
    end
  end

  initial busy = 0;
endmodule
