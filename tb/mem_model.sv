// mem_model: behavioural model of one memory (HBM or PCM/DDR4) for the
// testbenches; not synthesizable.
//
// Accepts one request per cycle while fewer than 15 reads are pending.
// Reads and writes take effect in acceptance order; read data returns about
// LATENCY cycles after acceptance, in order, and is held until rsp_ready.
// All outputs are registered. A line never written reads as init_line(addr):
// every 32-bit word is {3'b101, addr}, addr being the 29-bit physical line
// address. The model counts reads and writes.
module mem_model
  import duon_pkg::*;
#(
  parameter int unsigned LATENCY = 4
) (
  input  logic     clk,
  input  logic     req_valid,
  input  mem_req_t req,
  output logic     req_ready,
  output logic     rsp_valid,
  output mem_rsp_t rsp,
  input  logic     rsp_ready
);
  typedef struct {
    mem_rsp_t    r;
    longint      due;
  } pend_t;

  line_data_t store [logic [LADDR_W-1:0]];
  pend_t      pq [$];
  longint     now = 0;
  int         n_reads = 0;
  int         n_writes = 0;

  function automatic line_data_t init_line(logic [LADDR_W-1:0] a);
    return {16{3'b101, a}};
  endfunction

  function automatic line_data_t peek(logic [LADDR_W-1:0] a);
    return store.exists(a) ? store[a] : init_line(a);
  endfunction

  initial begin
    req_ready = 1'b1;
    rsp_valid = 1'b0;
    rsp       = '0;
  end

  // outputs change only through non-blocking assignments at the clock edge
  always @(posedge clk) begin
    if (rsp_valid && rsp_ready) void'(pq.pop_front());
    if (req_valid && req_ready) begin
      if (req.we) begin
        store[req.addr] = req.wdata;
        n_writes++;
      end else begin
        pend_t p;
        p.r.rdata = peek(req.addr);
        p.r.tag   = req.tag;
        p.due     = now + longint'(LATENCY);
        pq.push_back(p);
        n_reads++;
      end
    end
    now++;
    req_ready <= (pq.size() < 15);
    if (pq.size() > 0 && pq[0].due <= now) begin
      rsp_valid <= 1'b1;
      rsp       <= pq[0].r;
    end else begin
      rsp_valid <= 1'b0;
    end
  end
endmodule
