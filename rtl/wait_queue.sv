// wait_queue: requests from the LLC that target a page or line under
// migration and cannot be served yet.
//
// An in-order FIFO of DEPTH llc_req_t entries. The miss handler pushes a
// request it has to hold back and retries the head (head_valid/head) until
// the head can be served, then pops it. Keeping the order means two
// requests for the same line are served in the order they arrived.
// Push and pop may happen in the same cycle; pushing when full is a
// protocol error. The depth is this design's choice (the paper gives none).
module wait_queue
  import duon_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     push,
  input  llc_req_t push_data,
  output logic     full,
  input  logic     pop,
  output logic     head_valid,
  output llc_req_t head
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  llc_req_t        q [DEPTH];
  logic [PW-1:0]   rd_ptr, wr_ptr;
  logic [PW:0]     count;

  assign full       = (count == (PW+1)'(DEPTH));
  assign head_valid = (count != '0);
  assign head       = q[rd_ptr];

  always_ff @(posedge clk) if (push) q[wr_ptr] <= push_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> head_valid);
endmodule
