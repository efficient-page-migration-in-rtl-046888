// migration_queue: the migration queue of one memory controller, and the
// merge of migration traffic with demand traffic into that memory.
//
// Requests from the migration controller are queued in a FIFO of DEPTH
// entries (mig_ready = not full). Each cycle the memory gets the head of the
// migration queue if there is one, otherwise the demand request; a demand
// request waits (dem_ready low) while migration requests are queued. This
// priority keeps the memory's request stream in the order in which the
// migration controller and the miss handler made their routing decisions,
// which the line-by-line redirection relies on. All handshakes are
// valid/ready; a request moves when both are high.
//
// The paper places a migration queue in each memory controller for the
// controller's reads; queueing its writes too, the priority and the depth
// are this design's choices.
module migration_queue
  import duon_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     dem_valid,
  input  mem_req_t dem_req,
  output logic     dem_ready,
  input  logic     mig_valid,
  input  mem_req_t mig_req,
  output logic     mig_ready,
  output logic     mem_valid,
  output mem_req_t mem_req,
  input  logic     mem_ready
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  mem_req_t      q [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [PW:0]   count;
  logic          q_empty, push, pop;

  assign q_empty   = (count == '0);
  assign mig_ready = (count != (PW+1)'(DEPTH));
  assign push      = mig_valid && mig_ready;

  always_comb begin
    if (!q_empty) begin
      mem_valid = 1'b1;
      mem_req   = q[rd_ptr];
    end else begin
      mem_valid = dem_valid;
      mem_req   = dem_req;
    end
  end
  assign pop       = !q_empty && mem_ready;
  assign dem_ready = q_empty && mem_ready;

  always_ff @(posedge clk) if (push) q[wr_ptr] <= mig_req;

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
endmodule
