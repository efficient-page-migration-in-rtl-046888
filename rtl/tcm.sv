// tcm: TLB Coherence Module.
//
// Keeps the extended TLBs of all cores consistent when a page's remapping
// changes, without a software TLB shootdown. The migration controller hands
// it one update (phase START or DONE, the page's UA and its RA). The module
// broadcasts the update to every core's TLB for one cycle, then collects one
// acknowledge per TLB; when all NCORES have answered it pulses ack to the
// controller and becomes ready for the next update.
//
// Timing: req accepted in IDLE (req_ready=1); bc_valid is high the next
// cycle; ack pulses in the cycle after the last TLB acknowledge is seen.
// The broadcast/acknowledge protocol follows the paper's description of the
// TCM; the one-update-at-a-time handshake is this design's choice.
module tcm
  import duon_pkg::*;
#(
  parameter int unsigned NCORES = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  input  tcm_upd_t          req,
  output logic              req_ready,
  output logic              ack,
  output logic              bc_valid,
  output tcm_upd_t          bc,
  input  logic [NCORES-1:0] tlb_ack
);
  typedef enum logic [1:0] {S_IDLE, S_BCAST, S_WAIT} state_e;
  state_e            state;
  logic [NCORES-1:0] acked;

  assign req_ready = (state == S_IDLE);
  assign bc_valid  = (state == S_BCAST);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      acked <= '0;
      ack   <= 1'b0;
      bc    <= '0;
    end else begin
      ack <= 1'b0;
      case (state)
        S_IDLE: if (req_valid) begin
          bc    <= req;
          acked <= '0;
          state <= S_BCAST;
        end
        S_BCAST: begin
          acked <= tlb_ack;
          state <= S_WAIT;
        end
        default: begin
          if ((acked | tlb_ack) == {NCORES{1'b1}}) begin
            ack   <= 1'b1;
            state <= S_IDLE;
          end
          acked <= acked | tlb_ack;
        end
      endcase
    end
  end

  // every TLB must answer a broadcast before the next one starts
  a_no_ack_in_idle: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_IDLE |-> tlb_ack == '0);

endmodule
