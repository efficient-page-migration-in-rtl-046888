// tb_tcm: self-checking test of the TLB coherence module with 4 TLBs.
// Checks the one-cycle broadcast, that the acknowledge to the controller
// waits for the last TLB (acks arrive with random delays) and that the
// module is busy meanwhile.
module tb_tcm;
  import duon_pkg::*;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid = 0, req_ready, ack, bc_valid;
  tcm_upd_t req, bc;
  logic [NC-1:0] tlb_ack = '0;

  tcm #(.NCORES(NC)) dut (.*);

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int delay [NC];
  int last;
  initial begin
    req = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      chk(req_ready, "ready when idle");
      req = '{phase: tcm_phase_e'(n % 2), ua: upfn_t'($urandom), ra: upfn_t'($urandom)};
      req_valid = 1;
      @(posedge clk); #1 req_valid = 0;
      chk(bc_valid && bc == req, "broadcast carries the update");
      chk(!req_ready, "busy while broadcasting");
      last = 0;
      for (int c = 0; c < NC; c++) begin
        delay[c] = 1 + ($urandom % 6);
        if (delay[c] > last) last = delay[c];
      end
      for (int d = 1; d <= last; d++) begin
        for (int c = 0; c < NC; c++) tlb_ack[c] = (delay[c] == d);
        @(posedge clk); #1;
        if (d == 1) chk(!bc_valid, "broadcast lasts one cycle");
        tlb_ack = '0;
        if (d < last) chk(!ack, "no ack before all TLBs answered");
      end
      chk(ack, "ack right after the last TLB answered");
      @(posedge clk); #1;
      chk(!ack && req_ready, "ack is a pulse, idle again");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
