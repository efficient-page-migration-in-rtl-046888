// tb_wait_queue: self-checking test of the wait queue (depth 4) against a
// SystemVerilog queue: random push/pop, order, full and empty.
module tb_wait_queue;
  import duon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push = 0, pop = 0, full, head_valid;
  llc_req_t push_data, head;
  llc_req_t model [$];
  int pushes = 0, fulls = 0;

  wait_queue #(.DEPTH(4)) dut (.*);

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    #50000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    push_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      chk(head_valid == (model.size() > 0), "head_valid");
      chk(full == (model.size() == 4), "full");
      if (model.size() > 0) chk(head == model[0], "head is oldest");
      if (full) fulls++;
      pop  = head_valid && ($urandom % 3 != 0);
      push = (!full || pop) && ($urandom % 2 == 1);
      push_data = '{core: core_id_t'($urandom), we: 1'($urandom), upfn: upfn_t'($urandom),
                    line: line_idx_t'($urandom), wdata: {16{32'($urandom)}}};
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) begin model.push_back(push_data); pushes++; end
      #1 push = 0; pop = 0;
    end
    chk(fulls > 0, "queue reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
