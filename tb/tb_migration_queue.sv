// tb_migration_queue: self-checking test of a memory controller's migration
// queue (depth 4). Random demand and migration traffic with random memory
// back-pressure; the memory must see queued migration requests first, in
// order, and a demand request only when no migration request is queued.
module tb_migration_queue;
  import duon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic dem_valid = 0, dem_ready, mig_valid = 0, mig_ready, mem_valid, mem_ready = 0;
  mem_req_t dem_req, mig_req, mem_req;
  mem_req_t mq [$];
  int n_mig = 0, n_dem = 0;

  migration_queue #(.DEPTH(4)) dut (.*);

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic mem_req_t rnd(logic mig);
    mem_req_t r;
    r = '{we: 1'($urandom), addr: LADDR_W'($urandom), wdata: {16{32'($urandom)}}, tag: '0};
    r.tag.mig = mig;
    return r;
  endfunction

  initial begin
    #50000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    dem_req = '0; mig_req = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      if (!dem_valid || dem_ready) dem_req = rnd(0);
      dem_valid = ($urandom % 2);
      mig_valid = ($urandom % 3 == 0);
      mig_req   = rnd(1);
      mem_ready = ($urandom % 4 != 0);
      #1;
      chk(mig_ready == (mq.size() < 4), "mig_ready = not full");
      if (mq.size() > 0) begin
        chk(mem_valid && mem_req == mq[0], "queued migration request goes first");
        chk(!dem_ready, "demand waits behind migration");
      end else begin
        chk(mem_valid == dem_valid && (!dem_valid || mem_req == dem_req), "demand passes when queue empty");
        chk(dem_ready == mem_ready, "demand ready follows memory");
      end
      @(posedge clk);
      if (mem_valid && mem_ready && mq.size() > 0) begin void'(mq.pop_front()); n_mig++; end
      else if (mem_valid && mem_ready) n_dem++;
      if (mig_valid && mig_ready) mq.push_back(mig_req);
      #1;
    end
    chk(n_mig > 50 && n_dem > 50, "both kinds of traffic served");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
