// tb_hot_page_detector: self-checking test of the threshold detector with
// THRESHOLD=4 and 16 counters. A page becomes hot exactly on its 4th access,
// the cycle after; a conflicting page restarts the count; a second hot page
// is held back while the first is not taken; random traffic is compared
// with a reference model of the same counter table.
module tb_hot_page_detector;
  import duon_pkg::*;
  localparam int TH = 4, NE = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic acc_valid = 0, hot_valid, hot_ready = 1;
  upfn_t acc_upfn, hot_upfn;

  hot_page_detector #(.THRESHOLD(TH), .ENTRIES(NE)) dut (.*);

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic acc(int p);
    acc_valid = 1; acc_upfn = upfn_t'(p);
    @(posedge clk); #1 acc_valid = 0;
  endtask

  // reference: tag, count, valid per entry
  int r_tag [NE]; int r_cnt [NE]; bit r_v [NE];
  int hot_seen = 0, hot_exp = 0;

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    acc_upfn = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < TH - 1; i++) begin acc(300); chk(!hot_valid, "not hot before threshold"); end
    acc(300);
    chk(hot_valid && hot_upfn == 300, "hot on threshold access");
    @(posedge clk); #1 chk(!hot_valid, "taken");
    // conflict: 300 and 316 share entry 12
    acc(300); acc(300); acc(316); acc(300); acc(300); acc(300);
    chk(!hot_valid, "conflict restarted the count");
    acc(300); chk(hot_valid && hot_upfn == 300, "hot after restart");
    @(posedge clk); #1;
    // hold: first hot page not taken
    hot_ready = 0;
    for (int i = 0; i < TH; i++) acc(401);
    chk(hot_valid && hot_upfn == 401, "first hot page");
    for (int i = 0; i < TH; i++) acc(402);
    chk(hot_valid && hot_upfn == 401, "second hot page held back");
    hot_ready = 1; @(posedge clk); #1;
    chk(!hot_valid, "first taken");
    acc(402); chk(hot_valid && hot_upfn == 402, "second retried on next access");
    @(posedge clk); #1;
    // random traffic against the reference
    for (int i = 0; i < NE; i++) r_v[i] = 0;
    for (int i = 0; i < NE; i++) begin acc(1000 + i); acc(1000 + i + NE); end  // start from known state
    for (int i = 0; i < NE; i++) begin r_v[(1000 + i + NE) % NE] = 1; r_tag[(1000 + i + NE) % NE] = 1000 + i + NE; r_cnt[(1000 + i + NE) % NE] = 1; end
    for (int n = 0; n < 2000; n++) begin
      int p, ix;
      p = 1000 + ($urandom % 40);
      ix = p % NE;
      if (r_v[ix] && r_tag[ix] == p) r_cnt[ix]++;
      else begin r_v[ix] = 1; r_tag[ix] = p; r_cnt[ix] = 1; end
      acc(p);
      if (r_cnt[ix] == TH) begin
        hot_exp++; r_v[ix] = 0;
        chk(hot_valid && hot_upfn == upfn_t'(p), "random: hot when reference says so");
      end else begin chk(!hot_valid, "random: not hot"); end
      if (hot_valid) hot_seen++;
    end
    chk(hot_exp > 10, "random traffic produced hot pages");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
