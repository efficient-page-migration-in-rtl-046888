// tb_miss_handler: self-checking test of the LLC-miss routing with 2 cores.
// The testbench plays the TLBs, the EPT, the migration controller status,
// the bit vectors, the hot buffer and the memories, and checks each branch
// of the decision: TLB hit/miss (with fill), migrated/not, ongoing with the
// line moved / in the buffer / not yet available (wait queue and later
// retry), the hot page's redirected and busy lines, hot-detector reports,
// ordering behind waiting requests and the response merge.
module tb_miss_handler;
  import duon_pkg::*;
  localparam int NC = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic llc_req_valid = 0, llc_req_ready, llc_rsp_valid;
  llc_req_t llc_req; llc_rsp_t llc_rsp;
  upfn_t ux_upfn; logic ux_hit [NC]; tlb_entry_t ux_entry [NC];
  logic fill_valid; core_id_t fill_core; tlb_entry_t fill_entry;
  upfn_t ext_rd_upfn; ept_ext_t ext_rd_data; vpn_t pt_rd_vpn; pte_t pt_rd_data;
  logic act_valid = 0, act_vic_valid = 0, busy_valid = 0;
  upfn_t act_hot_ua = '0, act_hot_new = '0, act_vic_ua = '0, busy_ua = '0; line_idx_t busy_line = '0;
  line_vec_t hot_bits = '0, cold_bits = '0, hb_valid = '0;
  line_idx_t hb_rd_line; line_data_t hb_rd_data;
  logic hb_wr_valid; line_idx_t hb_wr_line; line_data_t hb_wr_data;
  logic fdem_valid, fdem_ready = 1, sdem_valid, sdem_ready = 1;
  mem_req_t fdem_req, sdem_req;
  logic frsp_valid = 0, srsp_valid = 0, srsp_ready;
  mem_rsp_t frsp = '0, srsp = '0;
  logic acc_valid; upfn_t acc_upfn;
  logic ev_buf, ev_wait, ev_redirect, ev_fill;

  miss_handler #(.NCORES(NC), .WQ_DEPTH(4)) dut (.*);

  // testbench TLB of core 0: holds UA 262200 (not migrated), UA 262201
  // (migrated to 40); core 1's TLB is empty. EPT: every UA installed.
  tlb_entry_t tlb0 [2];
  ept_ext_t   ext_of [upfn_t];
  always_comb begin
    for (int c = 0; c < NC; c++) begin ux_hit[c] = 0; ux_entry[c] = '0; end
    for (int i = 0; i < 2; i++)
      if (tlb0[i].valid && tlb0[i].ua == ux_upfn) begin ux_hit[0] = 1; ux_entry[0] = tlb0[i]; end
    ext_rd_data = ext_of.exists(ext_rd_upfn) ? ext_of[ext_rd_upfn] :
                  '{installed: 1'b1, vpn: vpn_t'(ext_rd_upfn + 1), ra: '0, migrated: 1'b0, ongoing: 1'b0, pair: 1'b0, brf: 1'b0};
    pt_rd_data  = '{valid: 1'b1, dirty: 1'b0, upfn: upfn_t'(pt_rd_vpn - 1)};
    hb_rd_data  = {16{26'h0, hb_rd_line}};
  end

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic llc_req_t rq(int core, bit we, int ua, int line);
    return '{core: core_id_t'(core), we: we, upfn: upfn_t'(ua), line: line_idx_t'(line), wdata: {16{32'(ua + line)}}};
  endfunction

  // present a request; check where it goes in that cycle
  task automatic present(llc_req_t r);
    llc_req = r; llc_req_valid = 1; #1;
  endtask
  task automatic step();
    @(posedge clk); #1 llc_req_valid = 0; #1;
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    tlb0[0] = '{valid: 1'b1, dirty: 1'b0, vpn: vpn_t'(5), ua: upfn_t'(262200), ra: '0, migrated: 1'b0, ongoing: 1'b0};
    tlb0[1] = '{valid: 1'b1, dirty: 1'b0, vpn: vpn_t'(6), ua: upfn_t'(262201), ra: upfn_t'(40), migrated: 1'b1, ongoing: 1'b0};
    llc_req = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // 1. TLB hit, not migrated, slow page -> slow memory at UA, counted
    present(rq(0, 0, 262200, 3));
    chk(sdem_valid && !fdem_valid && sdem_req.addr == {upfn_t'(262200), 6'd3} && !sdem_req.we, "hit, initial address");
    chk(llc_req_ready && acc_valid && acc_upfn == 262200 && !fill_valid, "accepted, reported to detector, no fill");
    step();
    // 2. TLB hit, migrated -> RA (fast)
    present(rq(0, 1, 262201, 9));
    chk(fdem_valid && !sdem_valid && fdem_req.addr == {upfn_t'(40), 6'd9} && fdem_req.we, "hit, remapped address");
    chk(fdem_req.wdata == {16{32'(262201 + 9)}} && !acc_valid, "write data, fast access not counted");
    step();
    // 3. TLB miss (core 1): EPT says migrated to 77 -> RA, TLB filled
    ext_of[upfn_t'(262300)] = '{installed: 1'b1, vpn: vpn_t'(262301), ra: upfn_t'(77), migrated: 1'b1, ongoing: 1'b0, pair: 1'b1, brf: 1'b0};
    present(rq(1, 0, 262300, 0));
    chk(fdem_valid && fdem_req.addr == {upfn_t'(77), 6'd0}, "EPT path, remapped address");
    chk(fill_valid && fill_core == 1 && fill_entry.ua == 262300 && fill_entry.vpn == 262301 &&
        fill_entry.ra == 77 && fill_entry.migrated && !fill_entry.ongoing, "TLB filled from EPT");
    chk(fdem_req.tag.core == 1 && fdem_req.tag.upfn == 262300 && !fdem_req.tag.mig, "tag");
    step();
    // 4. back-pressure: memory not ready -> not accepted
    sdem_ready = 0;
    present(rq(0, 0, 262200, 4));
    chk(sdem_valid && !llc_req_ready, "stall when memory busy");
    step();
    sdem_ready = 1;
    // 5. victim page under migration (ongoing), line moved -> RA + line
    ext_of[upfn_t'(10)] = '{installed: 1'b1, vpn: vpn_t'(11), ra: upfn_t'(262500), migrated: 1'b0, ongoing: 1'b1, pair: 1'b1, brf: 1'b1};
    act_valid = 1; act_vic_valid = 1; act_vic_ua = 10; act_hot_ua = 262500; act_hot_new = 10;
    cold_bits[2] = 1; hb_valid[3] = 1;
    present(rq(1, 0, 10, 2));
    chk(sdem_valid && sdem_req.addr == {upfn_t'(262500), 6'd2} && ev_redirect && !acc_valid, "moved line redirected to RA");
    step();
    // 6. line in hot buffer: read -> buffer response next cycle
    present(rq(1, 0, 10, 3));
    chk(!fdem_valid && !sdem_valid && llc_req_ready && ev_buf, "served from buffer");
    step();
    chk(llc_rsp_valid && llc_rsp.rdata == {16{26'h0, 6'd3}} && llc_rsp.upfn == 10 && llc_rsp.core == 1, "buffer read data");
    // 7. write to buffered line -> buffer write
    present(rq(1, 1, 10, 3));
    chk(hb_wr_valid && hb_wr_line == 3 && hb_wr_data == {16{32'(13)}} && ev_buf, "write into buffer");
    step();
    // 8. line not yet in buffer -> wait queue; then retried and served when it arrives
    present(rq(1, 0, 10, 5));
    chk(!fdem_valid && !sdem_valid && llc_req_ready && ev_wait, "held in wait queue");
    step();
    // a new request to the hot page queues behind it (ordering), even
    // though its line has already been copied
    hot_bits[8] = 1;
    present(rq(0, 0, 262500, 8));
    while (!llc_req_ready) begin @(posedge clk); #1; end
    chk(!sdem_valid && !fdem_valid && ev_wait, "new request to migrating page waits behind queue");
    step();
    repeat (3) begin @(posedge clk); #1; end
    chk(!ev_buf, "still waiting while line absent");
    hb_valid[5] = 1; #1;
    // the head is served, then the next waiting request goes to the new frame
    begin
      int got = 0, red = 0, order_ok = 1;
      for (int i = 0; i < 6; i++) begin
        if (ev_buf) begin got++; if (red != 0) order_ok = 0; end
        if (ev_redirect && fdem_valid && fdem_req.addr == {upfn_t'(10), 6'd8}) red++;
        @(posedge clk); #1;
      end
      chk(got == 1, $sformatf("waiting request served once from buffer after arrival (%0d)", got));
      // 9. hot page: line already copied -> new fast frame
      chk(red == 1 && order_ok, "queued hot-page line redirected to new frame, in order");
    end
    busy_valid = 1; busy_ua = 262500; busy_line = 9;
    present(rq(0, 1, 262500, 9));
    chk(!fdem_valid && !sdem_valid && ev_wait, "busy line waits");
    step();
    busy_valid = 0; #1;
    for (int i = 0; i < 4 && !sdem_valid; i++) begin @(posedge clk); #1; end
    chk(sdem_valid && sdem_req.addr == {upfn_t'(262500), 6'd9} && sdem_req.we, "after busy: old location (bit not set)");
    @(posedge clk); #1;
    // 10. response merge: fast first; slow held
    frsp_valid = 1; frsp = '{rdata: {16{32'h1}}, tag: '{mig: 1'b0, core: core_id_t'(1), upfn: upfn_t'(7), line: line_idx_t'(1)}};
    srsp_valid = 1; srsp = '{rdata: {16{32'h2}}, tag: '{mig: 1'b0, core: core_id_t'(0), upfn: upfn_t'(8), line: line_idx_t'(2)}};
    #1 chk(llc_rsp_valid && llc_rsp.rdata == {16{32'h1}} && llc_rsp.upfn == 7 && !srsp_ready, "fast response first");
    frsp_valid = 0;
    #1 chk(llc_rsp_valid && llc_rsp.rdata == {16{32'h2}} && llc_rsp.core == 0 && srsp_ready, "then slow response");
    srsp_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
