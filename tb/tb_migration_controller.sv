// tb_migration_controller: self-checking test of the page migration steps.
// The controller is connected to a real EPT, hot and cold page buffers and
// bit vectors, and to two memory models (fast and slow) directly, without
// migration queues. A small responder plays the TLB coherence module and
// records every update it is asked to broadcast.
// Memory lines that were never written read as a known function of their
// address, so after a migration the testbench knows exactly what each moved
// line must hold. Cases: a paired swap, a one-way move into a frame freed by
// an eviction (taken before the round-robin victim scan), the re-migration of a page that was swapped out before
// (data must follow it), and a request that is dropped because the page is
// already in fast memory. Flags, RA, occupant table, TCM update order,
// bit vectors and status outputs are checked. Only 8 fast frames are scanned
// for victims and the tables are 1024 entries deep.
module tb_migration_controller;
  import duon_pkg::*;
  localparam int unsigned VF = 8;
  localparam int unsigned SBASE = FAST_PAGES + 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic hot_valid = 0, hot_ready; upfn_t hot_upfn = '0;
  upfn_t ext_rd_upfn, own_rd_pfn; ept_ext_t ext_rd_data; owner_t own_rd_data;
  logic ext_wr_valid, own_wr_valid; upfn_t ext_wr_upfn, own_wr_pfn; ept_ext_t ext_wr_data; owner_t own_wr_data;
  logic tcm_req_valid, tcm_req_ready, tcm_ack; tcm_upd_t tcm_req;
  logic fmq_valid, fmq_ready, smq_valid, smq_ready, mig_rsp_valid; mem_req_t fmq_req, smq_req; line_data_t mig_rsp_data;
  logic buf_clear, hb_wr_valid, cb_wr_valid; line_idx_t hb_wr_line, hb_rd_line, cb_wr_line, cb_rd_line;
  line_data_t hb_wr_data, hb_rd_data, cb_wr_data, cb_rd_data;
  logic vec_clear, hv_set_valid, cv_set_valid; line_idx_t hv_set_line, cv_set_line;
  logic act_valid, act_vic_valid, busy_valid; upfn_t act_hot_ua, act_hot_new, act_vic_ua, busy_ua; line_idx_t busy_line;
  logic mig_done, mig_done_pair;
  logic free_valid; upfn_t free_pfn;

  migration_controller #(.VICTIM_FRAMES(VF)) dut (.*);

  // EPT
  logic os_inst_valid = 0, os_inv_valid = 0; vpn_t os_inst_vpn = '0, os_inv_vpn = '0; upfn_t os_inst_upfn = '0;
  pte_t pt0, pt1; ept_ext_t e0, e1; upfn_t tb_ext_upfn = '0;
  ept #(.NVPAGES(1024), .NUPAGES(1024)) u_ept (
    .clk, .pt_rd0_vpn('0), .pt_rd0_data(pt0), .pt_rd1_vpn('0), .pt_rd1_data(pt1),
    .ext_rd0_upfn(tb_ext_upfn), .ext_rd0_data(e0), .ext_rd1_upfn('0), .ext_rd1_data(e1),
    .ext_rd2_upfn(ext_rd_upfn), .ext_rd2_data(ext_rd_data),
    .own_rd_pfn(own_rd_pfn), .own_rd_data(own_rd_data),
    .os_inst_valid, .os_inst_vpn, .os_inst_upfn, .os_inv_valid, .os_inv_vpn,
    .ext_wr_valid, .ext_wr_upfn, .ext_wr_data, .own_wr_valid, .own_wr_pfn, .own_wr_data,
    .freed_valid(free_valid), .freed_pfn(free_pfn));

  // buffers and bit vectors
  logic [LINES_PER_PAGE-1:0] hb_lv, cb_lv, hbits, cbits; logic hall, call;
  line_data_t unused_a, unused_b;
  page_buffer u_hb (.clk, .rst_n, .clear(buf_clear), .wr_a_valid(hb_wr_valid), .wr_a_line(hb_wr_line), .wr_a_data(hb_wr_data),
    .wr_b_valid(1'b0), .wr_b_line('0), .wr_b_data('0), .rd_a_line(hb_rd_line), .rd_a_data(hb_rd_data),
    .rd_b_line('0), .rd_b_data(unused_a), .line_valid(hb_lv));
  page_buffer u_cb (.clk, .rst_n, .clear(buf_clear), .wr_a_valid(cb_wr_valid), .wr_a_line(cb_wr_line), .wr_a_data(cb_wr_data),
    .wr_b_valid(1'b0), .wr_b_line('0), .wr_b_data('0), .rd_a_line(cb_rd_line), .rd_a_data(cb_rd_data),
    .rd_b_line('0), .rd_b_data(unused_b), .line_valid(cb_lv));
  line_bitvec u_hv (.clk, .rst_n, .set_valid(hv_set_valid), .set_line(hv_set_line), .clear(vec_clear), .bits(hbits), .all_set(hall));
  line_bitvec u_cv (.clk, .rst_n, .set_valid(cv_set_valid), .set_line(cv_set_line), .clear(vec_clear), .bits(cbits), .all_set(call));

  // memories
  logic frv, srv; mem_rsp_t frsp, srsp;
  mem_model #(.LATENCY(4)) u_fm (.clk, .req_valid(fmq_valid), .req(fmq_req), .req_ready(fmq_ready), .rsp_valid(frv), .rsp(frsp), .rsp_ready(1'b1));
  mem_model #(.LATENCY(9)) u_sm (.clk, .req_valid(smq_valid), .req(smq_req), .req_ready(smq_ready), .rsp_valid(srv), .rsp(srsp), .rsp_ready(1'b1));
  assign mig_rsp_valid = frv || srv;
  assign mig_rsp_data  = frv ? frsp.rdata : srsp.rdata;

  // TCM responder: ready when idle, acknowledges 3 cycles after a request
  tcm_upd_t tlog [$];
  int tcnt = 0;
  logic tbusy = 0;
  assign tcm_req_ready = !tbusy;
  assign tcm_ack       = tbusy && tcnt == 0;
  always_ff @(posedge clk) begin
    if (tcm_req_valid && tcm_req_ready) begin tlog.push_back(tcm_req); tbusy <= 1; tcnt <= 3; end
    else if (tbusy) begin if (tcnt == 0) tbusy <= 0; else tcnt <= tcnt - 1; end
  end

  // status observed while a migration runs
  int n_busy = 0, n_vic = 0, n_act = 0, max_hbits = 0;
  bit busy_ok = 1;
  always_ff @(posedge clk) begin
    if (act_valid) n_act++;
    if (act_vic_valid) n_vic++;
    if (busy_valid) begin
      n_busy++;
      if (busy_ua != act_hot_ua && !(act_vic_valid && busy_ua == act_vic_ua)) busy_ok = 0;
    end
    if (hall) max_hbits = 64;
  end

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic line_data_t init_line(logic [LADDR_W-1:0] a);
    return {16{3'b101, a}};
  endfunction

  task automatic install(int vpn, int ua);
    @(negedge clk); os_inst_valid = 1; os_inst_vpn = vpn_t'(vpn); os_inst_upfn = upfn_t'(ua);
    @(negedge clk); os_inst_valid = 0;
  endtask

  task automatic read_ext(upfn_t u, output ept_ext_t e);
    tb_ext_upfn = u; #1 e = e0;
  endtask

  task automatic migrate(upfn_t h, output int cycles, output bit pr);
    @(negedge clk); hot_valid = 1; hot_upfn = h;
    @(negedge clk); hot_valid = 0;
    cycles = 0;
    while (!mig_done && cycles < 20000) begin @(posedge clk); #1 cycles++; end
    pr = mig_done_pair;
  endtask

  // check that fast frame f holds the data that started at frame src, and
  // (for data kept in slow memory) that slow frame s holds src2's data
  task automatic chk_frame(bit fast, upfn_t frame, upfn_t src, string m);
    int bad = 0;
    for (int l = 0; l < LINES_PER_PAGE; l++) begin
      line_data_t d = fast ? u_fm.peek({frame, line_idx_t'(l)}) : u_sm.peek({frame, line_idx_t'(l)});
      if (d != init_line({src, line_idx_t'(l)})) bad++;
    end
    chk(bad == 0, $sformatf("%s: %0d lines wrong", m, bad));
  endtask

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ept_ext_t e;
    owner_t o;
    int cyc, r0f, r0s;
    bit pr;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    r0f = u_fm.n_reads; r0s = u_sm.n_reads;
    // fast frames 0..7 hold UA 0..7 (VPN 100+i); slow pages SBASE+j (VPN 200+j)
    for (int i = 0; i < VF; i++) install(100 + i, i);
    for (int j = 0; j < 8; j++) install(200 + j, SBASE + j);

    // (reads counted before reset, while the controller's state was not yet
    // defined, are excluded)
    // ---- 1. paired swap: H = SBASE, victim = frame 0 (UA 0) ----
    fork
      begin
        wait (act_valid); #1;
        chk(act_hot_ua == SBASE && act_hot_new == 0, "active: hot page and its new frame");
        wait (act_vic_valid); #1;
        chk(act_vic_ua == 0, "active: victim");
        wait (tlog.size() > 0); #1;
        read_ext(upfn_t'(0), e);
        chk(e.ongoing && e.pair && e.brf && e.ra == SBASE && !e.migrated, "start: victim flags (ongoing, pair, hot buffer)");
      end
    join_none
    migrate(upfn_t'(SBASE), cyc, pr);
    chk(mig_done && pr, "swap finished as a pair");
    read_ext(upfn_t'(SBASE), e);
    chk(e.migrated && !e.ongoing && e.ra == 0 && e.pair && !e.brf && e.vpn == 200, "hot page flags after swap");
    read_ext(upfn_t'(0), e);
    chk(e.migrated && !e.ongoing && e.ra == SBASE && e.pair && !e.brf && e.vpn == 100, "victim flags after swap");
    o = u_ept.own[0];          chk(o.valid && o.ua == SBASE, "frame 0 now holds hot page");
    o = u_ept.own[SBASE % 1024]; chk(o.valid && o.ua == 0, "slow frame now holds victim");
    chk_frame(1, upfn_t'(0), upfn_t'(SBASE), "fast frame holds hot page data");
    chk_frame(0, upfn_t'(SBASE), upfn_t'(0), "slow frame holds victim data");
    chk(tlog.size() == 3, $sformatf("three TCM updates (%0d)", tlog.size()));
    if (tlog.size() == 3) begin
      chk(tlog[0].phase == TCM_START && tlog[0].ua == 0 && tlog[0].ra == SBASE, "TCM START for victim");
      chk(tlog[1].phase == TCM_DONE  && tlog[1].ua == 0 && tlog[1].ra == SBASE, "TCM DONE for victim");
      chk(tlog[2].phase == TCM_DONE  && tlog[2].ua == SBASE && tlog[2].ra == 0, "TCM DONE for hot page");
    end
    @(posedge clk); #1;
    chk(hbits == '0 && cbits == '0 && hb_lv == '0 && !act_valid, "vectors, buffers and status cleared");
    chk(max_hbits == 64 && n_vic > 0 && busy_ok, "hot bit vector filled; busy names H or V");
    chk(n_busy >= 2 * LINES_PER_PAGE, "busy shown for each moved line");
    chk(u_fm.n_reads - r0f == 64 && u_fm.n_writes == 64 && u_sm.n_reads - r0s == 64 && u_sm.n_writes == 64,
        $sformatf("64 line reads and writes per memory (%0d %0d %0d %0d)", u_fm.n_reads, u_fm.n_writes, u_sm.n_reads, u_sm.n_writes));
    tlog.delete();

    // ---- 2. one-way move: evict UA 5 (VPN 105); H = SBASE+1 goes to the
    //         freed frame 5 although the round-robin scan is at frame 1 ----
    @(negedge clk); os_inv_valid = 1; os_inv_vpn = vpn_t'(105);
    @(negedge clk); os_inv_valid = 0;
    migrate(upfn_t'(SBASE + 1), cyc, pr);
    chk(mig_done && !pr, "one-way move, no pair");
    read_ext(upfn_t'(SBASE + 1), e);
    chk(e.migrated && !e.ongoing && e.ra == 5 && !e.pair, "one-way: hot page placed in the freed frame");
    o = u_ept.own[5];                  chk(o.valid && o.ua == SBASE + 1, "one-way: frame 5 occupant");
    o = u_ept.own[(SBASE + 1) % 1024]; chk(!o.valid, "one-way: old slow frame free");
    o = u_ept.own[1];                  chk(o.valid && o.ua == 1, "one-way: frame 1 untouched");
    chk_frame(1, upfn_t'(5), upfn_t'(SBASE + 1), "one-way: data in fast frame");
    chk(tlog.size() == 1 && tlog[0].phase == TCM_DONE && tlog[0].ua == SBASE + 1 && tlog[0].ra == 5,
        "one-way: single TCM DONE update");
    chk(u_sm.n_writes == 64, "one-way: nothing written to slow memory");
    tlog.delete();

    // ---- 3. page already in fast memory is not migrated ----
    begin
      int w0;
      w0 = u_fm.n_writes;
      @(negedge clk); hot_valid = 1; hot_upfn = upfn_t'(3);
      @(negedge clk); hot_valid = 0;
      repeat (20) @(posedge clk);
      #1 chk(hot_ready && !act_valid && u_fm.n_writes == w0 && tlog.size() == 0,
                 $sformatf("fast page request dropped %0d %0d %0d", hot_ready, act_valid, tlog.size()));
    end

    // ---- 4. re-migration: UA 0 (now in slow frame SBASE) back to fast;
    //         the scan continues at frame 1, victim UA 1 ----
    migrate(upfn_t'(0), cyc, pr);
    chk(mig_done && pr, "re-migration paired");
    read_ext(upfn_t'(0), e);
    chk(e.migrated && e.ra == 1 && !e.ongoing, "re-migrated page remapped to frame 1");
    read_ext(upfn_t'(1), e);
    chk(e.migrated && e.ra == SBASE, "second victim went to the freed slow frame");
    chk_frame(1, upfn_t'(1), upfn_t'(0), "data of UA 0 followed it back to fast memory");
    chk_frame(0, upfn_t'(SBASE), upfn_t'(1), "victim UA 1 data in slow frame");
    chk(tlog.size() == 3 && tlog[0].ua == 1 && tlog[2].ua == 0 && tlog[2].ra == 1, "re-migration TCM order");
    $display("migration cycles (last swap): %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
