// tb_duon_top: end-to-end test of the whole Duon subsystem at reduced size
// (2 cores, 16-entry TLBs, hot threshold 4, 8 fast frames scanned for
// victims, 1024-entry tables).
//
// Two memory models stand in for HBM (latency 4) and PCM (latency 10).
// The OS installs 8 pages in fast frames 0..7 and 8 pages in slow memory,
// then evicts the page in frame 0 so that a frame is free. Random
// shared-cache misses and write-backs then run from both cores, biased
// towards the pages being migrated, while the cores also issue random
// translations (some to unmapped pages). The hot-page detector triggers
// migrations on its own; pages are swapped back and forth many times.
//
// Checking is against a reference model that knows only unified addresses:
// every read must return the last value written to that unified line (or
// the line's initial contents, a function of its unified address), wherever
// the line physically is, and every translation must return the page's
// unified frame. At the end every line of every page is read back, and the
// frame-occupant table is checked against each page's location.
//
// Each mechanism is counted and must happen at least once: paired and
// one-way migration, re-migration of a page that was swapped out, hot-buffer
// service, wait queue, redirection by a bit vector, TLB fill on an LLC miss,
// TLB fill by the walker, translation fault, TCM acknowledge, back-pressure
// to the shared cache.
module tb_duon_top;
  import duon_pkg::*;
  localparam int NC = 2;
  localparam int unsigned SBASE = FAST_PAGES + 512;
  localparam int NPG = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic core_tr_valid [NC]; vpn_t core_tr_vpn [NC];
  logic core_tr_hit [NC]; upfn_t core_tr_ua [NC]; logic [NC-1:0] core_tr_fault;
  logic llc_req_valid = 0, llc_req_ready, llc_rsp_valid; llc_req_t llc_req = '0; llc_rsp_t llc_rsp;
  logic os_inst_valid = 0, os_inv_valid = 0; vpn_t os_inst_vpn = '0, os_inv_vpn = '0; upfn_t os_inst_upfn = '0;
  logic fmem_req_valid, fmem_req_ready, fmem_rsp_valid, fmem_rsp_ready;
  logic smem_req_valid, smem_req_ready, smem_rsp_valid, smem_rsp_ready;
  mem_req_t fmem_req, smem_req; mem_rsp_t fmem_rsp, smem_rsp;
  logic mig_done, mig_done_pair, ev_buf, ev_wait, ev_redirect, ev_fill, ev_tcm_ack;

  duon_top #(.NCORES(NC), .TLB_ENTRIES(16), .THRESHOLD(4), .HPD_ENTRIES(16), .WQ_DEPTH(4),
             .MQ_DEPTH(4), .VICTIM_FRAMES(8), .NVPAGES(1024), .NUPAGES(1024)) dut (.*);

  mem_model #(.LATENCY(4))  u_fm (.clk, .req_valid(fmem_req_valid), .req(fmem_req), .req_ready(fmem_req_ready),
                                  .rsp_valid(fmem_rsp_valid), .rsp(fmem_rsp), .rsp_ready(fmem_rsp_ready));
  mem_model #(.LATENCY(10)) u_sm (.clk, .req_valid(smem_req_valid), .req(smem_req), .req_ready(smem_req_ready),
                                  .rsp_valid(smem_rsp_valid), .rsp(smem_rsp), .rsp_ready(smem_rsp_ready));

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, m); end
  endtask

  function automatic line_data_t init_line(logic [LADDR_W-1:0] a);
    return {16{3'b101, a}};
  endfunction

  // pages: index p -> unified frame and VPN; page 0 is evicted at the start
  function automatic upfn_t ua_of(int p);
    return (p < 8) ? upfn_t'(p) : upfn_t'(SBASE + p - 8);
  endfunction
  function automatic vpn_t vpn_of(int p);
    return vpn_t'(100 + p);
  endfunction

  // reference model
  line_data_t ref_mem [logic [LADDR_W-1:0]];
  line_data_t exp_rd  [logic [LADDR_W-1:0]];
  function automatic line_data_t ref_rd(logic [LADDR_W-1:0] a);
    return ref_mem.exists(a) ? ref_mem[a] : init_line(a);
  endfunction

  // event counters
  int n_pair = 0, n_oneway = 0, n_remig = 0, n_buf = 0, n_wait = 0, n_redirect = 0, n_fill = 0;
  int n_wfill = 0, n_fault = 0, n_tcm = 0, n_stall = 0, n_rsp = 0, n_tr = 0;
  always @(posedge clk) if (rst_n) begin
    if (mig_done && mig_done_pair) n_pair++;
    if (mig_done && !mig_done_pair) n_oneway++;
    if (mig_done && is_fast(dut.act_hot_ua)) n_remig++;
    if (ev_buf) n_buf++;
    if (ev_wait) n_wait++;
    if (ev_redirect) n_redirect++;
    if (ev_fill) n_fill++;
    if (dut.w_fill_valid) n_wfill++;
    if (|core_tr_fault) n_fault++;
    if (ev_tcm_ack) n_tcm++;
    if (llc_req_valid && !llc_req_ready) n_stall++;
  end

  // response checker
  always @(posedge clk) if (rst_n && llc_rsp_valid) begin
    logic [LADDR_W-1:0] a;
    a = {llc_rsp.upfn, llc_rsp.line};
    n_rsp++;
    chk(exp_rd.exists(a), $sformatf("unexpected response %h", a));
    if (exp_rd.exists(a)) begin
      chk(llc_rsp.rdata == exp_rd[a], $sformatf("read data of UA line %h", a));
      exp_rd.delete(a);
    end
  end

  // translation checker: a hit returns the page's unified frame
  always @(posedge clk) if (rst_n)
    for (int c = 0; c < NC; c++)
      if (core_tr_hit[c]) begin
        n_tr++;
        chk(core_tr_ua[c] == ua_of(int'(core_tr_vpn[c]) - 100), "translation");
      end

  bit traffic = 0;
  // translation traffic
  always @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      core_tr_valid[c] <= traffic && ($urandom_range(3) == 0);
      // VPN 100 is evicted and 116.. are never mapped: both fault
      core_tr_vpn[c]   <= vpn_t'(101 + $urandom_range(NPG + 1));
    end
  end

  // send one LLC request, waiting until it is accepted
  task automatic send(int core, bit we, upfn_t ua, line_idx_t ln);
    logic [LADDR_W-1:0] a;
    a = {ua, ln};
    while (!we && exp_rd.exists(a)) @(posedge clk);
    @(negedge clk);
    llc_req = '{core: core_id_t'(core), we: we, upfn: ua, line: ln, wdata: {16{$urandom}}};
    llc_req_valid = 1;
    @(posedge clk);
    while (!llc_req_ready) @(posedge clk);
    if (we) ref_mem[a] = llc_req.wdata;
    else    exp_rd[a]  = ref_rd(a);
    #1 llc_req_valid = 0;
  endtask

  initial begin
    #40000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cyc = 0;
    for (int c = 0; c < NC; c++) begin core_tr_valid[c] = 0; core_tr_vpn[c] = '0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int p = 0; p < NPG; p++) begin
      @(negedge clk); os_inst_valid = 1; os_inst_vpn = vpn_of(p); os_inst_upfn = ua_of(p);
    end
    @(negedge clk); os_inst_valid = 0; os_inv_valid = 1; os_inv_vpn = vpn_of(0);
    @(negedge clk); os_inv_valid = 0;
    traffic = 1;
    while ((n_pair < 12 || n_remig < 2) && cyc < 30000) begin
      int p;
      upfn_t u;
      line_idx_t ln;
      p  = 1 + $urandom_range(NPG - 2);
      u  = ua_of(p);
      ln = line_idx_t'($urandom_range(LINES_PER_PAGE - 1));
      if (dut.act_valid && $urandom_range(1) == 0)
        u = (dut.act_vic_valid && $urandom_range(1) == 0) ? dut.act_vic_ua : dut.act_hot_ua;
      send($urandom_range(NC - 1), $urandom_range(2) == 0, u, ln);
      cyc++;
    end
    traffic = 0;
    $display("requests %0d; pair %0d one-way %0d re-migrations %0d", cyc, n_pair, n_oneway, n_remig);
    // let the last migration finish, then read every line back
    while (dut.act_valid || exp_rd.size() != 0) @(posedge clk);
    for (int p = 1; p < NPG; p++)
      for (int l = 0; l < LINES_PER_PAGE; l++) send(l % NC, 0, ua_of(p), line_idx_t'(l));
    // the read-back may itself make pages hot: wait until migration is idle
    begin
      int idle = 0;
      while (idle < 20) begin
        @(posedge clk);
        idle = (dut.hot_ready && !dut.hot_valid && exp_rd.size() == 0) ? idle + 1 : 0;
      end
    end
    chk(exp_rd.size() == 0, $sformatf("all reads answered (%0d left)", exp_rd.size()));
    // occupant table agrees with every page's location
    for (int p = 1; p < NPG; p++) begin
      ept_ext_t e;
      upfn_t loc;
      owner_t o;
      e   = dut.u_ept.ext[ua_of(p) % 1024];
      loc = page_loc(ua_of(p), e.migrated, e.ra);
      o   = dut.u_ept.own[loc % 1024];
      chk(o.valid && o.ua == ua_of(p) && !e.ongoing, $sformatf("occupant of page %0d: ext %p own[%0d] %p", p, e, loc, o));
    end
    $display("events: buf %0d wait %0d redirect %0d llc-fill %0d walk-fill %0d fault %0d tcm %0d stall %0d rsp %0d tr %0d",
             n_buf, n_wait, n_redirect, n_fill, n_wfill, n_fault, n_tcm, n_stall, n_rsp, n_tr);
    chk(n_pair > 0,     "paired migration happened");
    chk(n_oneway > 0,   "one-way migration happened");
    chk(n_remig > 0,    "re-migration happened");
    chk(n_buf > 0,      "hot-buffer service happened");
    chk(n_wait > 0,     "wait queue used");
    chk(n_redirect > 0, "bit-vector redirection happened");
    chk(n_fill > 0,     "TLB fill on LLC miss happened");
    chk(n_wfill > 0,    "walker TLB fill happened");
    chk(n_fault > 0,    "translation fault happened");
    chk(n_tcm > 0,      "TCM acknowledge happened");
    chk(n_stall > 0,    "back-pressure to the shared cache happened");
    chk(n_tr > 0,       "translations hit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
