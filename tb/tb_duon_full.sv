// tb_duon_full: one complete page migration through the Duon subsystem at
// its full default size (16 cores, 4096-entry TLBs, threshold 64, all
// 262144 fast and 4194304 slow frames in the tables).
//
// The OS installs page A in fast frame 0 and page B in slow memory. All 16
// cores translate both pages (TLB misses, walker fills), and the shared
// cache writes some lines of both pages. These write-backs and then a read
// of every line of B bring B's access count to the threshold of 64, so B
// becomes hot; the migration controller swaps B with A (A is the first fast frame
// it scans). The test checks that every line of both pages still reads
// back as written, that the memories really swapped the data, that the EPT
// flags and RA are those of a finished paired migration, and that the TCM
// updated the TLB of every core (remapped frame and Migrated flag), while
// translations still return the unchanged unified frames. The cycle count
// of the migration is printed.
module tb_duon_full;
  import duon_pkg::*;
  localparam int NC = 16;
  localparam upfn_t UA_A = upfn_t'(0);
  localparam upfn_t UA_B = upfn_t'(FAST_PAGES + 5);
  localparam vpn_t  VA = vpn_t'(1), VB = vpn_t'(2);
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

  duon_top dut (.*);

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

  line_data_t ref_mem [logic [LADDR_W-1:0]];
  function automatic line_data_t ref_rd(logic [LADDR_W-1:0] a);
    return ref_mem.exists(a) ? ref_mem[a] : init_line(a);
  endfunction

  int n_done = 0, n_tcm = 0;
  longint t_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (mig_done) begin n_done++; t_done = $time / 10; chk(mig_done_pair, "paired migration"); end
    if (ev_tcm_ack) n_tcm++;
  end

  // one request at a time; a read waits for its response and checks it
  task automatic access(bit we, upfn_t ua, line_idx_t ln);
    logic [LADDR_W-1:0] a;
    a = {ua, ln};
    @(negedge clk);
    llc_req = '{core: core_id_t'($urandom_range(NC - 1)), we: we, upfn: ua, line: ln, wdata: {16{$urandom}}};
    llc_req_valid = 1;
    @(posedge clk);
    while (!llc_req_ready) @(posedge clk);
    #1 llc_req_valid = 0;
    if (we) ref_mem[a] = llc_req.wdata;
    else begin
      while (!(llc_rsp_valid && llc_rsp.upfn == ua && llc_rsp.line == ln)) @(negedge clk);
      chk(llc_rsp.rdata == ref_rd(a), $sformatf("read data of UA line %h", a));
    end
  endtask

  task automatic translate_all(vpn_t v, upfn_t ua, bit check_mig, upfn_t ra);
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin core_tr_valid[c] = 1; core_tr_vpn[c] = v; end
    repeat (3 * NC + 4) @(negedge clk);
    for (int c = 0; c < NC; c++) begin
      chk(core_tr_hit[c] && core_tr_ua[c] == ua, $sformatf("core %0d translation", c));
      if (check_mig) chk(dut.tr_entry[c].migrated && !dut.tr_entry[c].ongoing && dut.tr_entry[c].ra == ra,
                         $sformatf("core %0d TLB updated by TCM", c));
    end
    for (int c = 0; c < NC; c++) core_tr_valid[c] = 0;
  endtask

  initial begin
    #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint t0;
    ept_ext_t e;
    for (int c = 0; c < NC; c++) begin core_tr_valid[c] = 0; core_tr_vpn[c] = '0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk); os_inst_valid = 1; os_inst_vpn = VA; os_inst_upfn = UA_A;
    @(negedge clk); os_inst_vpn = VB; os_inst_upfn = UA_B;
    @(negedge clk); os_inst_valid = 0;
    translate_all(VA, UA_A, 0, '0);
    translate_all(VB, UA_B, 0, '0);
    for (int l = 0; l < LINES_PER_PAGE; l += 3) begin access(1, UA_A, line_idx_t'(l)); access(1, UA_B, line_idx_t'(l + 1)); end
    // read every line of B: its count reaches 64 and it becomes hot
    t0 = $time / 10;
    for (int l = 0; l < LINES_PER_PAGE; l++) access(0, UA_B, line_idx_t'(l));
    while (n_done == 0 && $time / 10 - t0 < 100000) @(posedge clk);
    chk(n_done == 1, "page B migrated once");
    $display("migration finished %0d cycles after the first of the 64 reads", t_done - t0);
    e = dut.u_ept.ext[UA_B];
    chk(e.migrated && !e.ongoing && e.ra == UA_A && e.pair && !e.brf, "EPT entry of B");
    e = dut.u_ept.ext[UA_A];
    chk(e.migrated && !e.ongoing && e.ra == UA_B && e.pair && !e.brf, "EPT entry of A");
    chk(n_tcm == 3, $sformatf("three TCM acknowledges (%0d)", n_tcm));
    begin
      int bad = 0;
      for (int l = 0; l < LINES_PER_PAGE; l++) begin
        if (u_fm.peek({UA_A, line_idx_t'(l)}) != ref_rd({UA_B, line_idx_t'(l)})) bad++;
        if (u_sm.peek({UA_B, line_idx_t'(l)}) != ref_rd({UA_A, line_idx_t'(l)})) bad++;
      end
      chk(bad == 0, $sformatf("memories hold the swapped pages (%0d lines wrong)", bad));
    end
    translate_all(VB, UA_B, 1, UA_A);
    translate_all(VA, UA_A, 1, UA_B);
    for (int l = 0; l < LINES_PER_PAGE; l++) begin access(0, UA_A, line_idx_t'(l)); access(0, UA_B, line_idx_t'(l)); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
