// tb_ept: self-checking test of the Extended Page Table (reduced to 1024
// virtual and 1024 unified pages). Checks OS install of page-table entry,
// extension and occupant, metadata and occupant writes, same-cycle write
// priority and invalidation, on all read ports.
module tb_ept;
  import duon_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  vpn_t pt_rd0_vpn, pt_rd1_vpn; pte_t pt_rd0_data, pt_rd1_data;
  upfn_t ext_rd0_upfn, ext_rd1_upfn, ext_rd2_upfn;
  ept_ext_t ext_rd0_data, ext_rd1_data, ext_rd2_data;
  upfn_t own_rd_pfn; owner_t own_rd_data;
  logic os_inst_valid = 0, os_inv_valid = 0, ext_wr_valid = 0, own_wr_valid = 0;
  logic freed_valid; upfn_t freed_pfn;
  vpn_t os_inst_vpn, os_inv_vpn; upfn_t os_inst_upfn, ext_wr_upfn, own_wr_pfn;
  ept_ext_t ext_wr_data; owner_t own_wr_data;

  ept #(.NVPAGES(1024), .NUPAGES(1024)) dut (.*);

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic install(int v, int u);
    os_inst_valid = 1; os_inst_vpn = vpn_t'(v); os_inst_upfn = upfn_t'(u);
    @(posedge clk); #1 os_inst_valid = 0;
  endtask

  initial begin
    #3000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    os_inst_vpn = 0; os_inst_upfn = 0; os_inv_vpn = 0; ext_wr_upfn = 0; own_wr_pfn = 0;
    ext_wr_data = '0; own_wr_data = '0;
    pt_rd0_vpn = 0; pt_rd1_vpn = 0; ext_rd0_upfn = 0; ext_rd1_upfn = 0; ext_rd2_upfn = 0; own_rd_pfn = 0;
    @(posedge clk); #1;
    for (int i = 0; i < 8; i++) install(16 + i, 100 + i);
    for (int i = 0; i < 8; i++) begin
      pt_rd0_vpn = vpn_t'(16 + i); pt_rd1_vpn = vpn_t'(23 - i);
      ext_rd0_upfn = upfn_t'(100 + i); ext_rd1_upfn = upfn_t'(107 - i); ext_rd2_upfn = upfn_t'(100 + i);
      own_rd_pfn = upfn_t'(100 + i); #1;
      chk(pt_rd0_data.valid && pt_rd0_data.upfn == upfn_t'(100 + i) && !pt_rd0_data.dirty, "pt port 0");
      chk(pt_rd1_data.valid && pt_rd1_data.upfn == upfn_t'(107 - i), "pt port 1");
      chk(ext_rd0_data.installed && ext_rd0_data.vpn == vpn_t'(16 + i) && !ext_rd0_data.migrated &&
          !ext_rd0_data.ongoing && !ext_rd0_data.pair && !ext_rd0_data.brf && ext_rd0_data.ra == 0, "ext cleared on install");
      chk(ext_rd1_data.vpn == vpn_t'(23 - i), "ext port 1");
      chk(ext_rd2_data.vpn == vpn_t'(16 + i), "ext port 2");
      chk(own_rd_data.valid && own_rd_data.ua == upfn_t'(100 + i), "occupant = itself");
    end
    // controller writes
    ext_wr_valid = 1; ext_wr_upfn = 102;
    ext_wr_data = '{installed: 1'b1, vpn: vpn_t'(18), ra: upfn_t'(5), migrated: 1'b1, ongoing: 1'b0, pair: 1'b1, brf: 1'b0};
    own_wr_valid = 1; own_wr_pfn = 5; own_wr_data = '{valid: 1'b1, ua: upfn_t'(102)};
    @(posedge clk); #1 ext_wr_valid = 0; own_wr_valid = 0;
    ext_rd0_upfn = 102; own_rd_pfn = 5; #1;
    chk(ext_rd0_data.migrated && ext_rd0_data.ra == 5 && ext_rd0_data.pair, "ext write");
    chk(own_rd_data.valid && own_rd_data.ua == 102, "own write");
    // same cycle: controller write and OS install of different entries both land
    ext_wr_valid = 1; ext_wr_upfn = 103; ext_wr_data.ra = upfn_t'(9);
    os_inst_valid = 1; os_inst_vpn = 40; os_inst_upfn = 200;
    @(posedge clk); #1 ext_wr_valid = 0; os_inst_valid = 0;
    ext_rd0_upfn = 103; ext_rd1_upfn = 200; #1;
    chk(ext_rd0_data.ra == 9, "both writers land (controller)");
    chk(ext_rd1_data.installed && ext_rd1_data.vpn == 40, "both writers land (OS)");
    // same entry: OS wins
    ext_wr_valid = 1; ext_wr_upfn = 200; ext_wr_data.ra = upfn_t'(11);
    os_inst_valid = 1; os_inst_vpn = 41; os_inst_upfn = 200;
    @(posedge clk); #1 ext_wr_valid = 0; os_inst_valid = 0;
    ext_rd0_upfn = 200; #1 chk(ext_rd0_data.vpn == 41 && ext_rd0_data.ra == 0, "OS install wins on same entry");
    // invalidate
    chk(!freed_valid, "no freed frame without eviction");
    os_inv_valid = 1; os_inv_vpn = 17; #1;
    chk(freed_valid && freed_pfn == 101, "eviction reports the freed fast frame");
    @(posedge clk); #1 os_inv_valid = 0;
    pt_rd0_vpn = 17; pt_rd1_vpn = 18; ext_rd0_upfn = 101; own_rd_pfn = 101; #1;
    chk(!pt_rd0_data.valid, "invalidated");
    chk(pt_rd1_data.valid, "neighbour stays");
    chk(!ext_rd0_data.installed, "evicted page not installed");
    chk(!own_rd_data.valid, "its frame is free");
    // evicting a migrated page frees the frame at its RA (UA 102 lives at frame 5)
    os_inv_valid = 1; os_inv_vpn = 18; #1;
    chk(freed_valid && freed_pfn == 5, "freed frame is the one at RA");
    @(posedge clk); #1 os_inv_valid = 0;
    // evicting a page that lives in slow memory frees no fast frame
    os_inst_valid = 1; os_inst_vpn = 60; os_inst_upfn = upfn_t'(FAST_PAGES + 300);
    @(posedge clk); #1 os_inst_valid = 0;
    os_inv_valid = 1; os_inv_vpn = 60; #1;
    chk(!freed_valid, "slow frame is not reported");
    @(posedge clk); #1 os_inv_valid = 0;
    own_rd_pfn = 5; #1 chk(!own_rd_data.valid, "frame at RA freed");
    own_rd_pfn = 102; #1 chk(own_rd_data.valid, "frame at UA untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
