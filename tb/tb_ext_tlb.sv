// tb_ext_tlb: self-checking test of the extended TLB (8 entries).
// Checks translation by VPN, lookup by UA, START/DONE coherence updates
// (flags, RA, one-cycle acknowledge), invalidation, refill of an existing
// VPN in place and round-robin replacement.
module tb_ext_tlb;
  import duon_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  vpn_t tr_vpn; logic tr_hit; tlb_entry_t tr_entry;
  upfn_t ux_upfn; logic ux_hit; tlb_entry_t ux_entry;
  logic fill_valid = 0; tlb_entry_t fill_entry;
  logic upd_valid = 0; tcm_upd_t upd; logic upd_ack;
  logic inv_valid = 0; vpn_t inv_vpn;

  ext_tlb #(.ENTRIES(N)) dut (.*);

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic tlb_entry_t mk(int v, int u);
    return '{valid: 1'b1, dirty: 1'b0, vpn: vpn_t'(v), ua: upfn_t'(u), ra: '0, migrated: 1'b0, ongoing: 1'b0};
  endfunction

  task automatic fill(int v, int u);
    fill_valid = 1; fill_entry = mk(v, u);
    @(posedge clk); #1 fill_valid = 0;
  endtask

  initial begin
    #2000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    tr_vpn = 0; ux_upfn = 0; upd = '0; inv_vpn = 0; fill_entry = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    tr_vpn = 5; #1 chk(!tr_hit, "empty TLB misses");
    for (int i = 0; i < 6; i++) fill(100 + i, 262144 + 10 * i);
    for (int i = 0; i < 6; i++) begin
      tr_vpn = vpn_t'(100 + i); ux_upfn = upfn_t'(262144 + 10 * i); #1;
      chk(tr_hit && tr_entry.ua == upfn_t'(262144 + 10 * i), "translate VPN -> UA");
      chk(ux_hit && ux_entry.vpn == vpn_t'(100 + i), "lookup by UA");
      chk(!tr_entry.migrated && !tr_entry.ongoing, "fresh entry flags clear");
    end
    // START update for UA of VPN 102
    upd = '{phase: TCM_START, ua: upfn_t'(262164), ra: upfn_t'(7)};
    upd_valid = 1; @(posedge clk); #1 upd_valid = 0;
    chk(upd_ack == 1, "ack one cycle after update");
    tr_vpn = 102; #1;
    chk(tr_entry.ongoing && !tr_entry.migrated && tr_entry.ra == 7, "START sets ongoing and RA");
    tr_vpn = 101; #1;
    chk(!tr_entry.ongoing && tr_entry.ra == 0, "other entries untouched");
    @(posedge clk); #1 chk(upd_ack == 0, "ack is a pulse");
    upd = '{phase: TCM_DONE, ua: upfn_t'(262164), ra: upfn_t'(7)};
    upd_valid = 1; @(posedge clk); #1 upd_valid = 0;
    tr_vpn = 102; #1;
    chk(!tr_entry.ongoing && tr_entry.migrated && tr_entry.ra == 7, "DONE sets migrated, clears ongoing");
    // update to a UA not present: nothing changes, still acknowledged
    upd = '{phase: TCM_START, ua: upfn_t'(999), ra: upfn_t'(3)};
    upd_valid = 1; @(posedge clk); #1 upd_valid = 0;
    chk(upd_ack == 1, "ack for absent UA");
    ux_upfn = 999; #1 chk(!ux_hit, "absent UA stays absent");
    // invalidate VPN 103
    inv_vpn = 103; inv_valid = 1; @(posedge clk); #1 inv_valid = 0;
    tr_vpn = 103; #1 chk(!tr_hit, "invalidated");
    tr_vpn = 104; #1 chk(tr_hit, "neighbour kept");
    // refill of VPN 100 in place with new UA
    fill(100, 55);
    tr_vpn = 100; #1 chk(tr_hit && tr_entry.ua == 55, "refill same VPN updates in place");
    ux_upfn = 262144; #1 chk(!ux_hit, "old UA gone after in-place refill");
    // two more fills occupy entries 6,7; the next fill replaces entry 0 (VPN 100)
    fill(200, 1); fill(201, 2); fill(202, 3);
    tr_vpn = 100; #1 chk(!tr_hit, "round-robin victim was entry 0");
    tr_vpn = 202; #1 chk(tr_hit && tr_entry.ua == 3, "new entry present");
    tr_vpn = 201; #1 chk(tr_hit, "entry 7 kept");
    // fill and DONE update of same UA in the same cycle
    fill_valid = 1; fill_entry = mk(300, 77);
    upd = '{phase: TCM_DONE, ua: upfn_t'(77), ra: upfn_t'(9)}; upd_valid = 1;
    @(posedge clk); #1 fill_valid = 0; upd_valid = 0;
    tr_vpn = 300; #1 chk(tr_hit && tr_entry.migrated && tr_entry.ra == 9, "update reaches same-cycle fill");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
