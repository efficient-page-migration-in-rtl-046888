// tb_tlb_walker: self-checking test of the shared TLB-miss walker with 4
// cores. The testbench plays the EPT: page-table entries and extensions
// are functions of the address (VPN divisible by 5 is unmapped). Checks
// the fill contents, round-robin order among waiting cores, the done/fault
// pulse one cycle later, and that no request is lost.
module tb_tlb_walker;
  import duon_pkg::*;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NC-1:0] miss_valid = '0, done, fault;
  vpn_t miss_vpn [NC];
  vpn_t pt_rd_vpn; pte_t pt_rd_data;
  upfn_t ext_rd_upfn; ept_ext_t ext_rd_data;
  logic fill_valid; core_id_t fill_core; tlb_entry_t fill_entry;

  tlb_walker #(.NCORES(NC)) dut (.*);

  always_comb begin
    pt_rd_data  = '{valid: (pt_rd_vpn % 5 != 0), dirty: pt_rd_vpn[0], upfn: upfn_t'(pt_rd_vpn * 3 + 1)};
    ext_rd_data = '{installed: 1'b1, vpn: '0, ra: upfn_t'(ext_rd_upfn + 7), migrated: ext_rd_upfn[1],
                    ongoing: ext_rd_upfn[2], pair: 1'b0, brf: 1'b0};
  end

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int served [NC];
  int last_core;
  initial begin
    for (int c = 0; c < NC; c++) begin miss_vpn[c] = '0; served[c] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    last_core = NC - 1;
    for (int n = 0; n < 300; n++) begin
      // new misses for idle cores
      for (int c = 0; c < NC; c++)
        if (!miss_valid[c] && ($urandom % 2)) begin miss_valid[c] = 1; miss_vpn[c] = vpn_t'($urandom % 4000); end
      #1;
      if (miss_valid != '0) begin
        int exp_c;
        exp_c = -1;
        for (int j = 1; j <= NC; j++) if (exp_c < 0 && miss_valid[(last_core + j) % NC]) exp_c = (last_core + j) % NC;
        chk(int'(fill_core) == exp_c, "round-robin choice");
        chk(fill_valid == (miss_vpn[exp_c] % 5 != 0), "fill only for a mapped page");
        if (fill_valid) begin
          chk(fill_entry.valid && fill_entry.vpn == miss_vpn[exp_c] &&
              fill_entry.ua == upfn_t'(miss_vpn[exp_c] * 3 + 1) && fill_entry.dirty == miss_vpn[exp_c][0],
              "fill carries VPN, UA, dirty");
          chk(fill_entry.ra == fill_entry.ua + 7 && fill_entry.migrated == fill_entry.ua[1] &&
              fill_entry.ongoing == fill_entry.ua[2], "fill carries RA and flags");
        end
        @(posedge clk); #1;
        chk(done == ((miss_vpn[exp_c] % 5 != 0) ? NC'(1) << exp_c : '0), "done pulse");
        chk(fault == ((miss_vpn[exp_c] % 5 == 0) ? NC'(1) << exp_c : '0), "fault pulse");
        miss_valid[exp_c] = 0;
        served[exp_c]++;
        last_core = exp_c;
      end else begin
        @(posedge clk); #1;
      end
    end
    for (int c = 0; c < NC; c++) chk(served[c] > 30, "every core served");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
