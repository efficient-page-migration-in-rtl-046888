// tlb_walker: serves core TLB misses from the Extended Page Table.
//
// Cores whose extended TLB misses raise miss_valid with the VPN. Each cycle
// one of them is picked round-robin; its page-table entry and the EPT
// extension of the UA it points to are read (combinationally) and the
// core's TLB is filled with UA, RA, Migrated and Ongoing flags in the same
// cycle, so the next lookup hits. done[c] pulses the cycle after; if the
// page-table entry is not valid, fault[c] pulses instead and nothing is
// filled (page faults are the OS's business).
//
// The paper states that on a TLB miss the TLB asks the EPT, which answers
// with UA and RA; a single shared walker, its arbitration and its one-cycle
// timing are this design's choices.
module tlb_walker
  import duon_pkg::*;
#(
  parameter int unsigned NCORES = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NCORES-1:0] miss_valid,
  input  vpn_t              miss_vpn [NCORES],
  output vpn_t              pt_rd_vpn,
  input  pte_t              pt_rd_data,
  output upfn_t             ext_rd_upfn,
  input  ept_ext_t          ext_rd_data,
  output logic              fill_valid,
  output core_id_t          fill_core,
  output tlb_entry_t        fill_entry,
  output logic [NCORES-1:0] done,
  output logic [NCORES-1:0] fault
);
  localparam int unsigned CW = (NCORES > 1) ? $clog2(NCORES) : 1;
  logic [CW-1:0] rr, sel;
  logic          any;

  always_comb begin
    any = 1'b0;
    sel = rr;
    for (int j = NCORES - 1; j >= 0; j--) begin
      logic [CW:0] c;
      c = (CW+1)'((int'(rr) + j) % NCORES);
      if (miss_valid[c[CW-1:0]]) begin
        any = 1'b1;
        sel = c[CW-1:0];
      end
    end
  end

  assign pt_rd_vpn   = miss_vpn[sel];
  assign ext_rd_upfn = pt_rd_data.upfn;
  assign fill_valid  = any && pt_rd_data.valid;
  assign fill_core   = core_id_t'(sel);
  assign fill_entry  = '{valid: 1'b1, dirty: pt_rd_data.dirty, vpn: miss_vpn[sel], ua: pt_rd_data.upfn,
                         ra: ext_rd_data.ra, migrated: ext_rd_data.migrated, ongoing: ext_rd_data.ongoing};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr    <= '0;
      done  <= '0;
      fault <= '0;
    end else begin
      done  <= '0;
      fault <= '0;
      if (any) begin
        rr <= (sel == CW'(NCORES - 1)) ? '0 : sel + 1'b1;
        if (pt_rd_data.valid) done[sel]  <= 1'b1;
        else                  fault[sel] <= 1'b1;
      end
    end
  end
endmodule
