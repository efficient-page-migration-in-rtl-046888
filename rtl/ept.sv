// ept: the Extended Page Table.
//
// Three tables, all plain memories:
//   pt  [VPN]  conventional page-table entry: valid, dirty, UA frame;
//   ext [UA]   Duon metadata of each unified page: its VPN, remapped frame
//              (RA), Migrated, Ongoing Migration, Pair and Buffer Residency
//              flags, and an "installed" bit;
//   own [PFN]  the unified page that currently occupies a physical frame,
//              used by the migration controller to pick and check victims.
// Reads are combinational: two pt ports (pt_rd0/1), three ext ports
// (ext_rd0/1/2) and one own port.
// Writes take effect at the clock edge:
//   os_inst_* installs a page (pt[vpn] = {valid, upfn}, ext[upfn] cleared
//             with vpn recorded, own[upfn] = upfn); os_inv_* evicts a page:
//             its pt entry becomes invalid, its ext entry not installed and
//             the frame holding its data free (no occupant);
//   ext_wr_*  and own_wr_* are the migration controller's metadata writes.
// freed_valid/freed_pfn report, in the cycle of an eviction, a fast frame
// that the eviction leaves empty, so the controller can use it first.
// All writers can write in the same cycle; on the same entry the OS
// install wins over the eviction, which wins over the controller.
//
// The fields are those of the paper's extended page table. In the paper the
// table lives in main memory (one part in fast, one in slow memory); here it
// is a single array set without access latency, and the split into a
// VPN-indexed and a UA-indexed part plus the occupant table are this
// design's choices. The contents are not reset: the OS writes an entry
// before it is used.
module ept
  import duon_pkg::*;
#(
  parameter int unsigned NVPAGES = 2 ** VPN_W,
  parameter int unsigned NUPAGES = FAST_PAGES + SLOW_PAGES
) (
  input  logic     clk,
  // page-table reads
  input  vpn_t     pt_rd0_vpn,
  output pte_t     pt_rd0_data,
  input  vpn_t     pt_rd1_vpn,
  output pte_t     pt_rd1_data,
  // extension reads
  input  upfn_t    ext_rd0_upfn,
  output ept_ext_t ext_rd0_data,
  input  upfn_t    ext_rd1_upfn,
  output ept_ext_t ext_rd1_data,
  input  upfn_t    ext_rd2_upfn,
  output ept_ext_t ext_rd2_data,
  // occupant read
  input  upfn_t    own_rd_pfn,
  output owner_t   own_rd_data,
  // OS page install / invalidate
  input  logic     os_inst_valid,
  input  vpn_t     os_inst_vpn,
  input  upfn_t    os_inst_upfn,
  input  logic     os_inv_valid,
  input  vpn_t     os_inv_vpn,
  // migration controller writes
  input  logic     ext_wr_valid,
  input  upfn_t    ext_wr_upfn,
  input  ept_ext_t ext_wr_data,
  input  logic     own_wr_valid,
  input  upfn_t    own_wr_pfn,
  input  owner_t   own_wr_data,
  // a fast frame freed by an eviction
  output logic     freed_valid,
  output upfn_t    freed_pfn
);
  localparam int unsigned VI_W = (NVPAGES > 1) ? $clog2(NVPAGES) : 1;
  localparam int unsigned UI_W = (NUPAGES > 1) ? $clog2(NUPAGES) : 1;

  pte_t     pt  [NVPAGES];
  ept_ext_t ext [NUPAGES];
  owner_t   own [NUPAGES];

  assign pt_rd0_data  = pt[VI_W'(pt_rd0_vpn)];
  assign pt_rd1_data  = pt[VI_W'(pt_rd1_vpn)];
  assign ext_rd0_data = ext[UI_W'(ext_rd0_upfn)];
  assign ext_rd1_data = ext[UI_W'(ext_rd1_upfn)];
  assign ext_rd2_data = ext[UI_W'(ext_rd2_upfn)];
  assign own_rd_data  = own[UI_W'(own_rd_pfn)];

  ept_ext_t inst_ext;
  always_comb begin
    inst_ext           = '0;
    inst_ext.installed = 1'b1;
    inst_ext.vpn       = os_inst_vpn;
  end

  always_ff @(posedge clk) begin
    if (os_inst_valid) pt[VI_W'(os_inst_vpn)] <= '{valid: 1'b1, dirty: 1'b0, upfn: os_inst_upfn};
    else if (os_inv_valid) pt[VI_W'(os_inv_vpn)] <= '0;
  end

  // page being invalidated: its UA and the frame that holds its data
  pte_t     inv_pte;
  ept_ext_t inv_ext, inv_ext_cleared;
  upfn_t    inv_loc;
  assign inv_pte  = pt[VI_W'(os_inv_vpn)];
  assign inv_ext  = ext[UI_W'(inv_pte.upfn)];
  assign inv_loc  = page_loc(inv_pte.upfn, inv_ext.migrated, inv_ext.ra);
  assign freed_valid = os_inv_valid && inv_pte.valid && is_fast(inv_loc);
  assign freed_pfn   = inv_loc;
  always_comb begin
    inv_ext_cleared           = inv_ext;
    inv_ext_cleared.installed = 1'b0;
  end

  always_ff @(posedge clk) begin
    if (ext_wr_valid)                  ext[UI_W'(ext_wr_upfn)]  <= ext_wr_data;
    if (os_inv_valid && inv_pte.valid) ext[UI_W'(inv_pte.upfn)] <= inv_ext_cleared;
    if (os_inst_valid)                 ext[UI_W'(os_inst_upfn)] <= inst_ext;
  end

  always_ff @(posedge clk) begin
    if (own_wr_valid)                  own[UI_W'(own_wr_pfn)]   <= own_wr_data;
    if (os_inv_valid && inv_pte.valid) own[UI_W'(inv_loc)]      <= '0;
    if (os_inst_valid)                 own[UI_W'(os_inst_upfn)] <= '{valid: 1'b1, ua: os_inst_upfn};
  end

endmodule
