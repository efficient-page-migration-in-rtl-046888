// ext_tlb: one core's extended TLB.
//
// Besides the usual VPN -> UA translation (with valid and dirty bits) every
// entry holds the remapped physical frame (RA) and the Migrated and Ongoing
// Migration flags of its page, as the extended TLB of Duon does. The TLB is
// searched in three ways:
//   * tr_*  : by VPN, the normal translation for the core (combinational);
//   * ux_*  : by UA, the second lookup made on an LLC miss (combinational);
//   * upd_* : by UA, updates broadcast by the TLB coherence module. A START
//             update sets Ongoing and records the new RA; a DONE update
//             records the RA, sets Migrated and clears Ongoing. Every
//             matching entry is updated; upd_ack pulses one cycle later.
// fill_* writes an entry (replacing one with the same VPN, otherwise the
// round-robin victim) and inv_* invalidates entries by VPN; both act at the
// next clock edge, and an update is applied after a same-cycle fill.
//
// The entry fields follow the paper's extended TLB. The organisation (fully
// associative, round-robin replacement) is this design's choice: the
// coherence updates need a search by UA. Default size 4096 entries.
module ext_tlb
  import duon_pkg::*;
#(
  parameter int unsigned ENTRIES = 4096
) (
  input  logic       clk,
  input  logic       rst_n,
  // translation by VPN
  input  vpn_t       tr_vpn,
  output logic       tr_hit,
  output tlb_entry_t tr_entry,
  // extended lookup by UA (LLC miss)
  input  upfn_t      ux_upfn,
  output logic       ux_hit,
  output tlb_entry_t ux_entry,
  // fill from the EPT
  input  logic       fill_valid,
  input  tlb_entry_t fill_entry,
  // coherence update
  input  logic       upd_valid,
  input  tcm_upd_t   upd,
  output logic       upd_ack,
  // invalidate by VPN
  input  logic       inv_valid,
  input  vpn_t       inv_vpn
);
  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  tlb_entry_t             tab [ENTRIES];
  logic [IDX_W-1:0]       rr_ptr;
  logic [IDX_W-1:0]       fill_idx;
  logic                   fill_match;

  // three independent searches, lowest index wins
  always_comb begin
    tr_hit   = 1'b0;
    tr_entry = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (tab[i].valid && tab[i].vpn == tr_vpn) begin
        tr_hit   = 1'b1;
        tr_entry = tab[i];
      end
  end

  always_comb begin
    ux_hit   = 1'b0;
    ux_entry = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (tab[i].valid && tab[i].ua == ux_upfn) begin
        ux_hit   = 1'b1;
        ux_entry = tab[i];
      end
  end

  always_comb begin
    fill_match = 1'b0;
    fill_idx   = rr_ptr;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (tab[i].valid && tab[i].vpn == fill_entry.vpn) begin
        fill_match = 1'b1;
        fill_idx   = IDX_W'(i);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tab[i].valid <= 1'b0;
      rr_ptr  <= '0;
      upd_ack <= 1'b0;
    end else begin
      upd_ack <= upd_valid;
      if (fill_valid) begin
        tab[fill_idx] <= fill_entry;
        if (!fill_match) rr_ptr <= (rr_ptr == IDX_W'(ENTRIES - 1)) ? '0 : rr_ptr + 1'b1;
      end
      for (int i = 0; i < ENTRIES; i++) begin
        if (inv_valid && tab[i].valid && tab[i].vpn == inv_vpn)
          tab[i].valid <= 1'b0;
        if (upd_valid && tab[i].valid && tab[i].ua == upd.ua) begin
          tab[i].ra <= upd.ra;
          if (upd.phase == TCM_START) begin
            tab[i].ongoing <= 1'b1;
          end else begin
            tab[i].migrated <= 1'b1;
            tab[i].ongoing  <= 1'b0;
          end
        end
      end
      // an update addressed to the page being filled also reaches the new entry
      if (fill_valid && upd_valid && fill_entry.valid && fill_entry.ua == upd.ua) begin
        tab[fill_idx].ra <= upd.ra;
        if (upd.phase == TCM_START) tab[fill_idx].ongoing <= 1'b1;
        else begin
          tab[fill_idx].migrated <= 1'b1;
          tab[fill_idx].ongoing  <= 1'b0;
        end
      end
    end
  end

endmodule
