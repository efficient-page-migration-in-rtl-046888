// duon_top: the Duon memory-side subsystem of a 16-core flat-address hybrid
// memory (fast HBM + slow PCM/DDR4).
//
// Pages are migrated between the memories in hardware while their unified
// address (UA), the address the OS, the TLBs and the caches use, never
// changes. Each core's extended TLB and the Extended Page Table record, per
// page, the remapped frame (RA) and the Migrated / Ongoing Migration flags;
// only traffic that leaves the shared cache is redirected to the real
// location, so no TLB shootdown or cache flush is needed.
//
// Inside:
//   ext_tlb x NCORES      per-core translation (core_tr_*) and UA lookups
//   tlb_walker            fills TLBs on core TLB misses from the EPT
//   ept                   page table + Duon metadata + frame occupants
//   miss_handler          routes LLC misses/write-backs (llc_*), with the
//                         wait queue inside
//   hot_page_detector     threshold policy, feeds the migration controller
//   migration_controller  the page-swap state machine
//   page_buffer x2        hot buffer (victim page) and cold buffer (staging)
//   line_bitvec x2        hot-page and cold-page bit vectors
//   tcm                   broadcasts remapping updates to all TLBs
//   migration_queue x2    per memory controller, merges migration traffic
// Outside (ports): the cores (translation requests), the shared cache
// (misses and write-backs, read data back), the OS (page install and
// invalidate) and the two memories (fmem_*, smem_*; requests carry a
// unified physical line address, reads return in order with their tag).
// Event pulses (ev_*, mig_done*) expose what happened for monitoring.
// Some block outputs are left unused on purpose: the walker's per-core
// done pulses (a hit on the core's next lookup already signals the fill),
// the cold buffer's line-valid bits (the controller knows which line it
// staged) and the bit vectors' all_set flags (the controller counts lines).
//
// The block structure follows the paper's overview figure (cores with TLBs,
// migration controller with hot/cold buffers, wait queue and bit vectors,
// memories with their extended page tables); the port set, the single
// on-chip EPT and all timing are this design's own.
module duon_top
  import duon_pkg::*;
#(
  parameter int unsigned NCORES        = 16,
  parameter int unsigned TLB_ENTRIES   = 4096,
  parameter int unsigned THRESHOLD     = 64,
  parameter int unsigned HPD_ENTRIES   = 1024,
  parameter int unsigned WQ_DEPTH      = 16,
  parameter int unsigned MQ_DEPTH      = 8,
  parameter int unsigned VICTIM_FRAMES = FAST_PAGES,
  parameter int unsigned NVPAGES       = 2 ** VPN_W,
  parameter int unsigned NUPAGES       = FAST_PAGES + SLOW_PAGES
) (
  input  logic              clk,
  input  logic              rst_n,
  // cores: translation
  input  logic              core_tr_valid [NCORES],
  input  vpn_t              core_tr_vpn   [NCORES],
  output logic              core_tr_hit   [NCORES],
  output upfn_t             core_tr_ua    [NCORES],
  output logic [NCORES-1:0] core_tr_fault,
  // shared cache: misses / write-backs and read data
  input  logic              llc_req_valid,
  input  llc_req_t          llc_req,
  output logic              llc_req_ready,
  output logic              llc_rsp_valid,
  output llc_rsp_t          llc_rsp,
  // OS
  input  logic              os_inst_valid,
  input  vpn_t              os_inst_vpn,
  input  upfn_t             os_inst_upfn,
  input  logic              os_inv_valid,
  input  vpn_t              os_inv_vpn,
  // fast memory (HBM)
  output logic              fmem_req_valid,
  output mem_req_t          fmem_req,
  input  logic              fmem_req_ready,
  input  logic              fmem_rsp_valid,
  input  mem_rsp_t          fmem_rsp,
  output logic              fmem_rsp_ready,
  // slow memory (PCM / DDR4)
  output logic              smem_req_valid,
  output mem_req_t          smem_req,
  input  logic              smem_req_ready,
  input  logic              smem_rsp_valid,
  input  mem_rsp_t          smem_rsp,
  output logic              smem_rsp_ready,
  // events
  output logic              mig_done,
  output logic              mig_done_pair,
  output logic              ev_buf,
  output logic              ev_wait,
  output logic              ev_redirect,
  output logic              ev_fill,
  output logic              ev_tcm_ack
);
  // ---------------- EPT ----------------
  vpn_t     pt_rd0_vpn, pt_rd1_vpn;
  pte_t     pt_rd0_data, pt_rd1_data;
  upfn_t    ext_rd0_upfn, ext_rd1_upfn, ext_rd2_upfn;
  ept_ext_t ext_rd0_data, ext_rd1_data, ext_rd2_data;
  upfn_t    own_rd_pfn;
  owner_t   own_rd_data;
  logic     ext_wr_valid, own_wr_valid;
  upfn_t    ext_wr_upfn, own_wr_pfn;
  ept_ext_t ext_wr_data;
  owner_t   own_wr_data;
  logic     freed_valid;
  upfn_t    freed_pfn;

  ept #(.NVPAGES(NVPAGES), .NUPAGES(NUPAGES)) u_ept (
    .clk,
    .pt_rd0_vpn, .pt_rd0_data, .pt_rd1_vpn, .pt_rd1_data,
    .ext_rd0_upfn, .ext_rd0_data, .ext_rd1_upfn, .ext_rd1_data, .ext_rd2_upfn, .ext_rd2_data,
    .own_rd_pfn, .own_rd_data,
    .os_inst_valid, .os_inst_vpn, .os_inst_upfn, .os_inv_valid, .os_inv_vpn,
    .ext_wr_valid, .ext_wr_upfn, .ext_wr_data, .own_wr_valid, .own_wr_pfn, .own_wr_data,
    .freed_valid, .freed_pfn
  );

  // ---------------- TLBs and walker ----------------
  logic              tr_hit   [NCORES];
  tlb_entry_t        tr_entry [NCORES];
  logic              ux_hit   [NCORES];
  tlb_entry_t        ux_entry [NCORES];
  upfn_t             ux_upfn;
  logic [NCORES-1:0] upd_ack;
  logic              bc_valid;
  tcm_upd_t          bc;
  logic [NCORES-1:0] walk_miss;
  logic              w_fill_valid, m_fill_valid;
  core_id_t          w_fill_core, m_fill_core;
  tlb_entry_t        w_fill_entry, m_fill_entry;
  logic [NCORES-1:0] walk_done;

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    logic       fv;
    tlb_entry_t fe;
    always_comb begin
      if (w_fill_valid && w_fill_core == core_id_t'(c)) begin
        fv = 1'b1;
        fe = w_fill_entry;
      end else begin
        fv = m_fill_valid && m_fill_core == core_id_t'(c);
        fe = m_fill_entry;
      end
    end
    ext_tlb #(.ENTRIES(TLB_ENTRIES)) u_tlb (
      .clk, .rst_n,
      .tr_vpn(core_tr_vpn[c]), .tr_hit(tr_hit[c]), .tr_entry(tr_entry[c]),
      .ux_upfn, .ux_hit(ux_hit[c]), .ux_entry(ux_entry[c]),
      .fill_valid(fv), .fill_entry(fe),
      .upd_valid(bc_valid), .upd(bc), .upd_ack(upd_ack[c]),
      .inv_valid(os_inv_valid), .inv_vpn(os_inv_vpn)
    );
    assign walk_miss[c]   = core_tr_valid[c] && !tr_hit[c];
    assign core_tr_hit[c] = core_tr_valid[c] && tr_hit[c];
    assign core_tr_ua[c]  = tr_entry[c].ua;
  end

  tlb_walker #(.NCORES(NCORES)) u_walker (
    .clk, .rst_n,
    .miss_valid(walk_miss), .miss_vpn(core_tr_vpn),
    .pt_rd_vpn(pt_rd0_vpn), .pt_rd_data(pt_rd0_data),
    .ext_rd_upfn(ext_rd0_upfn), .ext_rd_data(ext_rd0_data),
    .fill_valid(w_fill_valid), .fill_core(w_fill_core), .fill_entry(w_fill_entry),
    .done(walk_done), .fault(core_tr_fault)
  );

  // ---------------- migration controller and its storage ----------------
  logic       hot_valid, hot_ready;
  upfn_t      hot_upfn;
  logic       tcm_req_valid, tcm_req_ready, tcm_ack;
  tcm_upd_t   tcm_req;
  logic       fmq_valid, fmq_ready, smq_valid, smq_ready;
  mem_req_t   fmq_req, smq_req;
  logic       mig_rsp_valid;
  line_data_t mig_rsp_data;
  logic       buf_clear, vec_clear;
  logic       hb_wr_valid, cb_wr_valid, hv_set_valid, cv_set_valid;
  line_idx_t  hb_wr_line, hb_rd_line, cb_wr_line, cb_rd_line, hv_set_line, cv_set_line;
  line_data_t hb_wr_data, hb_rd_data, cb_wr_data, cb_rd_data;
  logic       act_valid, act_vic_valid, busy_valid;
  upfn_t      act_hot_ua, act_hot_new, act_vic_ua, busy_ua;
  line_idx_t  busy_line;
  line_vec_t  hot_bits, cold_bits, hb_valid, cb_valid;
  logic       hv_all, cv_all;
  // demand side of the hot buffer
  logic       mh_hb_wr_valid;
  line_idx_t  mh_hb_wr_line, mh_hb_rd_line;
  line_data_t mh_hb_wr_data, mh_hb_rd_data;
  line_data_t cb_rd_b_unused;

  migration_controller #(.VICTIM_FRAMES(VICTIM_FRAMES)) u_mc (
    .clk, .rst_n,
    .free_valid(freed_valid), .free_pfn(freed_pfn),
    .hot_valid, .hot_upfn, .hot_ready,
    .ext_rd_upfn(ext_rd2_upfn), .ext_rd_data(ext_rd2_data),
    .own_rd_pfn, .own_rd_data,
    .ext_wr_valid, .ext_wr_upfn, .ext_wr_data, .own_wr_valid, .own_wr_pfn, .own_wr_data,
    .tcm_req_valid, .tcm_req, .tcm_req_ready, .tcm_ack,
    .fmq_valid, .fmq_req, .fmq_ready, .smq_valid, .smq_req, .smq_ready,
    .mig_rsp_valid, .mig_rsp_data,
    .buf_clear,
    .hb_wr_valid, .hb_wr_line, .hb_wr_data, .hb_rd_line, .hb_rd_data,
    .cb_wr_valid, .cb_wr_line, .cb_wr_data, .cb_rd_line, .cb_rd_data,
    .vec_clear, .hv_set_valid, .hv_set_line, .cv_set_valid, .cv_set_line,
    .act_valid, .act_hot_ua, .act_hot_new, .act_vic_valid, .act_vic_ua,
    .busy_valid, .busy_ua, .busy_line,
    .mig_done, .mig_done_pair
  );

  page_buffer u_hot_buf (
    .clk, .rst_n, .clear(buf_clear),
    .wr_a_valid(hb_wr_valid), .wr_a_line(hb_wr_line), .wr_a_data(hb_wr_data),
    .wr_b_valid(mh_hb_wr_valid), .wr_b_line(mh_hb_wr_line), .wr_b_data(mh_hb_wr_data),
    .rd_a_line(hb_rd_line), .rd_a_data(hb_rd_data),
    .rd_b_line(mh_hb_rd_line), .rd_b_data(mh_hb_rd_data),
    .line_valid(hb_valid)
  );

  page_buffer u_cold_buf (
    .clk, .rst_n, .clear(buf_clear),
    .wr_a_valid(cb_wr_valid), .wr_a_line(cb_wr_line), .wr_a_data(cb_wr_data),
    .wr_b_valid(1'b0), .wr_b_line('0), .wr_b_data('0),
    .rd_a_line(cb_rd_line), .rd_a_data(cb_rd_data),
    .rd_b_line('0), .rd_b_data(cb_rd_b_unused),
    .line_valid(cb_valid)
  );

  line_bitvec u_hot_vec (
    .clk, .rst_n, .set_valid(hv_set_valid), .set_line(hv_set_line), .clear(vec_clear),
    .bits(hot_bits), .all_set(hv_all)
  );
  line_bitvec u_cold_vec (
    .clk, .rst_n, .set_valid(cv_set_valid), .set_line(cv_set_line), .clear(vec_clear),
    .bits(cold_bits), .all_set(cv_all)
  );

  tcm #(.NCORES(NCORES)) u_tcm (
    .clk, .rst_n,
    .req_valid(tcm_req_valid), .req(tcm_req), .req_ready(tcm_req_ready), .ack(tcm_ack),
    .bc_valid, .bc, .tlb_ack(upd_ack)
  );
  assign ev_tcm_ack = tcm_ack;

  // ---------------- miss handler and hot-page detector ----------------
  logic     acc_valid;
  upfn_t    acc_upfn;
  logic     fdem_valid, fdem_ready, sdem_valid, sdem_ready;
  mem_req_t fdem_req, sdem_req;
  logic     frsp_valid, srsp_valid, srsp_ready;

  assign frsp_valid = fmem_rsp_valid && !fmem_rsp.tag.mig;
  assign srsp_valid = smem_rsp_valid && !smem_rsp.tag.mig;

  miss_handler #(.NCORES(NCORES), .WQ_DEPTH(WQ_DEPTH)) u_mh (
    .clk, .rst_n,
    .llc_req_valid, .llc_req, .llc_req_ready, .llc_rsp_valid, .llc_rsp,
    .ux_upfn, .ux_hit, .ux_entry,
    .fill_valid(m_fill_valid), .fill_core(m_fill_core), .fill_entry(m_fill_entry),
    .ext_rd_upfn(ext_rd1_upfn), .ext_rd_data(ext_rd1_data),
    .pt_rd_vpn(pt_rd1_vpn), .pt_rd_data(pt_rd1_data),
    .act_valid, .act_hot_ua, .act_hot_new, .act_vic_valid, .act_vic_ua,
    .busy_valid, .busy_ua, .busy_line,
    .hot_bits, .cold_bits, .hb_valid,
    .hb_rd_line(mh_hb_rd_line), .hb_rd_data(mh_hb_rd_data),
    .hb_wr_valid(mh_hb_wr_valid), .hb_wr_line(mh_hb_wr_line), .hb_wr_data(mh_hb_wr_data),
    .fdem_valid, .fdem_req, .fdem_ready, .sdem_valid, .sdem_req, .sdem_ready,
    .frsp_valid, .frsp(fmem_rsp), .srsp_valid, .srsp(smem_rsp), .srsp_ready,
    .acc_valid, .acc_upfn,
    .ev_buf, .ev_wait, .ev_redirect, .ev_fill
  );

  hot_page_detector #(.THRESHOLD(THRESHOLD), .ENTRIES(HPD_ENTRIES)) u_hpd (
    .clk, .rst_n, .acc_valid, .acc_upfn, .hot_valid, .hot_upfn, .hot_ready
  );

  // ---------------- memory controllers' migration queues ----------------
  migration_queue #(.DEPTH(MQ_DEPTH)) u_fmq (
    .clk, .rst_n,
    .dem_valid(fdem_valid), .dem_req(fdem_req), .dem_ready(fdem_ready),
    .mig_valid(fmq_valid), .mig_req(fmq_req), .mig_ready(fmq_ready),
    .mem_valid(fmem_req_valid), .mem_req(fmem_req), .mem_ready(fmem_req_ready)
  );
  migration_queue #(.DEPTH(MQ_DEPTH)) u_smq (
    .clk, .rst_n,
    .dem_valid(sdem_valid), .dem_req(sdem_req), .dem_ready(sdem_ready),
    .mig_valid(smq_valid), .mig_req(smq_req), .mig_ready(smq_ready),
    .mem_valid(smem_req_valid), .mem_req(smem_req), .mem_ready(smem_req_ready)
  );

  assign fmem_rsp_ready = 1'b1;
  assign smem_rsp_ready = smem_rsp.tag.mig || srsp_ready;
  assign mig_rsp_valid  = (fmem_rsp_valid && fmem_rsp.tag.mig) || (smem_rsp_valid && smem_rsp.tag.mig);
  assign mig_rsp_data   = (fmem_rsp_valid && fmem_rsp.tag.mig) ? fmem_rsp.rdata : smem_rsp.rdata;

endmodule
