// miss_handler: decides where each LLC miss or write-back is served.
//
// Caches keep working with unified addresses (UA); only a request that
// leaves the shared cache needs the page's real location. For each request
// the handler:
//   1. looks the UA up in the requesting core's extended TLB; on a TLB
//      miss it reads the page's EPT entry instead and fills that TLB
//      (the fill needs the page-table entry of the recorded VPN to still
//      point to this UA);
//   2. checks the Ongoing Migration flag, then the Migrated flag:
//        ongoing  -> line already at its new place (cold-page bit set): go
//                    to RA + line; line in the hot buffer: read or write
//                    the buffer; otherwise hold the request in the wait
//                    queue;
//        migrated -> memory at RA + line;   neither -> memory at UA + line;
//   3. for the page that the migration controller is bringing into fast
//      memory (its flags stay clear until the end), a line whose bit is set
//      in the hot-page bit vector goes to the new fast frame; the line being
//      copied waits.
// Demand accesses go to the fast or slow memory's request port; accesses to
// slow memory are reported to the hot-page detector. The wait queue's head
// is retried on alternate cycles while new requests arrive; a new request
// for a migrating page is queued behind older waiting ones to keep order.
// Read data returns on llc_rsp_* (fast memory first, then slow memory, then
// buffer reads); the LLC is assumed to always accept a response.
//
// The decision tree is the paper's LLC-miss lookup flowchart together with
// its bit-vector rule; the wait-queue retry scheme, the response merge and
// all timing are this design's choices.
module miss_handler
  import duon_pkg::*;
#(
  parameter int unsigned NCORES   = 16,
  parameter int unsigned WQ_DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  // LLC side
  input  logic       llc_req_valid,
  input  llc_req_t   llc_req,
  output logic       llc_req_ready,
  output logic       llc_rsp_valid,
  output llc_rsp_t   llc_rsp,
  // extended TLBs (UA lookup and fill)
  output upfn_t      ux_upfn,
  input  logic       ux_hit   [NCORES],
  input  tlb_entry_t ux_entry [NCORES],
  output logic       fill_valid,
  output core_id_t   fill_core,
  output tlb_entry_t fill_entry,
  // EPT
  output upfn_t      ext_rd_upfn,
  input  ept_ext_t   ext_rd_data,
  output vpn_t       pt_rd_vpn,
  input  pte_t       pt_rd_data,
  // migration controller status, bit vectors, hot buffer
  input  logic       act_valid,
  input  upfn_t      act_hot_ua,
  input  upfn_t      act_hot_new,
  input  logic       act_vic_valid,
  input  upfn_t      act_vic_ua,
  input  logic       busy_valid,
  input  upfn_t      busy_ua,
  input  line_idx_t  busy_line,
  input  line_vec_t  hot_bits,
  input  line_vec_t  cold_bits,
  input  line_vec_t  hb_valid,
  output line_idx_t  hb_rd_line,
  input  line_data_t hb_rd_data,
  output logic       hb_wr_valid,
  output line_idx_t  hb_wr_line,
  output line_data_t hb_wr_data,
  // demand requests to the memories
  output logic       fdem_valid,
  output mem_req_t   fdem_req,
  input  logic       fdem_ready,
  output logic       sdem_valid,
  output mem_req_t   sdem_req,
  input  logic       sdem_ready,
  // demand read data from the memories
  input  logic       frsp_valid,
  input  mem_rsp_t   frsp,
  input  logic       srsp_valid,
  input  mem_rsp_t   srsp,
  output logic       srsp_ready,
  // hot-page detector
  output logic       acc_valid,
  output upfn_t      acc_upfn,
  // event pulses
  output logic       ev_buf,
  output logic       ev_wait,
  output logic       ev_redirect,
  output logic       ev_fill
);
  typedef enum logic [1:0] {R_MEM, R_BUF, R_WAIT} route_e;

  // wait queue
  logic     wq_push, wq_full, wq_pop, wq_hv;
  llc_req_t wq_head;
  wait_queue #(.DEPTH(WQ_DEPTH)) u_wq (
    .clk, .rst_n,
    .push(wq_push), .push_data(llc_req), .full(wq_full),
    .pop(wq_pop), .head_valid(wq_hv), .head(wq_head)
  );

  logic       phase;
  logic       use_wq, cur_valid;
  llc_req_t   cur;
  logic       t_hit;
  tlb_entry_t t_ent;
  logic       f_mig, f_ong;
  upfn_t      f_ra, loc, target;
  logic       is_h, is_v, busy_hit, redirect;
  route_e     route;
  logic       fire, mem_ready, buf_ok;
  logic       bufrsp_valid;
  llc_rsp_t   bufrsp;
  logic       bufrsp_drain;

  always_comb begin
    use_wq    = wq_hv && (phase || !llc_req_valid);
    cur       = use_wq ? wq_head : llc_req;
    cur_valid = use_wq || llc_req_valid;

    ux_upfn     = cur.upfn;
    t_hit       = ux_hit[cur.core];
    t_ent       = ux_entry[cur.core];
    ext_rd_upfn = cur.upfn;
    pt_rd_vpn   = ext_rd_data.vpn;

    f_mig = t_hit ? t_ent.migrated : ext_rd_data.migrated;
    f_ong = t_hit ? t_ent.ongoing  : ext_rd_data.ongoing;
    f_ra  = t_hit ? t_ent.ra       : ext_rd_data.ra;
    loc   = page_loc(cur.upfn, f_mig, f_ra);

    is_h     = act_valid && cur.upfn == act_hot_ua;
    is_v     = act_vic_valid && cur.upfn == act_vic_ua;
    busy_hit = busy_valid && busy_ua == cur.upfn && busy_line == cur.line;

    route    = R_MEM;
    target   = loc;
    redirect = 1'b0;
    if (is_h) begin
      if (hot_bits[cur.line]) begin
        target   = act_hot_new;
        redirect = 1'b1;
      end else if (busy_hit) route = R_WAIT;
    end else if (f_ong) begin
      if (is_v && cold_bits[cur.line]) begin
        target   = f_ra;
        redirect = 1'b1;
      end else if (is_v && hb_valid[cur.line] && !busy_hit) route = R_BUF;
      else route = R_WAIT;
    end
    if (!use_wq && wq_hv && (is_h || is_v)) route = R_WAIT;

    fdem_valid = cur_valid && route == R_MEM && is_fast(target);
    sdem_valid = cur_valid && route == R_MEM && !is_fast(target);
    fdem_req   = '{we: cur.we, addr: {target, cur.line}, wdata: cur.wdata,
                   tag: '{mig: 1'b0, core: cur.core, upfn: cur.upfn, line: cur.line}};
    sdem_req   = fdem_req;
    mem_ready  = is_fast(target) ? fdem_ready : sdem_ready;

    // response merge: fast memory, then slow memory, then buffer reads
    srsp_ready   = !frsp_valid;
    bufrsp_drain = bufrsp_valid && !frsp_valid && !srsp_valid;
    buf_ok       = cur.we || !bufrsp_valid || bufrsp_drain;

    case (route)
      R_MEM:   fire = cur_valid && mem_ready;
      R_BUF:   fire = cur_valid && buf_ok;
      default: fire = cur_valid && !use_wq && !wq_full;
    endcase
    // a waiting head that still has to wait stays where it is
    if (use_wq && route == R_WAIT) fire = 1'b0;

    llc_req_ready = fire && !use_wq;
    wq_pop        = fire && use_wq;
    wq_push       = fire && !use_wq && route == R_WAIT;

    hb_rd_line  = cur.line;
    hb_wr_valid = fire && route == R_BUF && cur.we;
    hb_wr_line  = cur.line;
    hb_wr_data  = cur.wdata;

    fill_valid = cur_valid && !t_hit && ext_rd_data.installed && pt_rd_data.valid &&
                 pt_rd_data.upfn == cur.upfn;
    fill_core  = cur.core;
    fill_entry = '{valid: 1'b1, dirty: pt_rd_data.dirty, vpn: ext_rd_data.vpn, ua: cur.upfn,
                   ra: ext_rd_data.ra, migrated: ext_rd_data.migrated, ongoing: ext_rd_data.ongoing};

    acc_valid = fire && !use_wq && route == R_MEM && !is_fast(target) && !is_h && !is_v;
    acc_upfn  = cur.upfn;

    ev_buf      = fire && route == R_BUF;
    ev_wait     = wq_push;
    ev_redirect = fire && route == R_MEM && redirect;
    ev_fill     = fill_valid;

    llc_rsp_valid = frsp_valid || srsp_valid || bufrsp_valid;
    if (frsp_valid)
      llc_rsp = '{core: frsp.tag.core, upfn: frsp.tag.upfn, line: frsp.tag.line, rdata: frsp.rdata};
    else if (srsp_valid)
      llc_rsp = '{core: srsp.tag.core, upfn: srsp.tag.upfn, line: srsp.tag.line, rdata: srsp.rdata};
    else
      llc_rsp = bufrsp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase        <= 1'b0;
      bufrsp_valid <= 1'b0;
      bufrsp       <= '0;
    end else begin
      phase <= wq_hv ? !phase : 1'b0;
      if (bufrsp_drain) bufrsp_valid <= 1'b0;
      if (fire && route == R_BUF && !cur.we) begin
        bufrsp_valid <= 1'b1;
        bufrsp       <= '{core: cur.core, upfn: cur.upfn, line: cur.line, rdata: hb_rd_data};
      end
    end
  end
endmodule
