// migration_controller: moves one hot page into fast memory, by swapping it
// with a victim page (paired migration) or by moving it into a free fast
// frame (one-way migration), while the system keeps running.
//
// Names: H is the hot unified page, now at slow frame S; F is the chosen
// fast frame; V is the page that occupies F (paired case only).
//
//   Step 1  take H from the hot-page detector; read its EPT entry and drop
//           the request if H is not installed, already migrating or already
//           in fast memory. A fast frame freed by an eviction (kept in a
//           small FIFO, checked against the occupant table) is used first,
//           for a one-way move. Otherwise fast frames are scanned
//           round-robin through the occupant table: a frame with no
//           occupant is used for a one-way move; a frame whose occupant V
//           really lives there (EPT check) is the victim. For a swap, V's EPT entry gets RA=S, Ongoing=1,
//           Pair=1, Buffer Residency=1 and the TCM broadcasts a START update
//           to all TLBs; the controller waits for its acknowledge.
//   Step 2  (swap) copy V's 64 lines from F into the hot buffer.
//   Step 3  copy H's lines from S to F, each staged in the cold buffer;
//           when a line's write to F is queued its bit in the hot-page bit
//           vector is set, so later requests for it go to F.
//   Step 4  (swap) write the hot buffer's lines to S, setting the bits of
//           the cold-page bit vector as they are queued.
//   Step 5  write the final EPT entries (both pages Migrated=1, Ongoing=0,
//           Pair, Buffer Residency=0, RA = new frame) and the occupant
//           table, broadcast DONE updates for V and H through the TCM, then
//           clear buffers and bit vectors.
// While a migration is active the act_* outputs name H (and V) and busy_*
// names the line being moved, so the miss handler can hold requests to it.
// One memory access is outstanding at a time; reads return on mig_rsp_*.
//
// The steps and the flag values follow the paper's step-by-step migration
// and its extended-page-table flag table; the RA is written at the start, as
// in the paper's TLB/page-table update flowchart. Using a free frame before
// picking a victim follows the paper; the free-frame FIFO, victim choice, the cold
// buffer's use as staging for the hot page and the line order are this
// design's own choices.
module migration_controller
  import duon_pkg::*;
#(
  parameter int unsigned VICTIM_FRAMES = FAST_PAGES,
  parameter int unsigned FREE_DEPTH    = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  // fast frames freed by evictions
  input  logic       free_valid,
  input  upfn_t      free_pfn,
  // hot page
  input  logic       hot_valid,
  input  upfn_t      hot_upfn,
  output logic       hot_ready,
  // EPT
  output upfn_t      ext_rd_upfn,
  input  ept_ext_t   ext_rd_data,
  output upfn_t      own_rd_pfn,
  input  owner_t     own_rd_data,
  output logic       ext_wr_valid,
  output upfn_t      ext_wr_upfn,
  output ept_ext_t   ext_wr_data,
  output logic       own_wr_valid,
  output upfn_t      own_wr_pfn,
  output owner_t     own_wr_data,
  // TLB coherence module
  output logic       tcm_req_valid,
  output tcm_upd_t   tcm_req,
  input  logic       tcm_req_ready,
  input  logic       tcm_ack,
  // migration queues of the fast and slow memory controllers
  output logic       fmq_valid,
  output mem_req_t   fmq_req,
  input  logic       fmq_ready,
  output logic       smq_valid,
  output mem_req_t   smq_req,
  input  logic       smq_ready,
  input  logic       mig_rsp_valid,
  input  line_data_t mig_rsp_data,
  // hot buffer (victim data) and cold buffer (hot-page staging)
  output logic       buf_clear,
  output logic       hb_wr_valid,
  output line_idx_t  hb_wr_line,
  output line_data_t hb_wr_data,
  output line_idx_t  hb_rd_line,
  input  line_data_t hb_rd_data,
  output logic       cb_wr_valid,
  output line_idx_t  cb_wr_line,
  output line_data_t cb_wr_data,
  output line_idx_t  cb_rd_line,
  input  line_data_t cb_rd_data,
  // hot/cold page bit vectors
  output logic       vec_clear,
  output logic       hv_set_valid,
  output line_idx_t  hv_set_line,
  output logic       cv_set_valid,
  output line_idx_t  cv_set_line,
  // status for the miss handler
  output logic       act_valid,
  output upfn_t      act_hot_ua,
  output upfn_t      act_hot_new,
  output logic       act_vic_valid,
  output upfn_t      act_vic_ua,
  output logic       busy_valid,
  output upfn_t      busy_ua,
  output line_idx_t  busy_line,
  // one pulse per finished migration
  output logic       mig_done,
  output logic       mig_done_pair
);
  typedef enum logic [4:0] {
    S_IDLE, S_RD_H, S_FSEL, S_VSEL, S_VCHK, S_START_EPT, S_START_TCM, S_START_ACK,
    S_S2_REQ, S_S2_WAIT, S_S3_REQ, S_S3_WAIT, S_S3_WR, S_S4_WR,
    S_E_V, S_E_H, S_O_F, S_O_S, S_T_V, S_T_V_ACK, S_T_H, S_T_H_ACK, S_FIN
  } state_e;

  localparam int unsigned VW = (VICTIM_FRAMES > 1) ? $clog2(VICTIM_FRAMES) : 1;

  state_e    state;
  upfn_t     h_ua, s_frame, f_frame, v_ua;
  ept_ext_t  h_ext, v_ext;
  logic      pair;
  line_idx_t k;
  logic [VW-1:0] vptr;
  logic [VW:0]   vscan;
  upfn_t     cand;

  wire last_line = (k == line_idx_t'(LINES_PER_PAGE - 1));

  // ---------------- free fast frames ----------------
  // FIFO of frames reported free by evictions; an entry is used only if the
  // occupant table still shows the frame empty. When full, further reports
  // are dropped: the round-robin scan still finds those frames.
  localparam int unsigned FW = (FREE_DEPTH > 1) ? $clog2(FREE_DEPTH) : 1;
  upfn_t       fq [FREE_DEPTH];
  logic [FW-1:0] fq_rd, fq_wr;
  logic [FW:0]   fq_cnt;
  logic          fq_push, fq_pop, fq_empty;
  assign fq_empty = (fq_cnt == '0);
  assign fq_push  = free_valid && (fq_cnt != (FW+1)'(FREE_DEPTH));
  assign fq_pop   = (state == S_FSEL) && !fq_empty;

  always_ff @(posedge clk) if (fq_push) fq[fq_wr] <= free_pfn;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fq_rd  <= '0;
      fq_wr  <= '0;
      fq_cnt <= '0;
    end else begin
      if (fq_push) fq_wr <= (fq_wr == FW'(FREE_DEPTH - 1)) ? '0 : fq_wr + 1'b1;
      if (fq_pop)  fq_rd <= (fq_rd == FW'(FREE_DEPTH - 1)) ? '0 : fq_rd + 1'b1;
      fq_cnt <= fq_cnt + (FW+1)'(fq_push) - (FW+1)'(fq_pop);
    end
  end

  // ---------------- combinational outputs ----------------
  always_comb begin
    hot_ready     = (state == S_IDLE);
    ext_rd_upfn   = (state == S_VCHK) ? cand : h_ua;
    own_rd_pfn    = (state == S_FSEL) ? fq[fq_rd] : upfn_t'(vptr);

    ext_wr_valid  = 1'b0;
    ext_wr_upfn   = v_ua;
    ext_wr_data   = v_ext;
    own_wr_valid  = 1'b0;
    own_wr_pfn    = f_frame;
    own_wr_data   = '{valid: 1'b1, ua: h_ua};
    case (state)
      S_START_EPT: begin
        ext_wr_valid        = 1'b1;
        ext_wr_data.ra      = s_frame;
        ext_wr_data.ongoing = 1'b1;
        ext_wr_data.pair    = 1'b1;
        ext_wr_data.brf     = 1'b1;
      end
      S_E_V: begin
        ext_wr_valid         = 1'b1;
        ext_wr_data.ra       = s_frame;
        ext_wr_data.migrated = 1'b1;
        ext_wr_data.ongoing  = 1'b0;
        ext_wr_data.pair     = 1'b1;
        ext_wr_data.brf      = 1'b0;
      end
      S_E_H: begin
        ext_wr_valid         = 1'b1;
        ext_wr_upfn          = h_ua;
        ext_wr_data          = h_ext;
        ext_wr_data.ra       = f_frame;
        ext_wr_data.migrated = 1'b1;
        ext_wr_data.ongoing  = 1'b0;
        ext_wr_data.pair     = pair;
        ext_wr_data.brf      = 1'b0;
      end
      S_O_F: own_wr_valid = 1'b1;
      S_O_S: begin
        own_wr_valid = 1'b1;
        own_wr_pfn   = s_frame;
        own_wr_data  = pair ? '{valid: 1'b1, ua: v_ua} : '{valid: 1'b0, ua: '0};
      end
      default: ;
    endcase

    tcm_req_valid = (state == S_START_TCM) || (state == S_T_V) || (state == S_T_H);
    tcm_req.phase = (state == S_START_TCM) ? TCM_START : TCM_DONE;
    tcm_req.ua    = (state == S_T_H) ? h_ua : v_ua;
    tcm_req.ra    = (state == S_T_H) ? f_frame : s_frame;

    fmq_valid = 1'b0;
    fmq_req   = '0;
    smq_valid = 1'b0;
    smq_req   = '0;
    fmq_req.tag.mig = 1'b1;
    smq_req.tag.mig = 1'b1;
    case (state)
      S_S2_REQ: begin                      // read victim line from F
        fmq_valid    = 1'b1;
        fmq_req.addr = {f_frame, k};
      end
      S_S3_REQ: begin                      // read hot-page line from S
        smq_valid    = 1'b1;
        smq_req.addr = {s_frame, k};
      end
      S_S3_WR: begin                       // write staged hot-page line to F
        fmq_valid     = 1'b1;
        fmq_req.we    = 1'b1;
        fmq_req.addr  = {f_frame, k};
        fmq_req.wdata = cb_rd_data;
      end
      S_S4_WR: begin                       // write victim line from hot buffer to S
        smq_valid     = 1'b1;
        smq_req.we    = 1'b1;
        smq_req.addr  = {s_frame, k};
        smq_req.wdata = hb_rd_data;
      end
      default: ;
    endcase

    hb_wr_valid  = (state == S_S2_WAIT) && mig_rsp_valid;
    hb_wr_line   = k;
    hb_wr_data   = mig_rsp_data;
    hb_rd_line   = k;
    cb_wr_valid  = (state == S_S3_WAIT) && mig_rsp_valid;
    cb_wr_line   = k;
    cb_wr_data   = mig_rsp_data;
    cb_rd_line   = k;
    buf_clear    = (state == S_FIN);
    vec_clear    = (state == S_FIN);
    hv_set_valid = (state == S_S3_WR) && fmq_ready;
    hv_set_line  = k;
    cv_set_valid = (state == S_S4_WR) && smq_ready;
    cv_set_line  = k;

    act_valid     = !(state inside {S_IDLE, S_RD_H, S_FSEL, S_VSEL, S_VCHK});
    act_hot_ua    = h_ua;
    act_hot_new   = f_frame;
    act_vic_valid = act_valid && pair;
    act_vic_ua    = v_ua;
    busy_valid    = (state inside {S_S3_REQ, S_S3_WAIT, S_S3_WR, S_S4_WR});
    busy_ua       = (state == S_S4_WR) ? v_ua : h_ua;
    busy_line     = k;
  end

  // ---------------- state machine ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      h_ua          <= '0;
      h_ext         <= '0;
      s_frame       <= '0;
      f_frame       <= '0;
      v_ua          <= '0;
      v_ext         <= '0;
      pair          <= 1'b0;
      k             <= '0;
      vptr          <= '0;
      vscan         <= '0;
      cand          <= '0;
      mig_done      <= 1'b0;
      mig_done_pair <= 1'b0;
    end else begin
      mig_done <= 1'b0;
      case (state)
        S_IDLE: if (hot_valid) begin
          h_ua  <= hot_upfn;
          state <= S_RD_H;
        end
        S_RD_H: begin
          h_ext   <= ext_rd_data;
          s_frame <= page_loc(h_ua, ext_rd_data.migrated, ext_rd_data.ra);
          vscan   <= '0;
          if (!ext_rd_data.installed || ext_rd_data.ongoing ||
              is_fast(page_loc(h_ua, ext_rd_data.migrated, ext_rd_data.ra)))
            state <= S_IDLE;
          else
            state <= S_FSEL;
        end
        S_FSEL: begin                   // a frame freed by an eviction, if any
          if (fq_empty) begin
            state <= S_VSEL;
          end else if (!own_rd_data.valid) begin
            f_frame <= fq[fq_rd];
            pair    <= 1'b0;
            k       <= '0;
            state   <= S_S3_REQ;        // one-way move
          end
        end
        S_VSEL: begin
          f_frame <= upfn_t'(vptr);
          cand    <= own_rd_data.ua;
          vptr    <= (vptr == VW'(VICTIM_FRAMES - 1)) ? '0 : vptr + 1'b1;
          vscan   <= vscan + 1'b1;
          if (!own_rd_data.valid) begin
            pair  <= 1'b0;
            k     <= '0;
            state <= S_S3_REQ;          // free frame: one-way move
          end else begin
            state <= S_VCHK;
          end
        end
        S_VCHK: begin
          if (ext_rd_data.installed && !ext_rd_data.ongoing && cand != h_ua &&
              page_loc(cand, ext_rd_data.migrated, ext_rd_data.ra) == f_frame) begin
            v_ua  <= cand;
            v_ext <= ext_rd_data;
            pair  <= 1'b1;
            state <= S_START_EPT;
          end else if (vscan == (VW+1)'(VICTIM_FRAMES)) begin
            state <= S_IDLE;            // no victim found: give up
          end else begin
            state <= S_VSEL;
          end
        end
        S_START_EPT: state <= S_START_TCM;
        S_START_TCM: if (tcm_req_ready) state <= S_START_ACK;
        S_START_ACK: if (tcm_ack) begin
          k     <= '0;
          state <= S_S2_REQ;
        end
        S_S2_REQ:  if (fmq_ready) state <= S_S2_WAIT;
        S_S2_WAIT: if (mig_rsp_valid) begin
          k     <= k + 1'b1;
          state <= last_line ? S_S3_REQ : S_S2_REQ;
        end
        S_S3_REQ:  if (smq_ready) state <= S_S3_WAIT;
        S_S3_WAIT: if (mig_rsp_valid) state <= S_S3_WR;
        S_S3_WR:   if (fmq_ready) begin
          k     <= k + 1'b1;
          state <= !last_line ? S_S3_REQ : (pair ? S_S4_WR : S_E_H);
        end
        S_S4_WR:   if (smq_ready) begin
          k     <= k + 1'b1;
          if (last_line) state <= S_E_V;
        end
        S_E_V:     state <= S_E_H;
        S_E_H:     state <= S_O_F;
        S_O_F:     state <= S_O_S;
        S_O_S:     state <= pair ? S_T_V : S_T_H;
        S_T_V:     if (tcm_req_ready) state <= S_T_V_ACK;
        S_T_V_ACK: if (tcm_ack) state <= S_T_H;
        S_T_H:     if (tcm_req_ready) state <= S_T_H_ACK;
        S_T_H_ACK: if (tcm_ack) state <= S_FIN;
        default: begin                  // S_FIN
          mig_done      <= 1'b1;
          mig_done_pair <= pair;
          state         <= S_IDLE;
        end
      endcase
    end
  end

  a_one_queue: assert property (@(posedge clk) disable iff (!rst_n) !(fmq_valid && smq_valid));
endmodule
