// duon_pkg: types and constants shared by the Duon page-migration RTL.
//
// Duon keeps two physical addresses per virtual page: the unified address
// (UA) that the OS assigned and that TLBs and caches keep using, and the
// remapped address (RA) where the data really lives after a migration.
// Page numbers are "unified frame numbers" (UPFN): frames 0 .. FAST_PAGES-1
// are the fast memory (HBM), the frames above them the slow memory
// (PCM or DDR4). A line address is {frame, line index}.
//
// Sizes follow the evaluated system: 4 KB pages, 64 B lines, 1 GB fast and
// 16 GB slow memory (262144 + 4194304 pages). The 23-bit virtual page
// number and the core-id width are this design's own choices.
package duon_pkg;

  localparam int unsigned PAGE_BYTES     = 4096;
  localparam int unsigned LINE_BYTES     = 64;
  localparam int unsigned LINES_PER_PAGE = PAGE_BYTES / LINE_BYTES;   // 64
  localparam int unsigned LINE_IDX_W     = $clog2(LINES_PER_PAGE);    // 6
  localparam int unsigned LINE_DATA_W    = 8 * LINE_BYTES;            // 512

  localparam int unsigned FAST_PAGES     = 262144;                    // 1 GB / 4 KB
  localparam int unsigned SLOW_PAGES     = 4194304;                   // 16 GB / 4 KB
  localparam int unsigned UPFN_W         = $clog2(FAST_PAGES + SLOW_PAGES); // 23
  localparam int unsigned VPN_W          = 23;
  localparam int unsigned LADDR_W        = UPFN_W + LINE_IDX_W;       // 29
  localparam int unsigned CORE_W         = 4;                         // up to 16 cores

  typedef logic [UPFN_W-1:0]      upfn_t;
  typedef logic [VPN_W-1:0]       vpn_t;
  typedef logic [LINE_IDX_W-1:0]  line_idx_t;
  typedef logic [LINE_DATA_W-1:0] line_data_t;
  typedef logic [CORE_W-1:0]      core_id_t;
  typedef logic [LINES_PER_PAGE-1:0] line_vec_t;

  // Conventional page-table entry (VPN -> UA).
  typedef struct packed {
    logic  valid;
    logic  dirty;
    upfn_t upfn;
  } pte_t;

  // Duon extension, one per unified page (the yellow columns of the EPT).
  typedef struct packed {
    logic  installed;   // entry written by the OS
    vpn_t  vpn;         // virtual page mapped to this UA
    upfn_t ra;          // remapped physical frame
    logic  migrated;    // 0: data at UA, 1: data at RA
    logic  ongoing;     // page under migration
    logic  pair;        // 1: swap, 0: one-way move
    logic  brf;         // buffer residency: 1 hot buffer, 0 cold buffer
  } ept_ext_t;

  // Which unified page currently occupies a physical frame.
  typedef struct packed {
    logic  valid;
    upfn_t ua;
  } owner_t;

  // Extended TLB entry.
  typedef struct packed {
    logic  valid;
    logic  dirty;
    vpn_t  vpn;
    upfn_t ua;
    upfn_t ra;
    logic  migrated;
    logic  ongoing;
  } tlb_entry_t;

  typedef enum logic {TCM_START = 1'b0, TCM_DONE = 1'b1} tcm_phase_e;

  // Update that the TLB coherence module broadcasts to every TLB.
  typedef struct packed {
    tcm_phase_e phase;
    upfn_t      ua;
    upfn_t      ra;
  } tcm_upd_t;

  // LLC miss (read) or write-back, addressed by UA.
  typedef struct packed {
    core_id_t   core;
    logic       we;
    upfn_t      upfn;
    line_idx_t  line;
    line_data_t wdata;
  } llc_req_t;

  typedef struct packed {
    core_id_t   core;
    upfn_t      upfn;
    line_idx_t  line;
    line_data_t rdata;
  } llc_rsp_t;

  // Tag carried through a memory access and returned with read data.
  typedef struct packed {
    logic      mig;     // 1: issued by the migration controller
    core_id_t  core;
    upfn_t     upfn;    // UA of a demand access
    line_idx_t line;
  } mem_tag_t;

  // Request to a memory; addr is the physical line {frame, line}.
  typedef struct packed {
    logic               we;
    logic [LADDR_W-1:0] addr;
    line_data_t         wdata;
    mem_tag_t           tag;
  } mem_req_t;

  typedef struct packed {
    line_data_t rdata;
    mem_tag_t   tag;
  } mem_rsp_t;

  function automatic logic is_fast(upfn_t f);
    return f < upfn_t'(FAST_PAGES);
  endfunction

  // Where a page's data is, from its flags (Migrated Flag selects RA or UA).
  function automatic upfn_t page_loc(upfn_t ua, logic migrated, upfn_t ra);
    return migrated ? ra : ua;
  endfunction

endpackage
