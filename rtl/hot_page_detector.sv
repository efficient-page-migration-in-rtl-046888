// hot_page_detector: threshold-based hot-page detection.
//
// Every demand access that the miss handler sends to slow memory is
// reported here by its unified page number. A direct-mapped table of
// ENTRIES counters, tagged with the page number, counts the accesses per
// page; a tag conflict restarts the count for the new page. When a page's
// count reaches THRESHOLD the page is reported hot (hot_valid/hot_upfn) and
// its counter is freed, so the page is migrated as soon as it becomes hot.
// If the previous hot page has not been taken yet (hot_ready low), the
// counter stays one below the threshold and the next access retries.
// Timing: hot_valid rises the cycle after the access that reached THRESHOLD.
//
// The threshold policy and its value 64 are the paper's main configuration;
// the counter table's organisation and size are this design's choices.
module hot_page_detector
  import duon_pkg::*;
#(
  parameter int unsigned THRESHOLD = 64,
  parameter int unsigned ENTRIES   = 1024
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  acc_valid,
  input  upfn_t acc_upfn,
  output logic  hot_valid,
  output upfn_t hot_upfn,
  input  logic  hot_ready
);
  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam int unsigned CW = $clog2(THRESHOLD + 1);

  logic [ENTRIES-1:0] vld;
  upfn_t              tag [ENTRIES];
  logic [CW-1:0]      cnt [ENTRIES];

  logic [IW-1:0] idx;
  logic          hit;
  logic [CW-1:0] next_cnt;
  logic          reach;

  assign idx      = IW'(acc_upfn);
  assign hit      = vld[idx] && tag[idx] == acc_upfn;
  assign next_cnt = hit ? cnt[idx] + 1'b1 : CW'(1);
  assign reach    = acc_valid && next_cnt == CW'(THRESHOLD);

  always_ff @(posedge clk) begin
    if (acc_valid) begin
      tag[idx] <= acc_upfn;
      if (reach && hot_valid && !hot_ready) cnt[idx] <= CW'(THRESHOLD - 1);
      else                                  cnt[idx] <= next_cnt;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld       <= '0;
      hot_valid <= 1'b0;
      hot_upfn  <= '0;
    end else begin
      if (hot_valid && hot_ready) hot_valid <= 1'b0;
      if (acc_valid) begin
        vld[idx] <= 1'b1;
        if (reach && !(hot_valid && !hot_ready)) begin
          vld[idx]  <= 1'b0;
          hot_valid <= 1'b1;
          hot_upfn  <= acc_upfn;
        end
      end
    end
  end
endmodule
