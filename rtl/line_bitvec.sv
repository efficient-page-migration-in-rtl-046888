// line_bitvec: per-line migration status of one page (one row of the
// hot/cold page bit vector).
//
// Bit i is set when line i of the page has reached its new location; from
// then on requests for that line go to the new address plus the line
// offset. clear resets the whole vector when the migration completes;
// all_set reports that every line has moved. Set and clear take effect at
// the next clock edge; clear wins. Behaviour as the paper describes the
// bit vector; one bit per 64-byte line of a 4 KB page.
module line_bitvec
  import duon_pkg::*;
#(
  parameter int unsigned LINES = LINES_PER_PAGE
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             set_valid,
  input  line_idx_t        set_line,
  input  logic             clear,
  output logic [LINES-1:0] bits,
  output logic             all_set
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         bits <= '0;
    else if (clear)     bits <= '0;
    else if (set_valid) bits[set_line] <= 1'b1;
  end
  assign all_set = &bits;
endmodule
