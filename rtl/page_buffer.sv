// page_buffer: on-chip buffer for one page under migration (hot or cold
// buffer), 64 lines of 64 bytes = 4 KB.
//
// Each line has a valid bit, set when the line is written and cleared for
// all lines by clear. Port A is written by the migration controller, port B
// by demand write-backs that hit the buffer; on the same line in the same
// cycle port B wins, so a newer write from the cache is not lost. Two
// combinational read ports (A for the controller, B for demand reads).
//
// The size (4 KB each) is the paper's; the port structure is this design's.
module page_buffer
  import duon_pkg::*;
#(
  parameter int unsigned LINES = LINES_PER_PAGE
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             wr_a_valid,
  input  line_idx_t        wr_a_line,
  input  line_data_t       wr_a_data,
  input  logic             wr_b_valid,
  input  line_idx_t        wr_b_line,
  input  line_data_t       wr_b_data,
  input  line_idx_t        rd_a_line,
  output line_data_t       rd_a_data,
  input  line_idx_t        rd_b_line,
  output line_data_t       rd_b_data,
  output logic [LINES-1:0] line_valid
);
  line_data_t mem [LINES];

  assign rd_a_data = mem[rd_a_line];
  assign rd_b_data = mem[rd_b_line];

  always_ff @(posedge clk) begin
    if (wr_a_valid) mem[wr_a_line] <= wr_a_data;
    if (wr_b_valid) mem[wr_b_line] <= wr_b_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) line_valid <= '0;
    else if (clear) line_valid <= '0;
    else begin
      if (wr_a_valid) line_valid[wr_a_line] <= 1'b1;
      if (wr_b_valid) line_valid[wr_b_line] <= 1'b1;
    end
  end

endmodule
