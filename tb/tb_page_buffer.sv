// tb_page_buffer: self-checking test of the 4 KB page buffer. Random writes
// on both ports against a reference array, per-line valid bits, port B
// winning a same-line conflict, and clear.
module tb_page_buffer;
  import duon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, wr_a_valid = 0, wr_b_valid = 0;
  line_idx_t wr_a_line, wr_b_line, rd_a_line, rd_b_line;
  line_data_t wr_a_data, wr_b_data, rd_a_data, rd_b_data;
  logic [63:0] line_valid;

  page_buffer dut (.*);

  line_data_t ref_mem [64];
  logic [63:0] ref_v = '0;

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic line_data_t rnd();
    line_data_t d;
    for (int i = 0; i < 16; i++) d[32*i +: 32] = $urandom;
    return d;
  endfunction

  initial begin
    #50000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_a_line = 0; wr_b_line = 0; rd_a_line = 0; rd_b_line = 0; wr_a_data = '0; wr_b_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    #1 chk(line_valid == '0, "empty after reset");
    for (int n = 0; n < 300; n++) begin
      wr_a_valid = ($urandom % 2); wr_a_line = line_idx_t'($urandom); wr_a_data = rnd();
      wr_b_valid = ($urandom % 3 == 0); wr_b_line = (n % 7 == 0) ? wr_a_line : line_idx_t'($urandom);
      wr_b_data = rnd();
      @(posedge clk);
      if (wr_a_valid) begin ref_mem[wr_a_line] = wr_a_data; ref_v[wr_a_line] = 1; end
      if (wr_b_valid) begin ref_mem[wr_b_line] = wr_b_data; ref_v[wr_b_line] = 1; end
      #1 wr_a_valid = 0; wr_b_valid = 0;
      chk(line_valid == ref_v, "valid bits");
      rd_a_line = line_idx_t'($urandom); rd_b_line = line_idx_t'($urandom); #1;
      if (ref_v[rd_a_line]) chk(rd_a_data == ref_mem[rd_a_line], "read port A data");
      if (ref_v[rd_b_line]) chk(rd_b_data == ref_mem[rd_b_line], "read port B data");
    end
    clear = 1; @(posedge clk); #1 clear = 0;
    chk(line_valid == '0, "clear drops all lines");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
