// tb_line_bitvec: self-checking test of the per-line bit vector: random
// sets against a reference, all_set after every line is set, clear.
module tb_line_bitvec;
  import duon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic set_valid = 0, clear = 0, all_set;
  line_idx_t set_line;
  logic [63:0] bits, ref_bits = '0;

  line_bitvec dut (.*);

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    #50000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    set_line = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    #1 chk(bits == '0 && !all_set, "clear after reset");
    for (int n = 0; n < 100; n++) begin
      set_valid = 1; set_line = line_idx_t'($urandom);
      @(posedge clk); ref_bits[set_line] = 1; #1 set_valid = 0;
      chk(bits == ref_bits, "bits follow sets");
      chk(all_set == (&ref_bits), "all_set");
    end
    for (int l = 0; l < 64; l++) begin
      set_valid = 1; set_line = line_idx_t'(l); @(posedge clk); #1;
    end
    set_valid = 0;
    chk(all_set && bits == '1, "all lines set");
    clear = 1; set_valid = 1; @(posedge clk); #1 clear = 0; set_valid = 0;
    chk(bits == '0 && !all_set, "clear wins and resets");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
