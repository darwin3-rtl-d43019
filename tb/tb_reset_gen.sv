// tb_reset_gen: checks that reset asserts at once when the pad reset falls
// and is released exactly STAGES (2) clock edges after the pad reset rises.
module tb_reset_gen;
  logic clk = 0, rst_pad_n = 0, rst_n;
  always #5 clk = ~clk;
  reset_gen dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3) @(posedge clk);
    checks++; if (rst_n) begin failures++; $display("FAIL released during reset"); end
    #2 rst_pad_n = 1;
    @(posedge clk); #1;
    checks++; if (rst_n) begin failures++; $display("FAIL released after 1 edge"); end
    @(posedge clk); #1;
    checks++; if (!rst_n) begin failures++; $display("FAIL not released after 2 edges"); end
    #3 rst_pad_n = 0; #1;
    checks++; if (rst_n) begin failures++; $display("FAIL not asserted asynchronously"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
