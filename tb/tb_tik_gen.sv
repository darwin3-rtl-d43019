// tb_tik_gen: checks that the tick generator toggles gstep and pulses tick
// exactly every `period` cycles, and stops when disabled.
module tb_tik_gen;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enable, gstep, tick;
  logic [31:0] period;
  tik_gen dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int last, n;
    logic g;
    enable = 0; period = 32'd7;
    repeat (3) @(posedge clk); rst_n = 1;
    @(posedge clk); enable = 1;
    last = -1; n = 0;
    for (int c = 0; c < 100; c++) begin
      @(posedge clk);
      if (tick) begin
        if (last >= 0) begin
          checks++;
          if (c - last != 7) begin failures++; $display("FAIL period %0d", c - last); end
        end
        last = c; n++;
      end
    end
    checks++; if (n < 13 || n > 15) begin failures++; $display("FAIL tick count %0d", n); end
    period = 32'd3; last = -1;
    for (int c = 0; c < 30; c++) begin
      @(posedge clk);
      if (tick) begin
        if (last >= 0) begin checks++; if (c - last != 3) begin failures++; $display("FAIL period3 %0d", c - last); end end
        last = c;
      end
    end
    enable = 0; @(posedge clk); g = gstep;
    repeat (20) @(posedge clk);
    checks++; if (gstep != g || tick) begin failures++; $display("FAIL ticks while disabled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
