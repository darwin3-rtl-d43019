// tb_async_link: streams random words through the channel stage with random
// back-pressure and checks order, completeness, the two-cycle latency of an
// idle channel and full throughput when the receiver is always ready.
module tb_async_link;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [39:0] in_data, out_data;
  async_link #(.W(40)) dut (.*);
  int checks = 0, failures = 0;
  logic [39:0] q [$];
  int got = 0;
  logic rand_ready = 1;
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) q.push_back(in_data);
    if (out_valid && out_ready) begin
      logic [39:0] e;
      e = q.pop_front();
      checks++; got++;
      if (e != out_data) begin failures++; $display("FAIL data %h expected %h", out_data, e); end
    end
  end
  always_ff @(posedge clk) out_ready <= rand_ready ? ($urandom_range(0, 2) != 0) : 1'b1;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int t0, c;
    in_valid = 0; in_data = 0; rand_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (3) @(posedge clk);
    // latency of an idle channel
    in_valid <= 1; in_data <= 40'h1234;
    @(posedge clk); in_valid <= 0; #1;
    c = 0;
    while (!out_valid) begin @(posedge clk); #1; c++; end
    // the word is taken at the first edge and presented after the second
    checks++; if (c != 1) begin failures++; $display("FAIL latency %0d", c + 1); end
    @(posedge clk);
    // throughput: 50 words in about 50 cycles
    repeat (3) @(posedge clk);
    t0 = got;
    for (int i = 0; i < 50; i++) begin
      in_valid <= 1; in_data <= {$urandom, 8'(i)};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    checks++; if (got - t0 != 50) begin failures++; $display("FAIL throughput %0d", got - t0); end
    // random back-pressure
    rand_ready = 1;
    for (int i = 0; i < 300; i++) begin
      in_valid <= ($urandom_range(0, 1) == 1); in_data <= {$urandom, 8'(i)};
      @(posedge clk);
      while (in_valid && !in_ready) @(posedge clk);
    end
    in_valid <= 0;
    repeat (50) @(posedge clk);
    checks++; if (q.size() != 0) begin failures++; $display("FAIL %0d words lost", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
