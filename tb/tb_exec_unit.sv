// tb_exec_unit: self-checking test of the model execution datapath.
//
// Random sums of two to four terms (multiplied or bypassed) are issued one
// per cycle and compared with a fixed-point reference computed here; the
// result must appear exactly n+1 cycles after the first of n terms, so a
// three-term LIF update takes four cycles and a multiply-add three. A
// multiplier-feedback chain (a*b*c) and a flag mask are also checked.
module tb_exec_unit;
  import d3_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic term_valid, term_mul, term_fb, term_mask, term_acc, term_first, term_last;
  data_t term_a, term_b, result;
  logic res_valid;
  int checks = 0, failures = 0;

  exec_unit dut (.*);

  function automatic data_t ref_mul(data_t a, data_t b);
    logic signed [31:0] p;
    p = 32'(a) * 32'(b);
    return data_t'(p >>> 8);
  endfunction

  task automatic issue(data_t a, data_t b, logic mul, logic fb, logic mask, logic acc, logic first, logic last);
    term_valid <= 1; term_a <= a; term_b <= b; term_mul <= mul; term_fb <= fb;
    term_mask <= mask; term_acc <= acc; term_first <= first; term_last <= last;
    @(posedge clk);
    term_valid <= 0;
  endtask

  task automatic wait_result(int expect_cycles, data_t expv, string what);
    int c;
    c = 0;
    while (!res_valid) begin @(posedge clk); c++; if (c > 20) break; end
    checks++;
    if (result !== expv) begin failures++; $display("FAIL %s value %0d expected %0d", what, result, expv); end
    checks++;
    if (c != expect_cycles) begin failures++; $display("FAIL %s latency %0d expected %0d", what, c, expect_cycles); end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    term_valid = 0; term_a = 0; term_b = 0; term_mul = 0; term_fb = 0; term_mask = 1;
    term_acc = 0; term_first = 0; term_last = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // LIF: v = p0*v + p1*I + c0, three terms -> 4 cycles from first issue
    for (int t = 0; t < 50; t++) begin
      data_t v, i, p0, p1, c0, e;
      v = data_t'($urandom_range(0, 4000)) - 2000; i = data_t'($urandom_range(0, 2000)) - 1000;
      p0 = data_t'($urandom_range(0, 256)); p1 = data_t'($urandom_range(0, 512)) - 256;
      c0 = data_t'($urandom_range(0, 200)) - 100;
      e = ref_mul(v, p0) + ref_mul(i, p1) + c0;
      fork
        begin
          issue(v, p0, 1, 0, 1, 1, 1, 0);
          issue(i, p1, 1, 0, 1, 1, 0, 0);
          issue(c0, 0, 0, 0, 1, 1, 0, 1);
        end
        begin @(posedge clk); wait_result(4, e, "LIF"); end
      join
      @(posedge clk);
    end
    // multiply-add: one product plus a constant, 3 cycles
    begin
      data_t a, b, c, e;
      a = 16'sd1000; b = 16'sd128; c = 16'sd7;
      e = ref_mul(a, b) + c;
      fork
        begin issue(a, b, 1, 0, 1, 1, 1, 0); issue(c, 0, 0, 0, 1, 1, 0, 1); end
        begin @(posedge clk); wait_result(3, e, "CUBA"); end
      join
    end
    @(posedge clk);
    // chain: w + lp * x * y with mask on
    for (int t = 0; t < 20; t++) begin
      data_t w, lp, x, y, e;
      logic m;
      w = data_t'($urandom_range(0, 2000)); lp = data_t'($urandom_range(0, 512)) - 256;
      x = data_t'($urandom_range(0, 512)); y = data_t'($urandom_range(0, 512));
      m = 1'($urandom_range(0, 1));
      e = w + (m ? ref_mul(ref_mul(lp, x), y) : data_t'(0));
      fork
        begin
          issue(w, 0, 0, 0, 1, 1, 1, 0);
          issue(lp, x, 1, 0, 1, 0, 0, 0);
          issue(0, y, 1, 1, m, 1, 0, 1);
        end
        begin @(posedge clk); wait_result(4, e, "UPTWT chain"); end
      join
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
