// tb_router: self-checking test of the five-port XY mesh router.
//
// All five inputs inject random packets with random offsets while every
// output applies random back-pressure. Each packet is tagged with its input
// and sequence number in the axon-ID field. The monitor checks that every
// packet leaves on the port the XY rule selects, with the offset moved one
// step toward zero, that packets from one input to one output keep their
// order, that none is lost, and that an idle router forwards in two cycles.
// Input stalls (FIFO full) and output stalls are counted and must occur.
module tb_router;
  import d3_pkg::*;
  localparam int NP = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid [NP], in_ready [NP], out_valid [NP], out_ready [NP];
  pkt_t in_pkt [NP], out_pkt [NP];

  router #(.NP(NP)) dut (.*);

  int checks = 0, failures = 0, in_stalls = 0, out_stalls = 0;
  pkt_t exp_q [NP][NP][$];      // [input][output]
  int sent [NP], recvd = 0, total = 0;
  logic rand_bp = 1'b0;

  function automatic int route(pkt_t p, output pkt_t h);
    h = p;
    if (p.dx > 0) begin h.dx = p.dx - 1; return 2; end
    if (p.dx < 0) begin h.dx = p.dx + 1; return 4; end
    if (p.dy > 0) begin h.dy = p.dy - 1; return 3; end
    if (p.dy < 0) begin h.dy = p.dy + 1; return 1; end
    return 0;
  endfunction

  always @(posedge clk) begin
    for (int i = 0; i < NP; i++) begin
      if (in_valid[i] && !in_ready[i]) in_stalls++;
      if (in_valid[i] && in_ready[i]) begin
        pkt_t h;
        int o;
        o = route(in_pkt[i], h);
        exp_q[i][o].push_back(h);
        sent[i]++; total++;
      end
    end
    for (int o = 0; o < NP; o++) begin
      if (out_valid[o] && !out_ready[o]) out_stalls++;
      if (out_valid[o] && out_ready[o]) begin
        int src;
        pkt_t e;
        src = int'(out_pkt[o].axon_id[15:13]);
        checks++; recvd++;
        if (src >= NP || exp_q[src][o].size() == 0) begin
          failures++; $display("FAIL unexpected packet %h on port %0d", out_pkt[o], o);
        end else begin
          e = exp_q[src][o].pop_front();
          if (e != out_pkt[o]) begin failures++; $display("FAIL port %0d got %h expected %h", o, out_pkt[o], e); end
        end
      end
    end
  end

  always @(negedge clk) for (int o = 0; o < NP; o++) out_ready[o] = rand_bp ? ($urandom_range(0, 2) != 0) : 1'b1;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c;
    for (int i = 0; i < NP; i++) begin in_valid[i] = 0; in_pkt[i] = '0; out_ready[i] = 1; sent[i] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (2) @(negedge clk);
    // idle latency: one packet from west input heading east two nodes
    in_valid[4] = 1; in_pkt[4] = '{dx: 6'sd2, dy: 6'sd0, axon_id: 16'h8000, index: 12'd1};
    @(negedge clk); in_valid[4] = 0;
    c = 1;
    while (!out_valid[2]) begin @(negedge clk); c++; end
    checks++; if (c != 2) begin failures++; $display("FAIL idle latency %0d", c); end
    repeat (3) @(negedge clk);
    // random traffic with back-pressure
    rand_bp = 1'b1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      for (int i = 0; i < NP; i++) begin
        if (!in_valid[i] || in_ready_q[i]) begin
          in_valid[i] = ($urandom_range(0, 1) == 1);
          in_pkt[i].dx = 6'($signed($urandom_range(0, 6)) - 3);
          in_pkt[i].dy = 6'($signed($urandom_range(0, 6)) - 3);
          in_pkt[i].axon_id = {3'(i), 13'(cyc)};
          in_pkt[i].index = 12'($urandom);
        end
      end
      @(negedge clk);
    end
    for (int i = 0; i < NP; i++) in_valid[i] = 0;
    rand_bp = 1'b0;
    repeat (50) @(negedge clk);
    checks++; if (recvd != total) begin failures++; $display("FAIL sent %0d received %0d", total, recvd); end
    checks++; if (in_stalls == 0) begin failures++; $display("FAIL no input stall"); end
    checks++; if (out_stalls == 0) begin failures++; $display("FAIL no output stall"); end
    $display("packets %0d, input stalls %0d, output stalls %0d", total, in_stalls, out_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // handshake of the previous rising edge, so the driver only changes a
  // packet once it has been taken
  logic in_ready_q [NP];
  always @(posedge clk) for (int i = 0; i < NP; i++) in_ready_q[i] <= in_valid[i] && in_ready[i];
endmodule
