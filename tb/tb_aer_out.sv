// tb_aer_out: self-checking test of the spike output unit.
//
// Each of 256 neurons gets an axon-out linker pointing at a random chain of
// one to four entries (some chains are shared between neurons, differing
// only in index). Random bursts of fired IDs are pushed in while the router
// side applies random back-pressure; every packet leaving is compared with
// the expected {dx, dy, axon ID, index} sequence. Full-FIFO stalls and
// router stalls are counted and must both happen.
module tb_aer_out;
  import d3_pkg::*;
  localparam int AW = 10, NB = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic spk_valid, spk_ready, mem_rd, pkt_valid, pkt_ready, idle;
  logic [NB-1:0] spk_nid;
  logic [AW-1:0] mem_addr;
  logic [31:0] mem_rdata;
  pkt_t pkt;

  aer_out #(.AW(AW), .NID_BITS(NB), .FIFO_DEPTH(8)) dut (.*);

  logic [31:0] mem [2**AW];
  always_ff @(posedge clk) if (mem_rd) mem_rdata <= mem[mem_addr];

  int accepted = 0;
  int checks = 0, failures = 0, full_stalls = 0, pkt_stalls = 0, multi = 0;
  pkt_t exp_q [$];

  always @(posedge clk) begin
    if (spk_valid && !spk_ready) full_stalls++;
    if (spk_valid && spk_ready) begin expect_nid(int'(spk_nid)); accepted++; end
    if (pkt_valid && !pkt_ready) pkt_stalls++;
    if (pkt_valid && pkt_ready) begin
      pkt_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected packet"); end
      else begin
        e = exp_q.pop_front();
        if (e != pkt) begin failures++; $display("FAIL packet %h expected %h", pkt, e); end
      end
    end
  end
  always_ff @(posedge clk) pkt_ready <= ($urandom_range(0, 3) != 0);

  task automatic expect_nid(int n);
    aout_link_t lk;
    aout_entry_t e;
    int p;
    lk = aout_link_t'(mem[n]);
    p = int'(lk.addr);
    do begin
      e = aout_entry_t'(mem[p]);
      exp_q.push_back('{dx: e.dx, dy: e.dy, axon_id: e.axon_id, index: lk.index});
      p++;
    end while (!e.lf);
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p, chain_start [$];
    aout_link_t lk;
    aout_entry_t e;
    p = 256;
    for (int n = 0; n < 256; n++) begin
      if (n > 0 && $urandom_range(0, 3) == 0) lk.addr = 14'(chain_start[$urandom_range(0, chain_start.size() - 1)]);
      else begin
        int len;
        len = $urandom_range(1, 4);
        if (len > 1) multi++;
        chain_start.push_back(p);
        lk.addr = 14'(p);
        for (int k = 0; k < len; k++) begin
          e = aout_entry_t'($urandom);
          e.rsvd = '0;
          e.lf = (k == len - 1);
          mem[p + k] = 32'(e);
        end
        p += len;
      end
      lk.rsvd = '0; lk.index = 12'($urandom_range(0, 4095));
      mem[n] = 32'(lk);
    end
    spk_valid = 0; spk_nid = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (2) @(posedge clk);
    for (int k = 0; k < 400; k++) begin
      int a0;
      // drive on the falling edge so the rising-edge monitor sees stable inputs
      @(negedge clk);
      a0 = accepted;
      spk_valid = 1'b1; spk_nid = NB'($urandom);
      do @(negedge clk); while (accepted == a0);
      spk_valid = 1'b0;
      if ($urandom_range(0, 4) == 0) repeat ($urandom_range(1, 20)) @(posedge clk);
    end
    spk_valid <= 1'b0;
    wait (idle);
    repeat (5) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL %0d packets missing", exp_q.size()); end
    checks++; if (full_stalls == 0) begin failures++; $display("FAIL FIFO never full"); end
    checks++; if (multi == 0) begin failures++; $display("FAIL no multi-entry chain"); end
    checks++; if (pkt_stalls == 0) begin failures++; $display("FAIL router never stalled"); end
    $display("fifo-full stalls %0d, router stalls %0d, multi-entry chains %0d", full_stalls, pkt_stalls, multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
