// tb_aer_in: self-checking test of the spike input unit.
//
// The axon-in memory is filled with random records of all four compressed
// forms (broadcast, shared, grouped, range). Random spike packets are sent
// and each synapse event (neuron, weight) is compared with a reference walk
// of the same records computed in the testbench. The test also checks that
// no packet is taken while `hold` is high and counts those stalled cycles.
module tb_aer_in;
  import d3_pkg::*;
  localparam int AW = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic hold, in_valid, in_ready, mem_rd, syn_valid, idle;
  pkt_t in_pkt;
  logic [AW-1:0] mem_addr;
  logic [31:0] mem_rdata;
  logic [11:0] syn_nid;
  data_t syn_w;
  logic [AW:0] syn_haddr;

  aer_in #(.AW(AW), .NID_BITS(12)) dut (.*);

  logic [31:0] mem [2**AW];
  always_ff @(posedge clk) if (mem_rd) mem_rdata <= mem[mem_addr];

  function automatic logic [15:0] rh(int h);
    return h[0] ? mem[h >> 1][31:16] : mem[h >> 1][15:0];
  endfunction
  function automatic void wh(int h, logic [15:0] v);
    if (h[0]) mem[h >> 1][31:16] = v; else mem[h >> 1][15:0] = v;
  endfunction

  int checks = 0, failures = 0, stall_cycles = 0;
  int typ_of [16], nsrc [16];
  typedef struct { int nid; int w; } ev_t;
  ev_t exp_q [$];
  int seen [4];

  always @(posedge clk) begin
    if (syn_valid) begin
      ev_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected event"); end
      else begin
        e = exp_q.pop_front();
        if (e.nid != int'(syn_nid) || e.w != int'(syn_w)) begin
          failures++; $display("FAIL event nid %0d w %0d expected %0d %0d", syn_nid, syn_w, e.nid, e.w);
        end
      end
    end
    if (hold && in_valid) begin
      stall_cycles++;
      checks++;
      if (in_ready) begin failures++; $display("FAIL accepted while held"); end
    end
  end

  task automatic expect_pkt(int ax, int idx);
    ain_link_t lk;
    int b, n;
    lk = ain_link_t'(mem[ax]);
    b = int'(lk.half_addr); n = int'(lk.len);
    seen[int'(lk.typ)]++;
    unique case (lk.typ)
      AXI_BCAST:  for (int j = 0; j < n; j++) exp_q.push_back('{j, int'(data_t'(rh(b + j)))});
      AXI_SHARED: exp_q.push_back('{int'(rh(b)), int'(data_t'(rh(b + 1)))});
      AXI_GROUP:  for (int j = 0; j < n; j++)
                    exp_q.push_back('{int'(rh(b + j)), int'(data_t'(rh(b + n + idx * n + j)))});
      AXI_RANGE:  for (int j = 0; j < n; j++)
                    exp_q.push_back('{(int'(rh(b)) + j) % 4096, int'(data_t'(rh(b + 1 + j)))});
    endcase
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int h, n, t;
    ain_link_t lk;
    foreach (mem[i]) mem[i] = $urandom;
    h = 64;
    for (int a = 0; a < 16; a++) begin
      t = a % 4; n = $urandom_range(1, 6);
      lk.half_addr = 17'(h); lk.typ = axi_type_e'(t); lk.len = 13'(n);
      typ_of[a] = t; nsrc[a] = 1;
      mem[a] = 32'(lk);
      unique case (t)
        0: h += n;
        1: begin wh(h, 16'($urandom_range(0, 4095))); h += 2; end
        2: begin
             for (int j = 0; j < n; j++) wh(h + j, 16'($urandom_range(0, 4095)));
             nsrc[a] = 3; h += n + 3 * n;
           end
        3: begin wh(h, 16'($urandom_range(0, 4000))); h += 1 + n; end
      endcase
    end
    hold = 0; in_valid = 0; in_pkt = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (2) @(posedge clk);
    for (int k = 0; k < 200; k++) begin
      int ax, idx;
      ax = $urandom_range(0, 15); idx = $urandom_range(0, nsrc[ax] - 1);
      hold <= ($urandom_range(0, 9) == 0);
      in_valid <= 1'b1;
      in_pkt <= '{dx: '0, dy: '0, axon_id: 16'(ax), index: 12'(idx)};
      @(posedge clk);
      while (!(in_valid && in_ready)) begin
        if (hold && $urandom_range(0, 2) == 0) hold <= 1'b0;
        @(posedge clk);
      end
      expect_pkt(ax, idx);
      in_valid <= 1'b0; hold <= 1'b0;
      @(posedge clk);
    end
    wait (idle && exp_q.size() == 0);
    repeat (5) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL %0d events missing", exp_q.size()); end
    foreach (seen[i]) begin checks++; if (seen[i] == 0) begin failures++; $display("FAIL form %0d never used", i); end end
    checks++; if (stall_cycles == 0) begin failures++; $display("FAIL hold never exercised"); end
    $display("packets per form %0d %0d %0d %0d, held cycles %0d", seen[0], seen[1], seen[2], seen[3], stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
