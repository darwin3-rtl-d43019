// tb_darwin3_top: end-to-end test of the chip on a 3 x 3 mesh with small
// neuron cores.
//
// A two-layer network is spread over two nodes and driven from the
// management port at node (0, 0):
//   node (1,1): 48 LIF neurons, all reached by axon 0 (broadcast, weight
//               2.0, threshold 1.0), so one input packet makes all fire;
//               each spike is sent to node (2,1), axon 0;
//   node (2,1): 48 LIF neurons on a broadcast axon of weight 1/16, so the
//               48 incoming spikes make every neuron fire one step later;
//               neuron n reports to the management port as axon n, and
//               neuron 0 also sends a packet off the east edge of the chip.
// The first layer also runs a learning program on 4 plastic synapses.
// Checks: the packet from the management port reaches node (1,1) after the
// delay 2N + 2(N+1) of N = 3 routers; the management port receives each of
// the 48 second-layer spikes exactly once with the right index; exactly one
// packet leaves the east edge; the synapse-event and spike totals match.
// The management port is held not-ready during the second layer's output
// so that back-pressure runs back through the network into the spike stall
// of the sending core; afterwards a short time-step period forces
// overruns. Each mechanism is counted and must occur at least once:
// input stall, spike stall, router back-pressure, overrun, learning job,
// off-chip egress.
module tb_darwin3_top;
  import d3_pkg::*;
  localparam int MX = 3, MY = 3, NPN = 64, NUSE = 48;
  logic clk = 0, rst_pad_n = 0;
  always #5 clk = ~clk;

  logic tick_enable;
  logic [31:0] tick_period;
  cfg_t cfg;
  logic [4:0] cfg_x, cfg_y;
  logic cfg_all;
  logic riscv_out_valid, riscv_out_ready, riscv_in_valid, riscv_in_ready;
  pkt_t riscv_out_pkt, riscv_in_pkt;
  logic north_valid [MX], north_ready [MX], north_in_valid [MX], north_in_ready [MX];
  pkt_t north_pkt [MX], north_in_pkt [MX];
  logic south_valid [MX], south_ready [MX], south_in_valid [MX], south_in_ready [MX];
  pkt_t south_pkt [MX], south_in_pkt [MX];
  logic west_valid [MY], west_ready [MY], west_in_valid [MY], west_in_ready [MY];
  pkt_t west_pkt [MY], west_in_pkt [MY];
  logic east_valid [MY], east_ready [MY], east_in_valid [MY], east_in_ready [MY];
  pkt_t east_pkt [MY], east_in_pkt [MY];
  logic any_busy;
  logic [31:0] total_syn_events, total_spikes, total_overruns, total_stall_in, total_stall_spike;

  darwin3_top #(.MESH_X(MX), .MESH_Y(MY), .N_NEURONS(NPN), .AIN_BIG(1024),
                .AIN_SMALL(512), .AOUT_DEPTH(256)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask
  function automatic logic [15:0] I(opcode_e op, int arg);
    return {op, 11'(arg)};
  endfunction

  // ---- monitors
  int mgmt_seen [NUSE], mgmt_pkts = 0, mgmt_bad = 0, east_pkts = 0, edge_other = 0;
  int bp_cycles = 0, learn_jobs = 0;
  logic hold_mgmt = 1'b0;
  logic mon_on = 1'b0;   // monitors count only once reset has been released
  always @(posedge clk) if (mon_on) begin
    if (riscv_in_valid && riscv_in_ready) begin
      mgmt_pkts++;
      if (int'(riscv_in_pkt.axon_id) < NUSE && int'(riscv_in_pkt.index) == int'(riscv_in_pkt.axon_id)
          && riscv_in_pkt.dx == 0 && riscv_in_pkt.dy == 0)
        mgmt_seen[riscv_in_pkt.axon_id]++;
      else mgmt_bad++;
    end
    if (riscv_in_valid && !riscv_in_ready) bp_cycles++;
    for (int i = 0; i < MY; i++) begin
      if (east_valid[i]) begin
        if (i == 1 && east_pkt[i].axon_id == 16'd777) east_pkts++; else edge_other++;
      end
      if (west_valid[i]) edge_other++;
    end
    for (int i = 0; i < MX; i++) if (north_valid[i] || south_valid[i]) edge_other++;
    if (dut.g_y[1].g_x[1].g_core.u_core.job_start && dut.g_y[1].g_x[1].g_core.u_core.job_learn) learn_jobs++;
  end
  always @(negedge clk) riscv_in_ready = !hold_mgmt;

  task automatic wr(int x, int y, logic all, cfg_sel_e sel, int addr, logic [31:0] data);
    @(negedge clk);
    cfg = '{we: 1'b1, sel: sel, addr: 22'(addr), data: data};
    cfg_x = 5'(x); cfg_y = 5'(y); cfg_all = all;
    @(negedge clk);
    cfg = '0; cfg_all = 1'b0;
  endtask

  task automatic lif_node(int x, int y, data_t w, int axon_out_dx, int axon_out_dy, logic to_mgmt);
    ain_link_t lk;
    aout_entry_t e;
    wr(x, y, 0, CFG_REG, 0, NUSE);
    wr(x, y, 0, CFG_REG, 5, 0);
    for (int n = 0; n < NUSE; n++) begin
      wr(x, y, 0, CFG_SMEM, n * 32 + 0, 0);        // v
      wr(x, y, 0, CFG_SMEM, n * 32 + 3, 0);        // h offset
      wr(x, y, 0, CFG_SMEM, n * 32 + 5, 16'h100);  // threshold 1.0
      wr(x, y, 0, CFG_SMEM, n * 32 + 6, 0);        // p0: no carry-over
      wr(x, y, 0, CFG_SMEM, n * 32 + 7, 16'h100);  // p1 = 1.0
      wr(x, y, 0, CFG_SMEM, n * 32 + 14, 0);       // c0
    end
    lk = '{half_addr: 17'd64, typ: AXI_BCAST, len: 13'(NUSE)};
    wr(x, y, 0, CFG_AIN, 0, 32'(lk));
    for (int n = 0; n < NUSE; n += 2) wr(x, y, 0, CFG_AIN, (64 + n) / 2, {w, w});
    for (int n = 0; n < NUSE; n++) begin
      wr(x, y, 0, CFG_AOUT, n, {6'd0, 14'(128 + 2 * n), 12'(n)});
      e = '{rsvd: '0, lf: !(to_mgmt && n == 0), dx: 6'(axon_out_dx), dy: 6'(axon_out_dy),
            axon_id: to_mgmt ? 16'(n) : 16'd0};
      wr(x, y, 0, CFG_AOUT, 128 + 2 * n, 32'(e));
      e = '{rsvd: '0, lf: 1'b1, dx: 6'sd1, dy: 6'sd0, axon_id: 16'd777};
      wr(x, y, 0, CFG_AOUT, 129 + 2 * n, 32'(e));
    end
  endtask

  task automatic wait_steps(int n);
    int t0;
    t0 = int'(dut.g_y[1].g_x[1].g_core.u_core.step_count);
    while (int'(dut.g_y[1].g_x[1].g_core.u_core.step_count) < t0 + n) @(posedge clk);
  endtask

  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_in, lat;
    tick_enable = 0; tick_period = 32'd20000; cfg = '0; cfg_x = 0; cfg_y = 0; cfg_all = 0;
    riscv_out_valid = 0; riscv_out_pkt = '0;
    for (int i = 0; i < MX; i++) begin
      north_ready[i] = 1; south_ready[i] = 1; north_in_valid[i] = 0; south_in_valid[i] = 0;
      north_in_pkt[i] = '0; south_in_pkt[i] = '0;
    end
    for (int i = 0; i < MY; i++) begin
      east_ready[i] = 1; west_ready[i] = 1; east_in_valid[i] = 0; west_in_valid[i] = 0;
      east_in_pkt[i] = '0; west_in_pkt[i] = '0;
    end
    foreach (mgmt_seen[i]) mgmt_seen[i] = 0;
    repeat (4) @(posedge clk); rst_pad_n = 1;
    repeat (4) @(posedge clk);
    mon_on = 1'b1;

    // programs into every core
    wr(0, 0, 1, CFG_IMEM, 0, I(OP_LSIS, 6'b100101));
    wr(0, 0, 1, CFG_IMEM, 1, I(OP_LDIP, (1<<10)|(1<<9)|(1<<2)));
    wr(0, 0, 1, CFG_IMEM, 2, I(OP_MOV, (2<<6)|3));
    wr(0, 0, 1, CFG_IMEM, 3, I(OP_UPTVM, 'hD));
    wr(0, 0, 1, CFG_IMEM, 4, I(OP_GSPRS, 'hA));
    wr(0, 0, 1, CFG_IMEM, 5, I(OP_LSIS, (1<<10)|(1<<5)));
    wr(0, 0, 1, CFG_IMEM, 6, I(OP_END, 0));
    wr(0, 0, 1, CFG_IMEM, 32, I(OP_LSLS, 'h3FF));
    wr(0, 0, 1, CFG_IMEM, 33, I(OP_LDLP, 'h7FF));
    wr(0, 0, 1, CFG_IMEM, 34, I(OP_UPTWT, 'h260));
    wr(0, 0, 1, CFG_IMEM, 35, I(OP_END, 0));
    wr(0, 0, 1, CFG_REG, 4, 32);
    // layer 1 at (1,1) -> (2,1); layer 2 at (2,1) -> management port (0,0)
    lif_node(1, 1, 16'sh200, 1, 0, 1'b0);
    lif_node(2, 1, 16'sh010, -2, -1, 1'b1);
    // learning on layer 1
    wr(1, 1, 0, CFG_REG, 1, 1); wr(1, 1, 0, CFG_REG, 2, 4); wr(1, 1, 0, CFG_REG, 6, 64);
    for (int k = 0; k < 4; k++) begin
      wr(1, 1, 0, CFG_LMEM, k * 32 + 3, 16'h40);
      wr(1, 1, 0, CFG_LMEM, k * 32 + 11, 16'h10);
      wr(1, 1, 0, CFG_LMEM, k * 32 + LROW_POST, k);
    end

    // input packet from the management port to node (1,1), axon 0
    @(negedge clk);
    riscv_out_valid = 1;
    riscv_out_pkt = '{dx: 6'sd1, dy: 6'sd1, axon_id: 16'd0, index: 12'd0};
    @(posedge clk); t_in = $time;
    @(negedge clk); riscv_out_valid = 0;
    while (!dut.g_y[1].g_x[1].g_core.cv) @(posedge clk);
    lat = int'(($time - t_in) / 10);
    chk(lat, 2 * 3 + 2 * 4, "delay through 3 routers and 4 channel stages");
    wait (!any_busy);
    repeat (10) @(posedge clk);

    // step 1: layer 1 fires and its spikes reach layer 2; step 2: layer 2
    // fires. The management port is held until the layer-2 core stalls.
    hold_mgmt = 1'b1;
    tick_enable = 1;
    for (int c = 0; c < 100000 && dut.g_y[1].g_x[2].g_core.u_core.stall_spike_cycles == 0; c++)
      @(posedge clk);
    repeat (50) @(posedge clk);
    hold_mgmt = 1'b0;
    wait_steps(2);
    tick_enable = 0;
    repeat (20) @(posedge clk);
    wait (!any_busy);
    repeat (100) @(posedge clk);

    chk(mgmt_pkts, NUSE, "spikes at the management port");
    for (int n = 0; n < NUSE; n++) chk(mgmt_seen[n], 1, $sformatf("spike of layer-2 neuron %0d", n));
    chk(mgmt_bad, 0, "malformed packets");
    chk(east_pkts, 1, "packets leaving the east edge");
    chk(edge_other, 0, "packets on other edges");
    chk(int'(total_syn_events), NUSE + NUSE * NUSE, "synapse events");
    chk(int'(total_spikes), 2 * NUSE, "spikes");
    chk(int'(dut.g_y[1].g_x[1].g_core.u_core.stall_in) + int'(dut.g_y[1].g_x[2].g_core.u_core.stall_in),
        int'(total_stall_in), "stall counters");

    // overrun: a period shorter than a step
    tick_period = 32'd100;
    tick_enable = 1;
    repeat (3000) @(posedge clk);
    tick_enable = 0;
    repeat (3000) @(posedge clk);

    $display("mechanisms: input stall %0d, spike stall %0d, mgmt back-pressure %0d, overruns %0d, learning jobs %0d, east egress %0d",
             total_stall_in, total_stall_spike, bp_cycles, total_overruns, learn_jobs, east_pkts);
    checks++; if (total_stall_in == 0)    begin failures++; $display("FAIL no input stall"); end
    checks++; if (total_stall_spike == 0) begin failures++; $display("FAIL no spike stall"); end
    checks++; if (bp_cycles == 0)         begin failures++; $display("FAIL no back-pressure"); end
    checks++; if (total_overruns == 0)    begin failures++; $display("FAIL no overrun"); end
    checks++; if (learn_jobs == 0)        begin failures++; $display("FAIL no learning job"); end
    checks++; if (east_pkts == 0)         begin failures++; $display("FAIL no off-chip packet"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
