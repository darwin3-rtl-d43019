// tb_neuron_core: end-to-end test of one neuron node (reduced memory sizes).
//
// The node is configured over its configuration bus with a LIF program for
// 32 neurons, a learning program for 4 plastic synapses, axon-in records
// (a broadcast to all 32 neurons and a range to neurons 8-15) and an
// axon-out chain per neuron. Three time steps are run:
//   1. three spike packets arrive, then the time step is triggered;
//   2. a packet is offered right at the time step, so it must be held back
//      (input stall) until the step is finished;
//   3. the held packet is the only input.
// After each step the membrane potentials, the output packets (order and
// content) and the plastic weights are compared with a reference model in
// the testbench. The output side is randomly back-pressured so the
// controller's spike stall occurs; input stall and spike stall must both
// be seen.
module tb_neuron_core;
  import d3_pkg::*;
  localparam int NN = 32, NSYN = 4, WBASE = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic gstep = 0, in_valid, in_ready, out_valid, out_ready, busy;
  cfg_t cfg;
  pkt_t in_pkt, out_pkt;
  logic [15:0] step_count, overruns;
  logic [31:0] syn_events, spikes_out, stall_in, stall_spike_cycles;

  neuron_core #(.N_NEURONS(64), .AIN_DEPTH(1024), .AOUT_DEPTH(256),
                .IMEM_DEPTH(256), .LRN_DEPTH(16)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask
  function automatic data_t m(data_t a, data_t b);
    logic signed [31:0] p;
    p = 32'(a) * 32'(b);
    return data_t'(p >>> 8);
  endfunction
  function automatic logic [15:0] I(opcode_e op, int arg);
    return {op, 11'(arg)};
  endfunction

  task automatic wr(cfg_sel_e sel, int addr, logic [31:0] data);
    @(negedge clk);
    cfg = '{we: 1'b1, sel: sel, addr: 22'(addr), data: data};
    @(negedge clk);
    cfg = '0;
  endtask

  // reference state
  data_t v [NN], p0 [NN], p1 [NN], c0 [NN], vth [NN];
  data_t wb [NN];          // broadcast weights (axon 0), neuron j
  data_t wr8 [8];          // range weights (axon 1), neurons 8..15
  data_t ls0 [NSYN], ls3 [NSYN], lp0 [NSYN], lp1 [NSYN];
  pkt_t exp_pkts [$];
  int got_pkts = 0, fired_now [NN];

  always @(posedge clk) if (out_valid && out_ready) begin
    pkt_t e;
    checks++; got_pkts++;
    if (exp_pkts.size() == 0) begin failures++; $display("FAIL unexpected packet %h", out_pkt); end
    else begin
      e = exp_pkts.pop_front();
      if (e != out_pkt) begin failures++; $display("FAIL packet %h expected %h", out_pkt, e); end
    end
  end
  logic block_out = 1'b0;
  always @(negedge clk) out_ready = !block_out && ($urandom_range(0, 3) == 0);

  task automatic send(int axon);
    @(negedge clk);
    in_valid = 1'b1;
    in_pkt = '{dx: '0, dy: '0, axon_id: 16'(axon), index: 12'd0};
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  // model one step given the axons delivered before it
  task automatic model_step(int axons [$]);
    data_t h [NN];
    logic pre [NSYN];
    foreach (h[n]) h[n] = '0;
    foreach (pre[k]) pre[k] = 1'b0;
    foreach (axons[i]) begin
      if (axons[i] == 0) begin
        for (int n = 0; n < NN; n++) h[n] += wb[n];
        for (int k = 0; k < NSYN; k++) pre[k] = 1'b1;
      end else for (int j = 0; j < 8; j++) h[8 + j] += wr8[j];
    end
    for (int n = 0; n < NN; n++) begin
      data_t vn;
      vn = m(v[n], p0[n]) + m(h[n], p1[n]) + c0[n];
      fired_now[n] = (vn > vth[n]);
      if (fired_now[n]) begin
        vn = '0;
        exp_pkts.push_back('{dx: 6'sd1, dy: -6'sd2, axon_id: 16'(100 + n), index: 12'(n)});
        if (n % 3 == 0)
          exp_pkts.push_back('{dx: -6'sd3, dy: 6'sd0, axon_id: 16'(200 + n), index: 12'(n)});
      end
      v[n] = vn;
    end
    for (int k = 0; k < NSYN; k++) begin
      data_t w;
      w = wb[k];
      if (fired_now[k]) w = w + m(lp0[k], ls0[k]);
      if (pre[k])       w = w + m(lp1[k], ls3[k]);
      wb[k] = w;
    end
  endtask

  task automatic run_step(int n);
    gstep = ~gstep;
    wait (step_count == 16'(n));
    wait (!busy);
    repeat (5) @(posedge clk);
  endtask

  task automatic check_state(string tag);
    chk(exp_pkts.size(), 0, {tag, " packets outstanding"});
    for (int n = 0; n < NN; n++) chk(int'(data_t'(dut.smem[n][15:0])), int'(v[n]), $sformatf("%s v[%0d]", tag, n));
    for (int k = 0; k < NSYN; k++)
      chk(int'(data_t'(dut.ain[(WBASE + k) / 2][16 * (k % 2) +: 16])), int'(wb[k]), $sformatf("%s w[%0d]", tag, k));
  endtask

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ax [$];
    ain_link_t lk;
    aout_entry_t e;
    cfg = '0; in_valid = 0; in_pkt = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // programs
    wr(CFG_IMEM, 0, I(OP_LSIS, 6'b100101));
    wr(CFG_IMEM, 1, I(OP_LDIP, (1<<10)|(1<<9)|(1<<2)));
    wr(CFG_IMEM, 2, I(OP_MOV, (2<<6)|3));
    wr(CFG_IMEM, 3, I(OP_UPTVM, 'hD));
    wr(CFG_IMEM, 4, I(OP_GSPRS, 'hA));
    wr(CFG_IMEM, 5, I(OP_LSIS, (1<<10)|(1<<5)));
    wr(CFG_IMEM, 6, I(OP_END, 0));
    wr(CFG_IMEM, 32, I(OP_LSLS, 'h3FF));
    wr(CFG_IMEM, 33, I(OP_LDLP, 'h7FF));
    wr(CFG_IMEM, 34, I(OP_UPTWT, 'h108));   // W += LP0 * LS0 when post fired
    wr(CFG_IMEM, 35, I(OP_UPTWT, 'h260));   // W += LP1 * LS3 when pre arrived
    wr(CFG_IMEM, 36, I(OP_END, 0));
    wr(CFG_REG, 0, NN); wr(CFG_REG, 1, 1); wr(CFG_REG, 2, NSYN);
    wr(CFG_REG, 3, 0); wr(CFG_REG, 4, 32); wr(CFG_REG, 5, 0); wr(CFG_REG, 6, WBASE);
    // neuron state rows
    for (int n = 0; n < NN; n++) begin
      v[n] = data_t'($urandom_range(0, 200)); p0[n] = 16'sd128; p1[n] = data_t'($urandom_range(200, 300));
      c0[n] = 16'sd16; vth[n] = data_t'($urandom_range(60, 300));
      wr(CFG_SMEM, n * 32 + 0, 32'(v[n]));
      wr(CFG_SMEM, n * 32 + 3, 0);
      wr(CFG_SMEM, n * 32 + 5, 32'(vth[n]));
      wr(CFG_SMEM, n * 32 + 6, 32'(p0[n]));
      wr(CFG_SMEM, n * 32 + 7, 32'(p1[n]));
      wr(CFG_SMEM, n * 32 + 14, 32'(c0[n]));
    end
    // learning rows
    for (int k = 0; k < NSYN; k++) begin
      ls0[k] = data_t'($urandom_range(0, 512)); ls3[k] = data_t'($urandom_range(0, 512));
      lp0[k] = 16'sd64; lp1[k] = 16'sd32;
      wr(CFG_LMEM, k * 32 + 0, 32'(ls0[k]));
      wr(CFG_LMEM, k * 32 + 3, 32'(ls3[k]));
      wr(CFG_LMEM, k * 32 + 10, 32'(lp0[k]));
      wr(CFG_LMEM, k * 32 + 11, 32'(lp1[k]));
      wr(CFG_LMEM, k * 32 + LROW_POST, k);
    end
    // axon-in: linker 0 broadcast at half 64, linker 1 range at half 128
    lk = '{half_addr: 17'(WBASE), typ: AXI_BCAST, len: 13'(NN)};
    wr(CFG_AIN, 0, 32'(lk));
    lk = '{half_addr: 17'd128, typ: AXI_RANGE, len: 13'd8};
    wr(CFG_AIN, 1, 32'(lk));
    for (int n = 0; n < NN; n++) wb[n] = data_t'($urandom_range(0, 200));
    for (int n = 0; n < NN; n += 2) wr(CFG_AIN, (WBASE + n) / 2, {wb[n + 1], wb[n]});
    for (int j = 0; j < 8; j++) wr8[j] = data_t'($urandom_range(0, 300));
    wr(CFG_AIN, 64, {wr8[0], 16'd8});
    for (int j = 1; j < 8; j += 2) wr(CFG_AIN, 64 + (j + 1) / 2, {wr8[j + 1 < 8 ? j + 1 : 0], wr8[j]});
    // axon-out: linker per neuron, chain of one entry (two for n % 3 == 0)
    for (int n = 0; n < NN; n++) begin
      wr(CFG_AOUT, n, {6'd0, 14'(64 + 2 * n), 12'(n)});
      e = '{rsvd: '0, lf: (n % 3 != 0), dx: 6'sd1, dy: -6'sd2, axon_id: 16'(100 + n)};
      wr(CFG_AOUT, 64 + 2 * n, 32'(e));
      e = '{rsvd: '0, lf: 1'b1, dx: -6'sd3, dy: 6'sd0, axon_id: 16'(200 + n)};
      wr(CFG_AOUT, 65 + 2 * n, 32'(e));
    end

    // step 1
    send(0); send(1); send(0);
    wait (!busy);
    ax = '{0, 1, 0};
    model_step(ax);
    // the router side is blocked during step 1 until the controller stalls
    block_out = 1'b1;
    fork
      begin
        for (int c = 0; c < 5000 && stall_spike_cycles == 0; c++) @(posedge clk);
        repeat (20) @(posedge clk);
        block_out = 1'b0;
      end
    join_none
    run_step(1);
    check_state("step1");
    // step 2: a packet offered right at the tick is held back
    ax = '{};
    model_step(ax);
    gstep = ~gstep;
    repeat (3) @(posedge clk);
    send(0);
    wait (step_count == 16'd2);
    wait (!busy);
    repeat (5) @(posedge clk);
    check_state("step2");
    // step 3: the held packet
    ax = '{0};
    model_step(ax);
    run_step(3);
    check_state("step3");
    chk(int'(syn_events), 3 * NN + 8, "synapse events");
    checks++; if (stall_in == 0) begin failures++; $display("FAIL no input stall"); end
    checks++; if (stall_spike_cycles == 0) begin failures++; $display("FAIL no spike stall"); end
    checks++; if (got_pkts == 0) begin failures++; $display("FAIL no spikes"); end
    $display("packets %0d, input stall cycles %0d, spike stall cycles %0d", got_pkts, stall_in, stall_spike_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
