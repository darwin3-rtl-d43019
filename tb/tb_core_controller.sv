// tb_core_controller: self-checking test of the instruction-driven controller.
//
// The testbench models the node memories (instructions, state rows, learning
// rows, plastic weight) and runs four programs through the controller:
//   1. LIF (load, MOV I<-h, UPTVM 0xD, GSPRS 0xA, store) on 16 neurons;
//   2. a program using every inference update (UPTIS g, I and v_adp,
//      UPTVM 0xF, UPTTS, GSPRS 0xE) on 16 neurons;
//   3. extended instructions ADDI, MOV, ADD, CMP, a taken conditional JMP
//      and MUL;
//   4. a learning job (LSLS, LDLP, UPTLS, two UPTWT with flags) on 8
//      synapses with every flag combination.
// Expected values come from a reference model of the equations written
// here. Spike acceptance is randomly withheld to exercise the stall, and
// the UPTVM 0xD instruction is timed: it must take four datapath cycles.
module tb_core_controller;
  import d3_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NN = 16;
  localparam data_t ONE = 16'sd256;

  logic [7:0] inf_pc, lrn_pc;
  data_t v0_cfg;
  logic job_start, job_learn, job_done, busy;
  logic [11:0] job_id;
  logic [7:0] imem_addr;
  logic [15:0] imem_rdata;
  logic srow_rd, hacc_clr, srow_we, lrow_rd, lrow_we, w_we;
  logic [11:0] srow_addr;
  logic [9:0] lrow_addr;
  data_t srow_rdata [SROW_FIELDS];
  data_t srow_wdata [SROW_STATE];
  logic [SROW_STATE-1:0] srow_wmask;
  data_t lrow_rdata [LROW_FIELDS];
  data_t lrow_wdata [LROW_STATE];
  logic [LROW_STATE-1:0] lrow_wmask;
  data_t hacc_rdata, w_rdata, w_wdata;
  logic pre_flag, post_flag;
  logic spike_valid, spike_ready, stall_spike;
  logic [11:0] spike_nid;

  core_controller dut (.*);

  // memory models
  logic [15:0] imem [256];
  data_t smem [NN][SROW_FIELDS];
  data_t lmem [NN][LROW_FIELDS];
  data_t hacc [NN];
  data_t wmem [NN];
  logic  pre [NN], post [NN];
  always_ff @(posedge clk) begin
    imem_rdata <= imem[imem_addr];
    if (srow_rd) begin
      for (int f = 0; f < SROW_FIELDS; f++) srow_rdata[f] <= smem[srow_addr[3:0]][f];
      hacc_rdata <= hacc[srow_addr[3:0]];
    end
    if (srow_we) for (int f = 0; f < SROW_STATE; f++) if (srow_wmask[f]) smem[srow_addr[3:0]][f] <= srow_wdata[f];
    if (hacc_clr) hacc[srow_addr[3:0]] <= '0;
    if (lrow_rd) begin
      for (int f = 0; f < LROW_FIELDS; f++) lrow_rdata[f] <= lmem[lrow_addr[3:0]][f];
      w_rdata <= wmem[lrow_addr[3:0]];
    end
    if (lrow_we) for (int f = 0; f < LROW_STATE; f++) if (lrow_wmask[f]) lmem[lrow_addr[3:0]][f] <= lrow_wdata[f];
    if (w_we) wmem[lrow_addr[3:0]] <= w_wdata;
  end
  assign pre_flag  = pre[lrow_addr[3:0]];
  assign post_flag = post[lrow_addr[3:0]];

  // spikes and stalls
  int spikes [$];
  int stalls = 0;
  always_ff @(posedge clk) begin
    spike_ready <= ($urandom_range(0, 3) != 0);
    if (spike_valid && spike_ready) spikes.push_back(int'(spike_nid));
    if (stall_spike) stalls++;
  end

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

  // UPTVM timing: cycles between the first term issue and the write of v_m
  int t_issue, uptvm_cycles;
  always @(posedge clk) begin
    if (dut.st == dut.S_ISSUE && dut.tidx == 0 && dut.ir.op == OP_UPTVM) t_issue = $time;
    if (dut.st == dut.S_WAIT && dut.ex_res_valid && dut.ir.op == OP_UPTVM) uptvm_cycles = ($time - t_issue) / 10;
  end

  task automatic run_job(int id, logic learn);
    int c;
    @(posedge clk);
    job_start <= 1; job_learn <= learn; job_id <= 12'(id);
    @(posedge clk);
    job_start <= 0;
    c = 0;
    while (!job_done) begin @(posedge clk); c++; if (c > 2000) begin failures++; $display("FAIL job hang"); break; end end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    job_start = 0; job_learn = 0; job_id = 0; v0_cfg = -16'sd512;
    for (int a = 0; a < 256; a++) imem[a] = I(OP_END, 0);
    // program 1: LIF at 0
    imem[0] = I(OP_LSIS, 6'b100101);                 // load S0, S3, S5
    imem[1] = I(OP_LDIP, (1<<10)|(1<<9)|(1<<2));     // p0, p1, c0
    imem[2] = I(OP_MOV, (2<<6)|3);                   // I <- h
    imem[3] = I(OP_UPTVM, 'hD);
    imem[4] = I(OP_GSPRS, 'hA);
    imem[5] = I(OP_LSIS, (1<<10)|(1<<5));            // store S0
    imem[6] = I(OP_END, 0);
    // program 2: full inference at 16
    imem[16] = I(OP_LSIS, 'h3F);
    imem[17] = I(OP_LDIP, 'h7FF);
    imem[18] = I(OP_UPTIS, (1<<7)|(1<<3)|(1<<2));    // g = p5 g + p6 h
    imem[19] = I(OP_UPTIS, (1<<8)|(1<<1));           // I = g v + p7 g
    imem[20] = I(OP_UPTIS, (1<<6)|(1<<5)|(1<<4)|1);  // vadp = p3 vadp + p4 v + c1
    imem[21] = I(OP_UPTVM, 'hF);
    imem[22] = I(OP_UPTTS, (1<<8)|(2<<5)|(0<<2)|1);  // RT1 = p2 S0 + c1
    imem[23] = I(OP_MOV, (5<<6)|20);                 // S5 (v_th) <- RT1
    imem[24] = I(OP_GSPRS, 'hE);
    imem[25] = I(OP_LSIS, (1<<10)|'h3F);
    imem[26] = I(OP_END, 0);
    // program 3: extended at 40
    imem[40] = I(OP_LDIP, 1<<10);                    // p0
    imem[41] = I(OP_ADDI, (19<<6)|5);                // TR0 = TR0 + 5  (TR0 starts 0)
    imem[42] = I(OP_MOV, (20<<6)|19);                // TR1 = TR0
    imem[43] = I(OP_ADD, (20<<6)|19);                // TR1 = 10
    imem[44] = I(OP_CMP, (20<<6)|19);                // flag = TR1 > TR0
    imem[45] = I(OP_JMP, (1<<10)|47);                // taken
    imem[46] = I(OP_ADDI, (20<<6)|1);                // skipped
    imem[47] = I(OP_MUL, (20<<6)|8);                 // TR1 = TR1 * p0
    imem[48] = I(OP_SUB, (20<<6)|19);                // TR1 = TR1 - TR0
    imem[49] = I(OP_MOV, (0<<6)|20);                 // S0 = TR1
    imem[50] = I(OP_LSIS, (1<<10)|(1<<5));
    imem[51] = I(OP_END, 0);
    // program 4: learning at 64
    imem[64] = I(OP_LSLS, 'h3FF);
    imem[65] = I(OP_LDLP, 'h7FF);
    imem[66] = I(OP_UPTLS, 'h20);                    // LS0 = LP1*LS0 + LC0
    imem[67] = I(OP_UPTWT, 'h108);                   // W += LP0 * LS0 * Y2
    imem[68] = I(OP_UPTWT, 'h260);                   // W += LP1 * X2 * LS3
    imem[69] = I(OP_LSLS, (1<<10)|(1<<9));           // store LS0
    imem[70] = I(OP_END, 0);

    for (int n = 0; n < NN; n++) begin
      for (int f = 0; f < SROW_FIELDS; f++) smem[n][f] = data_t'($urandom_range(0, 600)) - 300;
      smem[n][6] = data_t'($urandom_range(150, 250));  // p0 decay
      smem[n][7] = data_t'($urandom_range(200, 300));  // p1
      smem[n][5] = data_t'($urandom_range(0, 200));    // threshold
      hacc[n] = data_t'($urandom_range(0, 800));
      for (int f = 0; f < LROW_FIELDS; f++) lmem[n][f] = data_t'($urandom_range(0, 600)) - 300;
      wmem[n] = data_t'($urandom_range(0, 1000));
      pre[n] = n[0]; post[n] = n[1];
    end
    inf_pc = 0; lrn_pc = 64;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1: LIF
    begin
      data_t es0 [NN]; int exp_spk [$];
      for (int n = 0; n < NN; n++) begin
        data_t v, h, vn;
        v = smem[n][0]; h = smem[n][3] + hacc[n];
        vn = m(v, smem[n][6]) + m(h, smem[n][7]) + smem[n][14];
        if (vn > smem[n][5]) begin exp_spk.push_back(n); vn = v0_cfg; end
        es0[n] = vn;
      end
      spikes.delete();
      for (int n = 0; n < NN; n++) run_job(n, 0);
      for (int n = 0; n < NN; n++) chk(int'(smem[n][0]), int'(es0[n]), $sformatf("LIF v[%0d]", n));
      for (int n = 0; n < NN; n++) chk(int'(hacc[n]), 0, "hacc cleared");
      chk(spikes.size(), exp_spk.size(), "LIF spike count");
      foreach (exp_spk[i]) if (i < spikes.size()) chk(spikes[i], exp_spk[i], "LIF spike id");
      chk(uptvm_cycles, 4, "UPTVM 0xD datapath cycles");
    end

    // ---- 2: full inference
    inf_pc = 16;
    begin
      data_t es [NN][6]; int exp_spk [$];
      for (int n = 0; n < NN; n++) begin
        data_t v, g, Ic, h, va, vt, rt1; logic s;
        data_t p [8]; data_t c [3];
        for (int k = 0; k < 8; k++) p[k] = smem[n][6+k];
        for (int k = 0; k < 3; k++) c[k] = smem[n][14+k];
        v = smem[n][0]; g = smem[n][1]; Ic = smem[n][2]; h = smem[n][3] + hacc[n]; va = smem[n][4];
        g  = m(g, p[5]) + m(h, p[6]);
        Ic = m(g, v) + m(g, p[7]);
        va = m(va, p[3]) + m(v, p[4]) + c[1];
        v  = m(v, p[0]) + m(Ic, p[1]) + m(va, p[2]) + c[0];
        rt1 = m(v, p[2]) + c[1];
        vt = rt1;
        s = v > vt;
        if (s) begin exp_spk.push_back(n); va = va + c[2]; v = v0_cfg; end
        es[n][0] = v; es[n][1] = g; es[n][2] = Ic; es[n][3] = h; es[n][4] = va; es[n][5] = vt;
      end
      spikes.delete();
      for (int n = 0; n < NN; n++) run_job(n, 0);
      for (int n = 0; n < NN; n++) for (int f = 0; f < 6; f++)
        chk(int'(smem[n][f]), int'(es[n][f]), $sformatf("full S%0d[%0d]", f, n));
      chk(spikes.size(), exp_spk.size(), "full spike count");
    end

    // ---- 3: extended instructions
    inf_pc = 40;
    run_job(3, 0);
    chk(int'(smem[3][0]), int'(m(16'sd10, smem[3][6]) - 16'sd5), "extended result");

    // ---- 4: learning
    begin
      data_t ew [8], els0 [8];
      for (int k = 0; k < 8; k++) begin
        data_t ls0, w;
        data_t lp [8]; data_t lc [8];
        for (int q = 0; q < 7; q++) lp[q] = lmem[k][10+q];
        for (int q = 0; q < 4; q++) lc[q] = lmem[k][18+q];
        ls0 = m(lmem[k][0], lp[1]) + lc[0];
        w = wmem[k];
        if (post[k]) w = w + m(lp[0], ls0);
        if (pre[k])  w = w + m(lp[1], lmem[k][3]);
        ew[k] = w; els0[k] = ls0;
      end
      for (int k = 0; k < 8; k++) run_job(k, 1);
      for (int k = 0; k < 8; k++) begin
        chk(int'(wmem[k]), int'(ew[k]), $sformatf("weight[%0d]", k));
        chk(int'(lmem[k][0]), int'(els0[k]), $sformatf("LS0[%0d]", k));
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no spike stall seen"); end
    $display("spike stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
