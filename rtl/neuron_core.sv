// neuron_core: one neuron node of the mesh.
//
// The node time-multiplexes up to 4096 logical neurons over one instruction
// driven update engine. Its parts follow the node organisation of the
// design: time management (time_mgmt), the controller with the model
// execution datapath (core_controller, exec_unit), spike event processing
// (aer_in, aer_out) and the register and memory units held here:
//   imem  instructions (16 bit), shared by all neurons of the node;
//   smem  inference state memory, one row per neuron: S0-S5, IP0-IP7,
//         IC0-IC2 (the inference parameters live beside the state);
//   hacc  dendritic input accumulators, one per neuron, filled by AER IN
//         and added to h when the controller reads the neuron's row;
//   lmem  learning (synapse state) memory, one row per plastic synapse:
//         LS0-LS9, LP0-LP7, LC0-LC7 and the post-synaptic neuron;
//   ain   axon-in memory: linkers, compressed connection records, weights;
//   aout  axon-out memory: one linker per neuron, then the entry chains.
// Plastic synapse k is the weight at half address lrn_wbase + k of axon-in;
// AER IN raises its pre-synaptic flag when it delivers that weight, and
// the flag is consumed by the synapse's next learning job. A neuron's fired
// flag is set by its spike and cleared at the next time step.
//
// Configuration arrives on a write-only bus (cfg_t): the target memory, an
// address and 32 bits of data; register addresses are 0 n_neurons,
// 1 learn_en, 2 n_syn, 3 inf_pc, 4 lrn_pc, 5 v0, 6 lrn_wbase. In the chip
// this traffic comes from the external controller through the inter-chip
// links; here it is a plain bus so that the node can be filled directly.
// Memory sizes: 4096 neurons, axon-in 65536 words for a big tile or 28672
// for a small one, axon-out 16384 words, as derived from the fan-in and
// fan-out figures of the design; instruction memory 256 words and 1024
// plastic synapses are this implementation's choices.
module neuron_core
  import d3_pkg::*;
#(
  parameter int unsigned N_NEURONS  = 4096,
  parameter int unsigned AIN_DEPTH  = 65536,
  parameter int unsigned AOUT_DEPTH = 16384,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned LRN_DEPTH  = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        gstep,
  input  cfg_t        cfg,
  input  logic        in_valid,
  output logic        in_ready,
  input  pkt_t        in_pkt,
  output logic        out_valid,
  input  logic        out_ready,
  output pkt_t        out_pkt,
  output logic        busy,
  output logic [15:0] step_count,
  output logic [15:0] overruns,
  output logic [31:0] syn_events,
  output logic [31:0] spikes_out,
  output logic [31:0] stall_in,
  output logic [31:0] stall_spike_cycles
);

  localparam int unsigned NB  = $clog2(N_NEURONS);
  localparam int unsigned IA  = $clog2(IMEM_DEPTH);
  localparam int unsigned LB  = $clog2(LRN_DEPTH);
  localparam int unsigned AIA = $clog2(AIN_DEPTH);
  localparam int unsigned AOA = $clog2(AOUT_DEPTH);

  // ------------------------------------------------------------ registers
  logic [NB:0]   n_neurons;
  logic          learn_en;
  logic [LB:0]   n_syn;
  logic [IA-1:0] inf_pc, lrn_pc;
  data_t         v0_cfg;
  logic [AIA:0]  lrn_wbase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_neurons <= '0; learn_en <= 1'b0; n_syn <= '0; inf_pc <= '0; lrn_pc <= '0;
      v0_cfg <= '0; lrn_wbase <= '0;
    end else if (cfg.we && cfg.sel == CFG_REG) begin
      unique case (cfg.addr[2:0])
        3'd0: n_neurons <= (NB+1)'(cfg.data);
        3'd1: learn_en  <= cfg.data[0];
        3'd2: n_syn     <= (LB+1)'(cfg.data);
        3'd3: inf_pc    <= IA'(cfg.data);
        3'd4: lrn_pc    <= IA'(cfg.data);
        3'd5: v0_cfg    <= data_t'(cfg.data);
        3'd6: lrn_wbase <= (AIA+1)'(cfg.data);
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------- time management
  logic compute, local_tick, job_start, job_learn, job_done, ain_idle;
  logic [NB-1:0] job_id;

  time_mgmt #(.NID_BITS(NB), .LID_BITS(LB)) u_tm (
    .clk, .rst_n, .gstep, .n_neurons, .learn_en, .n_syn, .ain_idle,
    .compute, .local_tick, .job_start, .job_learn, .job_id, .job_done,
    .step_count, .overruns
  );

  // ------------------------------------------------------------ controller
  logic [IA-1:0] imem_addr;
  logic [15:0]   imem_q;
  logic          srow_rd, hacc_clr, srow_we, lrow_rd, lrow_we, w_we;
  logic [NB-1:0] srow_addr;
  logic [LB-1:0] lrow_addr;
  data_t         srow_q [SROW_FIELDS];
  data_t         srow_wdata [SROW_STATE];
  logic [SROW_STATE-1:0] srow_wmask;
  data_t         lrow_q [LROW_FIELDS];
  data_t         lrow_wdata [LROW_STATE];
  logic [LROW_STATE-1:0] lrow_wmask;
  data_t         hacc_q, w_q, w_wdata;
  logic          pre_flag_o, post_flag_o;
  logic          spk_valid, spk_ready, ctl_busy, stall_spike;
  logic [NB-1:0] spk_nid;

  core_controller #(.IMEM_AW(IA), .NID_BITS(NB), .LID_BITS(LB)) u_ctl (
    .clk, .rst_n, .inf_pc, .lrn_pc, .v0_cfg,
    .job_start, .job_learn, .job_id, .job_done, .busy(ctl_busy),
    .imem_addr, .imem_rdata(imem_q),
    .srow_rd, .srow_addr, .srow_rdata(srow_q), .hacc_rdata(hacc_q), .hacc_clr,
    .srow_we, .srow_wmask, .srow_wdata,
    .lrow_rd, .lrow_addr, .lrow_rdata(lrow_q), .pre_flag(pre_flag_o), .post_flag(post_flag_o),
    .lrow_we, .lrow_wmask, .lrow_wdata, .w_rdata(w_q), .w_we, .w_wdata,
    .spike_valid(spk_valid), .spike_ready(spk_ready), .spike_nid(spk_nid),
    .stall_spike
  );

  // ------------------------------------------------------------ memories
  logic [15:0] imem [IMEM_DEPTH];
  logic [31:0] ain  [AIN_DEPTH];
  logic [31:0] aout [AOUT_DEPTH];
  data_t       hacc [N_NEURONS];
  logic [N_NEURONS-1:0] hvalid, fired;
  logic [LRN_DEPTH-1:0] pre_flag;

  // instruction memory
  always_ff @(posedge clk) begin
    if (cfg.we && cfg.sel == CFG_IMEM) imem[cfg.addr[IA-1:0]] <= cfg.data[15:0];
    imem_q <= imem[imem_addr];
  end

  // inference state memory: one row of SROW_FIELDS halves per neuron, a
  // single write port with a per-field enable (controller has priority over
  // configuration writes) and one synchronous row read port
  localparam int unsigned SW = SROW_FIELDS * DATA_W;
  localparam int unsigned LW = LROW_FIELDS * DATA_W;
  logic [SW-1:0] smem [N_NEURONS];
  logic [LW-1:0] lmem [LRN_DEPTH];
  logic                   s_we, l_we;
  logic [NB-1:0]          s_addr;
  logic [LB-1:0]          l_addr;
  logic [SROW_FIELDS-1:0] s_mask;
  logic [LROW_FIELDS-1:0] l_mask;
  logic [SW-1:0]          s_wd, s_rd;
  logic [LW-1:0]          l_wd, l_rd;

  always_comb begin
    s_we = srow_we || (cfg.we && cfg.sel == CFG_SMEM);
    s_addr = srow_we ? srow_addr : cfg.addr[NB+4:5];
    s_mask = srow_we ? SROW_FIELDS'(srow_wmask) : SROW_FIELDS'(1) << (int'(cfg.addr[4:0]) % SROW_FIELDS);
    for (int f = 0; f < SROW_FIELDS; f++) begin
      s_wd[f*DATA_W +: DATA_W] = (srow_we && f < SROW_STATE) ? srow_wdata[f % SROW_STATE] : cfg.data[DATA_W-1:0];
      srow_q[f] = s_rd[f*DATA_W +: DATA_W];
    end
    l_we = lrow_we || (cfg.we && cfg.sel == CFG_LMEM);
    l_addr = lrow_we ? lrow_addr : cfg.addr[LB+4:5];
    l_mask = lrow_we ? LROW_FIELDS'(lrow_wmask) : LROW_FIELDS'(1) << (int'(cfg.addr[4:0]) % LROW_FIELDS);
    for (int f = 0; f < LROW_FIELDS; f++) begin
      l_wd[f*DATA_W +: DATA_W] = (lrow_we && f < LROW_STATE) ? lrow_wdata[f % LROW_STATE] : cfg.data[DATA_W-1:0];
      lrow_q[f] = l_rd[f*DATA_W +: DATA_W];
    end
  end

  always_ff @(posedge clk) begin
    if (s_we)
      for (int f = 0; f < SROW_FIELDS; f++)
        if (s_mask[f]) smem[s_addr][f*DATA_W +: DATA_W] <= s_wd[f*DATA_W +: DATA_W];
    if (srow_rd) begin
      s_rd   <= smem[srow_addr];
      hacc_q <= hvalid[srow_addr] ? hacc[srow_addr] : '0;
    end
  end

  // learning memory, organised the same way
  always_ff @(posedge clk) begin
    if (l_we)
      for (int f = 0; f < LROW_FIELDS; f++)
        if (l_mask[f]) lmem[l_addr][f*DATA_W +: DATA_W] <= l_wd[f*DATA_W +: DATA_W];
    if (lrow_rd) l_rd <= lmem[lrow_addr];
  end
  assign post_flag_o = fired[lrow_q[LROW_POST][NB-1:0]];
  logic pre_q;
  assign pre_flag_o  = pre_q;

  // axon-in: port A for AER IN, port B for the plastic weight and config
  logic [AIA-1:0] ain_addr;
  logic           ain_rd;
  logic [31:0]    ain_q;
  logic [AIA:0]   w_haddr;
  assign w_haddr = lrn_wbase + (AIA+1)'(lrow_addr);

  always_ff @(posedge clk) begin
    if (ain_rd) ain_q <= ain[ain_addr];
    if (lrow_rd) w_q <= w_haddr[0] ? ain[w_haddr[AIA:1]][31:16] : ain[w_haddr[AIA:1]][15:0];
    if (w_we) begin
      if (w_haddr[0]) ain[w_haddr[AIA:1]][31:16] <= w_wdata;
      else            ain[w_haddr[AIA:1]][15:0]  <= w_wdata;
    end else if (cfg.we && cfg.sel == CFG_AIN) ain[cfg.addr[AIA-1:0]] <= cfg.data;
  end

  // axon-out
  logic [AOA-1:0] aout_addr;
  logic           aout_rd;
  logic [31:0]    aout_q;
  always_ff @(posedge clk) begin
    if (cfg.we && cfg.sel == CFG_AOUT) aout[cfg.addr[AOA-1:0]] <= cfg.data;
    if (aout_rd) aout_q <= aout[aout_addr];
  end

  // ------------------------------------------------ spike event processing
  logic           syn_valid;
  logic [NB-1:0]  syn_nid;
  data_t          syn_w;
  logic [AIA:0]   syn_haddr;
  logic [AIA:0]   syn_rel;
  logic           aout_idle;

  aer_in #(.AW(AIA), .NID_BITS(NB)) u_ain (
    .clk, .rst_n, .hold(compute), .in_valid, .in_ready, .in_pkt,
    .mem_addr(ain_addr), .mem_rd(ain_rd), .mem_rdata(ain_q),
    .syn_valid, .syn_nid, .syn_w, .syn_haddr, .idle(ain_idle)
  );

  aer_out #(.AW(AOA), .NID_BITS(NB)) u_aout (
    .clk, .rst_n, .spk_valid, .spk_ready, .spk_nid,
    .mem_addr(aout_addr), .mem_rd(aout_rd), .mem_rdata(aout_q),
    .pkt_valid(out_valid), .pkt_ready(out_ready), .pkt(out_pkt), .idle(aout_idle)
  );

  assign syn_rel = syn_haddr - lrn_wbase;

  // dendritic accumulation and flags
  always_ff @(posedge clk) begin
    if (syn_valid) hacc[syn_nid] <= (hvalid[syn_nid] ? hacc[syn_nid] : '0) + syn_w;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hvalid <= '0; fired <= '0; pre_flag <= '0; pre_q <= 1'b0;
      syn_events <= '0; spikes_out <= '0; stall_in <= '0; stall_spike_cycles <= '0;
    end else begin
      if (syn_valid) begin
        hvalid[syn_nid] <= 1'b1;
        syn_events <= syn_events + 1'b1;
        if (syn_haddr >= lrn_wbase && syn_rel < (AIA+1)'(LRN_DEPTH))
          pre_flag[LB'(syn_rel)] <= 1'b1;
      end
      if (hacc_clr) hvalid[srow_addr] <= 1'b0;
      if (local_tick) fired <= '0;
      if (spk_valid && spk_ready) begin
        fired[spk_nid] <= 1'b1;
        spikes_out <= spikes_out + 1'b1;
      end
      if (lrow_rd) begin
        pre_q <= pre_flag[lrow_addr];
        pre_flag[lrow_addr] <= 1'b0;
      end
      if (in_valid && !in_ready) stall_in <= stall_in + 1'b1;
      if (stall_spike) stall_spike_cycles <= stall_spike_cycles + 1'b1;
    end
  end

  assign busy = compute || ctl_busy || !ain_idle || !aout_idle;

endmodule
