// core_controller: instruction-driven update engine of one neuron core.
//
// The controller runs a short program once per logical neuron (inference)
// or once per plastic synapse (learning). It fetches 16-bit instructions,
// decodes them and drives the model execution datapath (exec_unit, held
// inside this module) over the register set of the core: S0-S5 (v_m, g, I,
// h, v_adp, v_th), w, v0, IP0-IP7, IC0-IC2, TR0-TR7, LP0-LP7, LC0-LC7 and
// LS0-LS9 (X0, X1, X2, Y0, Y1, Y2, R0, R1, R2, LS9).
//
// Job sequence, following the four controller states of the design:
//   IDLE -> LOAD (read the neuron's state row, or the synapse's learning row
//   and weight) -> UPDATE (fetch/decode/execute until END) -> UPDATE WEIGHT
//   (learning jobs only: write the weight back) -> IDLE.
//
// Ten primary instructions are implemented with the field layout of the ISA
// table. Multi-hot fields are read most-significant bit first in the order
// the table lists their targets (NHVM bit3 = v_m ... bit0 = c0, which makes
// the LIF example "UPTVM 0xD" select v_m, I and c0). NHSP of GSPRS is read
// least-significant bit first (bit0 fire, bit1 compare, bit2 adapt, bit3
// reset), the only reading under which both examples, LIF "GSPRS 0xA" and
// Izhikevich "GSPRS 0xE", mean what those models need. The flags X2, Y2 and
// R2 act as masks in UPTWT (the "1b to 16b" AND of the weight datapath).
// Extended instructions implemented: ADD, SUB, MUL, ADDI, MOV, CMP, JMP,
// NOP and END; their encodings are this implementation's own (dst in
// arg[10:6] over registers 0-31, src in arg[5:0] over all registers).
//
// Each instruction takes a fetch, a decode and an execute cycle; update
// instructions then spend one cycle per term plus the datapath latency.
//
// Memory interface: state and learning rows are read whole (one cycle of
// latency) into a row buffer; loads copy from the buffer, stores write the
// selected fields straight to memory. The dendritic input accumulated by
// AER IN for the neuron (hacc) is added to h when the row is read and is
// cleared at the same time. Spikes leave on spike_valid/spike_ready; the
// controller stalls while spike_ready is low.
module core_controller
  import d3_pkg::*;
#(
  parameter int unsigned IMEM_AW = 8,
  parameter int unsigned NID_BITS = NID_W,
  parameter int unsigned LID_BITS = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  logic [IMEM_AW-1:0]   inf_pc,
  input  logic [IMEM_AW-1:0]   lrn_pc,
  input  data_t                v0_cfg,
  // job from time management
  input  logic                 job_start,
  input  logic                 job_learn,
  input  logic [NID_BITS-1:0]  job_id,
  output logic                 job_done,
  output logic                 busy,
  // instruction memory (synchronous read)
  output logic [IMEM_AW-1:0]   imem_addr,
  input  logic [15:0]          imem_rdata,
  // inference state rows
  output logic                 srow_rd,
  output logic [NID_BITS-1:0]  srow_addr,
  input  data_t                srow_rdata [SROW_FIELDS],
  input  data_t                hacc_rdata,
  output logic                 hacc_clr,
  output logic                 srow_we,
  output logic [SROW_STATE-1:0] srow_wmask,
  output data_t                srow_wdata [SROW_STATE],
  // learning rows and plastic weight
  output logic                 lrow_rd,
  output logic [LID_BITS-1:0]  lrow_addr,
  input  data_t                lrow_rdata [LROW_FIELDS],
  input  logic                 pre_flag,
  input  logic                 post_flag,
  output logic                 lrow_we,
  output logic [LROW_STATE-1:0] lrow_wmask,
  output data_t                lrow_wdata [LROW_STATE],
  input  data_t                w_rdata,
  output logic                 w_we,
  output data_t                w_wdata,
  // spikes
  output logic                 spike_valid,
  input  logic                 spike_ready,
  output logic [NID_BITS-1:0]  spike_nid,
  // statistics
  output logic                 stall_spike
);

  localparam data_t ONE = data_t'(1 << FRAC);

  typedef enum logic [3:0] {S_IDLE, S_LOAD, S_LATCH, S_FETCH, S_DEC, S_EXEC, S_ISSUE, S_WAIT, S_WBW} state_e;
  state_e st;

  data_t regs [NREGS];
  data_t srow [SROW_FIELDS];
  logic [IMEM_AW-1:0] pc;
  logic [NID_BITS-1:0] cur_id;
  logic cur_learn, flag, w_dirty;
  instr_t ir;

  // ---------------------------------------------------------------- terms
  typedef struct packed {
    data_t a;
    data_t b;
    logic  mul;
    logic  fb;
    logic  mask;
    logic  acc;
  } term_t;

  term_t terms [8];
  logic [3:0] nterms;
  logic [5:0] dst;   // destination register of the current update

  function automatic term_t mk(data_t a, data_t b, logic mul, logic acc);
    term_t t;
    t.a = a; t.b = b; t.mul = mul; t.fb = 1'b0; t.mask = 1'b1; t.acc = acc;
    return t;
  endfunction

  logic [2:0] k3, l3, m3;
  logic [1:0] n2;
  assign k3 = ir.arg[10:8];
  assign l3 = ir.arg[7:5];
  assign m3 = ir.arg[4:2];
  assign n2 = ir.arg[1:0];

  always_comb begin
    logic chain;
    logic fmask;
    int   cnt;
    for (int i = 0; i < 8; i++) terms[i] = mk('0, '0, 1'b0, 1'b0);
    cnt   = 0;
    dst   = 6'(R_TR0);
    chain = 1'b0;
    fmask = 1'b1;
    unique case (ir.op)
      OP_UPTIS: begin
        if (ir.arg[8]) begin                      // I = g*v + p7*g
          dst = 6'(R_S0 + 2);
          terms[cnt] = mk(regs[R_S0+1], regs[R_S0], 1'b1, 1'b1); cnt++;
          if (ir.arg[1]) begin terms[cnt] = mk(regs[R_S0+1], regs[R_IP0+7], 1'b1, 1'b1); cnt++; end
        end else if (ir.arg[7]) begin             // g = p5*g + p6*h
          dst = 6'(R_S0 + 1);
          if (ir.arg[3]) begin terms[cnt] = mk(regs[R_S0+1], regs[R_IP0+5], 1'b1, 1'b1); cnt++; end
          if (ir.arg[2]) begin terms[cnt] = mk(regs[R_S0+3], regs[R_IP0+6], 1'b1, 1'b1); cnt++; end
        end else begin                            // v_adp = p3*v_adp + p4*v + c1
          dst = 6'(R_S0 + 4);
          if (ir.arg[5]) begin terms[cnt] = mk(regs[R_S0+4], regs[R_IP0+3], 1'b1, 1'b1); cnt++; end
          if (ir.arg[4]) begin terms[cnt] = mk(regs[R_S0],   regs[R_IP0+4], 1'b1, 1'b1); cnt++; end
          if (ir.arg[0]) begin terms[cnt] = mk(regs[R_IC0+1], '0, 1'b0, 1'b1); cnt++; end
        end
      end
      OP_UPTVM: begin                             // v = p0*v + p1*I + p2*v_adp + c0
        dst = 6'(R_S0);
        if (ir.arg[3]) begin terms[cnt] = mk(regs[R_S0],   regs[R_IP0],   1'b1, 1'b1); cnt++; end
        if (ir.arg[2]) begin terms[cnt] = mk(regs[R_S0+2], regs[R_IP0+1], 1'b1, 1'b1); cnt++; end
        if (ir.arg[1]) begin terms[cnt] = mk(regs[R_S0+4], regs[R_IP0+2], 1'b1, 1'b1); cnt++; end
        if (ir.arg[0]) begin terms[cnt] = mk(regs[R_IC0],  '0, 1'b0, 1'b1); cnt++; end
      end
      OP_UPTLS: begin                             // LS_k = LP_l * LS_m + LC_n
        dst = 6'(R_LS0 + int'(k3));
        terms[0] = mk(regs[R_LS0 + int'(m3)], regs[R_LP0 + int'(l3)], 1'b1, 1'b1);
        terms[1] = mk(regs[R_LC0 + int'(n2)], '0, 1'b0, 1'b1);
        cnt = 2;
      end
      OP_UPTTS: begin                             // RT_k = P_l * S_m + C_n
        dst = 6'(R_TR0 + int'(k3));
        terms[0] = mk(regs[int'(m3)], regs[R_IP0 + int'(l3)], 1'b1, 1'b1);
        terms[1] = mk((n2 == 2'd3) ? data_t'(0) : regs[R_IC0 + int'(n2)], '0, 1'b0, 1'b1);
        cnt = 2;
      end
      OP_UPTWT: begin                             // W = W + LP_m * prod(LS_n)
        dst = 6'(R_W);
        terms[0] = mk(regs[R_W], '0, 1'b0, 1'b1);
        cnt = 1;
        // flags X2 (LS2), Y2 (LS5), R2 (LS8) gate the product
        for (int i = 0; i < 9; i++)
          if (ir.arg[8-i] && (i == 2 || i == 5 || i == 8) && regs[R_LS0+i] == '0) fmask = 1'b0;
        terms[1] = mk(regs[R_LP0 + int'(ir.arg[10:9])], ONE, 1'b0, 1'b0);
        for (int i = 0; i < 9; i++) begin
          if (ir.arg[8-i] && !(i == 2 || i == 5 || i == 8)) begin
            if (!chain) begin
              terms[1] = mk(regs[R_LP0 + int'(ir.arg[10:9])], regs[R_LS0+i], 1'b1, 1'b0);
              chain = 1'b1;
            end else begin
              cnt++;
              terms[cnt] = mk('0, regs[R_LS0+i], 1'b1, 1'b0);
              terms[cnt].fb = 1'b1;
            end
          end
        end
        terms[cnt].acc  = 1'b1;
        terms[cnt].mask = fmask;
        cnt++;
      end
      default: ;
    endcase
    if (cnt == 0) begin
      terms[0] = mk('0, '0, 1'b0, 1'b1);
      cnt = 1;
    end
    nterms = 4'(cnt);
  end

  // ------------------------------------------------------------- datapath
  logic [3:0] tidx;
  logic       acc_seen;
  logic       ex_valid, ex_res_valid;
  data_t      ex_result;
  term_t      cur_term;
  assign cur_term = terms[tidx[2:0]];
  assign ex_valid = (st == S_ISSUE);

  exec_unit u_exec (
    .clk, .rst_n,
    .term_valid (ex_valid),
    .term_a     (cur_term.a),
    .term_b     (cur_term.b),
    .term_mul   (cur_term.mul),
    .term_fb    (cur_term.fb),
    .term_mask  (cur_term.mask),
    .term_acc   (cur_term.acc),
    .term_first (cur_term.acc && !acc_seen),
    .term_last  (tidx == nterms - 4'd1),
    .res_valid  (ex_res_valid),
    .result     (ex_result)
  );

  // ------------------------------------------------------- extended ALU
  logic [5:0] x_dst;
  logic [5:0] x_src;
  data_t x_a, x_b;
  assign x_dst = {1'b0, ir.arg[10:6]};
  assign x_src = ir.arg[5:0];
  assign x_a   = regs[x_dst];
  assign x_b   = (int'(x_src) < NREGS) ? regs[x_src] : '0;

  // ------------------------------------------------------- spike logic
  logic  gs_spike;
  assign gs_spike = ir.arg[0] || (ir.arg[1] && (regs[R_S0] > regs[R_S0+5]));

  assign imem_addr  = pc;
  assign srow_addr  = cur_id;
  assign lrow_addr  = LID_BITS'(cur_id);
  assign busy       = (st != S_IDLE);
  assign spike_nid  = cur_id;
  assign spike_valid = (st == S_EXEC) && (ir.op == OP_GSPRS) && gs_spike;
  assign stall_spike = spike_valid && !spike_ready;

  always_comb begin
    srow_rd = (st == S_LOAD) && !cur_learn;
    lrow_rd = (st == S_LOAD) &&  cur_learn;
    hacc_clr = (st == S_LATCH) && !cur_learn;
    srow_we = 1'b0; srow_wmask = '0;
    lrow_we = 1'b0; lrow_wmask = '0;
    for (int i = 0; i < SROW_STATE; i++) srow_wdata[i] = regs[R_S0+i];
    for (int i = 0; i < LROW_STATE; i++) lrow_wdata[i] = regs[R_LS0+i];
    if (st == S_EXEC && ir.op == OP_LSIS && ir.arg[10]) begin
      srow_we = 1'b1;
      for (int i = 0; i < 6; i++) srow_wmask[i] = ir.arg[5-i];
    end
    if (st == S_EXEC && ir.op == OP_LSLS && ir.arg[10]) begin
      lrow_we = 1'b1;
      for (int i = 0; i < 10; i++) lrow_wmask[i] = ir.arg[9-i];
    end
    w_we    = (st == S_WBW) && w_dirty;
    w_wdata = regs[R_W];
  end

  // ------------------------------------------------------------ sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pc <= '0; cur_id <= '0; cur_learn <= 1'b0; flag <= 1'b0;
      w_dirty <= 1'b0; ir <= '{op: OP_NOP, arg: '0}; tidx <= '0; acc_seen <= 1'b0;
      job_done <= 1'b0;
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
      for (int i = 0; i < SROW_FIELDS; i++) srow[i] <= '0;
    end else begin
      job_done <= 1'b0;
      regs[R_V0] <= v0_cfg;
      unique case (st)
        S_IDLE: if (job_start) begin
          cur_id <= job_id; cur_learn <= job_learn; w_dirty <= 1'b0;
          pc <= job_learn ? lrn_pc : inf_pc;
          st <= S_LOAD;
        end
        S_LOAD: st <= S_LATCH;
        S_LATCH: begin
          if (!cur_learn) begin
            for (int i = 0; i < SROW_FIELDS; i++) srow[i] <= srow_rdata[i];
            srow[3] <= srow_rdata[3] + hacc_rdata;
          end else begin
            regs[R_W] <= w_rdata;
          end
          st <= S_FETCH;
        end
        S_FETCH: st <= S_DEC;         // instruction memory read latency
        S_DEC: begin
          ir <= instr_t'(imem_rdata);
          pc <= pc + 1'b1;
          st <= S_EXEC;
        end
        S_EXEC: begin
          st <= S_FETCH;
          unique case (ir.op)
            OP_LSIS: if (!ir.arg[10]) begin
              for (int i = 0; i < 6; i++) if (ir.arg[5-i]) regs[R_S0+i] <= srow[i];
            end
            OP_LDIP: begin
              for (int i = 0; i < 8; i++) if (ir.arg[10-i]) regs[R_IP0+i] <= srow[6+i];
              for (int i = 0; i < 3; i++) if (ir.arg[2-i])  regs[R_IC0+i] <= srow[14+i];
            end
            OP_LSLS: if (!ir.arg[10]) begin
              for (int i = 0; i < 10; i++) if (ir.arg[9-i]) regs[R_LS0+i] <= lrow_rdata[i];
              if (ir.arg[7]) regs[R_LS0+2] <= pre_flag  ? ONE : '0;
              if (ir.arg[4]) regs[R_LS0+5] <= post_flag ? ONE : '0;
            end
            OP_LDLP: begin
              for (int i = 0; i < 7; i++) if (ir.arg[10-i]) regs[R_LP0+i] <= lrow_rdata[10+i];
              for (int i = 0; i < 4; i++) if (ir.arg[3-i])  regs[R_LC0+i] <= lrow_rdata[18+i];
            end
            OP_UPTIS, OP_UPTVM, OP_UPTLS, OP_UPTWT, OP_UPTTS: begin
              tidx <= '0; acc_seen <= 1'b0;
              st <= S_ISSUE;
            end
            OP_GSPRS: begin
              if (gs_spike && !spike_ready) begin
                st <= S_EXEC;             // stall until AER OUT accepts
              end else if (gs_spike) begin
                if (ir.arg[2]) regs[R_S0+4] <= regs[R_S0+4] + regs[R_IC0+2];
                if (ir.arg[3]) regs[R_S0]   <= regs[R_V0];
              end
            end
            OP_ADD:  regs[x_dst] <= x_a + x_b;
            OP_SUB:  regs[x_dst] <= x_a - x_b;
            OP_MUL:  regs[x_dst] <= fx_mul(x_a, x_b);
            OP_ADDI: regs[x_dst] <= x_a + data_t'(signed'(x_src));
            OP_MOV:  regs[x_dst] <= x_b;
            OP_CMP:  flag <= (x_a > x_b);
            OP_JMP:  if (!ir.arg[10] || flag) begin
              pc <= IMEM_AW'(ir.arg[7:0]);
            end
            OP_END: begin
              st <= cur_learn ? S_WBW : S_IDLE;
              job_done <= !cur_learn;
            end
            default: ;
          endcase
        end
        S_ISSUE: begin
          if (cur_term.acc) acc_seen <= 1'b1;
          tidx <= tidx + 1'b1;
          if (tidx == nterms - 4'd1) st <= S_WAIT;
        end
        S_WAIT: if (ex_res_valid) begin
          regs[dst] <= ex_result;
          if (dst == 6'(R_W)) w_dirty <= 1'b1;
          st <= S_FETCH;
        end
        S_WBW: begin
          job_done <= 1'b1;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
      // stores also refresh the row buffer
      if (srow_we) for (int i = 0; i < 6; i++) if (srow_wmask[i]) srow[i] <= regs[R_S0+i];
    end
  end

endmodule
