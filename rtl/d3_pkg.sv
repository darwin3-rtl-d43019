// d3_pkg: types and constants shared by the neuromorphic core and the mesh.
//
// It holds the 16-bit instruction format (5-bit opcode, 11-bit operand), the
// unified register map of the neuron core, the spike packet carried by the
// network on chip, and the configuration write bus used to fill the core
// memories. Opcode names, field widths and register names follow the ISA
// tables of the design; the numeric opcode values, the register numbering,
// the fixed-point format and the packet layout are this implementation's own
// choices.
package d3_pkg;

  // Data word: state variables, parameters and weights are signed fixed point
  // with FRAC fractional bits.
  localparam int unsigned DATA_W = 16;
  localparam int unsigned FRAC   = 8;
  typedef logic signed [DATA_W-1:0] data_t;

  // Neuron index width: up to 4096 neurons per core.
  localparam int unsigned NID_W       = 12;

  // Instruction: {opcode[15:11], operand[10:0]}.
  typedef enum logic [4:0] {
    OP_NOP   = 5'd0,
    OP_LSIS  = 5'd1,   // load/store inference state S0-S5
    OP_LDIP  = 5'd2,   // load inference parameters p0-p7, c0-c2
    OP_LSLS  = 5'd3,   // load/store learning state LS0-LS9
    OP_LDLP  = 5'd4,   // load learning parameters LP0-LP6, LC0-LC3
    OP_UPTIS = 5'd5,   // update I, g or v_adp
    OP_UPTVM = 5'd6,   // update membrane potential
    OP_UPTLS = 5'd7,   // LS_k = LP_l * LS_m + LC_n
    OP_UPTWT = 5'd8,   // W = W + LP_m * prod(LS_n)
    OP_UPTTS = 5'd9,   // RT_k = P_l * S_m + C_n
    OP_GSPRS = 5'd10,  // spike generation, threshold, adaptation, reset
    OP_ADD   = 5'd16,  // extended: dst = dst + src
    OP_SUB   = 5'd17,  // extended: dst = dst - src
    OP_MUL   = 5'd18,  // extended: dst = dst * src (fixed point)
    OP_ADDI  = 5'd19,  // extended: dst = dst + signed imm6
    OP_MOV   = 5'd20,  // extended: dst = src
    OP_CMP   = 5'd21,  // extended: flag = (dst > src)
    OP_JMP   = 5'd22,  // extended: jump (operand[10]=1: only if flag)
    OP_END   = 5'd31   // end of the per-neuron program
  } opcode_e;

  typedef struct packed {
    opcode_e     op;
    logic [10:0] arg;
  } instr_t;

  // Unified register map, 6-bit index. The first 32 can be written by the
  // extended instructions (5-bit destination field).
  localparam int unsigned R_S0  = 0;   // S0..S5 : v_m, g, I, h, v_adp, v_th
  localparam int unsigned R_W   = 6;   // w
  localparam int unsigned R_V0  = 7;   // v0 (reset potential)
  localparam int unsigned R_IP0 = 8;   // IP0..IP7
  localparam int unsigned R_IC0 = 16;  // IC0..IC2
  localparam int unsigned R_TR0 = 19;  // TR0..TR7 (RT in the code examples)
  localparam int unsigned R_LP0 = 27;  // LP0..LP7 (27..34)
  localparam int unsigned R_LC0 = 35;  // LC0..LC7 (35..42)
  localparam int unsigned R_LS0 = 43;  // LS0..LS9 (43..52)
  localparam int unsigned NREGS = 53;

  // Inference state row: S0-S5, IP0-IP7, IC0-IC2 (17 fields).
  localparam int unsigned SROW_FIELDS = 17;
  // Learning row: LS0-LS9, LP0-LP7, LC0-LC7, post-synaptic neuron (27 fields).
  localparam int unsigned LROW_FIELDS = 27;
  localparam int unsigned LROW_POST   = 26;
  // Fields a program can store back: S0-S5 and LS0-LS9 (parameters and
  // constants are written by configuration only).
  localparam int unsigned SROW_STATE  = 6;
  localparam int unsigned LROW_STATE  = 10;

  // Linker types of the axon-in structure (figure labels 1*..4*).
  typedef enum logic [1:0] {
    AXI_BCAST  = 2'd0,  // 1*: one source to consecutive targets, weights in order
    AXI_SHARED = 2'd1,  // 2*: one target neuron, one shared weight
    AXI_GROUP  = 2'd2,  // 3*: target ID list, weight block per source index
    AXI_RANGE  = 2'd3   // 4*: first target ID + count, weights in order
  } axi_type_e;

  // Spike packet: relative offset to the destination node plus the axon-in
  // linker to use there and the source index.
  localparam int unsigned OFS_W  = 6;
  localparam int unsigned AXID_W = 16;
  typedef struct packed {
    logic signed [OFS_W-1:0] dx;
    logic signed [OFS_W-1:0] dy;
    logic [AXID_W-1:0]       axon_id;
    logic [NID_W-1:0]        index;
  } pkt_t;

  // Axon-out entry: {last flag, dx, dy, axon-in ID} in 32 bits.
  typedef struct packed {
    logic [2:0]              rsvd;
    logic                    lf;
    logic signed [OFS_W-1:0] dx;
    logic signed [OFS_W-1:0] dy;
    logic [AXID_W-1:0]       axon_id;
  } aout_entry_t;

  // Axon-out linker: {entry address, source index} in 32 bits.
  typedef struct packed {
    logic [5:0]       rsvd;
    logic [13:0]      addr;
    logic [NID_W-1:0] index;
  } aout_link_t;

  // Axon-in linker: {address of first 16-bit half, type, length}.
  typedef struct packed {
    logic [16:0] half_addr;
    axi_type_e   typ;
    logic [12:0] len;
  } ain_link_t;

  // Configuration bus targets.
  typedef enum logic [2:0] {
    CFG_IMEM  = 3'd0,  // instruction memory, 16-bit words
    CFG_SMEM  = 3'd1,  // inference state row field: addr = {neuron, field[4:0]}
    CFG_LMEM  = 3'd2,  // learning row field: addr = {synapse, field[4:0]}
    CFG_AIN   = 3'd3,  // axon-in memory, 32-bit words
    CFG_AOUT  = 3'd4,  // axon-out memory, 32-bit words
    CFG_REG   = 3'd5   // core registers, see neuron_core
  } cfg_sel_e;

  typedef struct packed {
    logic        we;
    cfg_sel_e    sel;
    logic [21:0] addr;
    logic [31:0] data;
  } cfg_t;

  // Fixed-point multiply with truncation to DATA_W.
  function automatic data_t fx_mul(data_t a, data_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return data_t'(p >>> FRAC);
  endfunction

endpackage
