// aer_in: spike input side of a neuron core (AER IN with the axon-in walk).
//
// A spike packet names an axon-in linker (axon_id) and a source index. The
// linker word gives the first 16-bit half of the connection record, its type
// and a length, and the record is decoded in one of four compressed forms:
//   BCAST  (1*) one source to targets 0..len-1, one weight each, in order;
//   SHARED (2*) one half with the target neuron ID, one with the shared
//               weight (the index is ignored, so many sources share it);
//   GROUP  (3*) len target IDs, then a block of len weights per source
//               index: weight(i, j) at base + len + i*len + j;
//   RANGE  (4*) first target ID, then len weights for consecutive targets.
// For every synapse it emits (neuron, weight, half address) on syn_*; the
// core adds the weight to the neuron's input accumulator h.
//
// The axon-in memory is 32 bits wide and read synchronously (one cycle);
// every 16-bit half costs one read, so a synapse costs three to six cycles.
// The four forms and the record fields follow the axon-in organisation of
// the design; the bit layout of the linker and the exact placement of
// lengths and counts (held in the linker instead of inside the record) are
// this implementation's choices. While `hold` is high (the core is
// computing a time step) no new packet is accepted; `idle` reports that the
// current packet is finished.
//
// Lint notes: the packet's dx/dy bits are unused here because a packet that
// reaches its node has both offsets at zero.
module aer_in
  import d3_pkg::*;
#(
  parameter int unsigned AW = 16,         // axon-in word address width
  parameter int unsigned NID_BITS = NID_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                hold,
  input  logic                in_valid,
  output logic                in_ready,
  input  pkt_t                in_pkt,
  output logic [AW-1:0]       mem_addr,
  output logic                mem_rd,
  input  logic [31:0]         mem_rdata,
  output logic                syn_valid,
  output logic [NID_BITS-1:0] syn_nid,
  output data_t               syn_w,
  output logic [AW:0]         syn_haddr,
  output logic                idle
);

  typedef enum logic [2:0] {A_IDLE, A_LINK, A_LWAIT, A_ID, A_IDRD, A_IDWAIT, A_W, A_WWAIT} astate_e;
  astate_e st;
  ain_link_t lk;
  logic [NID_W-1:0]    idx;          // source index from the packet (always 12 bits)
  logic [NID_BITS-1:0] nid_q;
  logic [12:0] j;
  logic [AW:0] haddr;        // half address being read
  logic [15:0] half;

  ain_link_t rlk;
  assign rlk      = ain_link_t'(mem_rdata);
  assign half     = haddr[0] ? mem_rdata[31:16] : mem_rdata[15:0];
  assign in_ready = (st == A_IDLE) && !hold;
  assign idle     = (st == A_IDLE);

  // address of the ID half and the weight half of synapse j
  logic [AW:0] id_ha, w_ha;
  always_comb begin
    id_ha = (AW+1)'(lk.half_addr) + (AW+1)'(j);
    unique case (lk.typ)
      AXI_BCAST:  w_ha = (AW+1)'(lk.half_addr) + (AW+1)'(j);
      AXI_SHARED: w_ha = (AW+1)'(lk.half_addr) + 1'b1;
      AXI_GROUP:  w_ha = (AW+1)'(lk.half_addr) + (AW+1)'(lk.len)
                         + (AW+1)'(idx) * (AW+1)'(lk.len) + (AW+1)'(j);
      default:    w_ha = (AW+1)'(lk.half_addr) + 1'b1 + (AW+1)'(j);
    endcase
  end

  always_comb begin
    mem_rd   = 1'b0;
    mem_addr = haddr[AW:1];
    unique case (st)
      A_LINK: mem_rd = 1'b1;
      A_IDRD: mem_rd = 1'b1;
      A_W:    mem_rd = 1'b1;
      default: ;
    endcase
    if (st == A_LINK) mem_addr = AW'(lk.half_addr);   // linker word address held here
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; lk <= '0; idx <= '0; nid_q <= '0; j <= '0; haddr <= '0;
      syn_valid <= 1'b0; syn_nid <= '0; syn_w <= '0; syn_haddr <= '0;
    end else begin
      syn_valid <= 1'b0;
      unique case (st)
        A_IDLE: if (in_valid && in_ready) begin
          lk.half_addr <= 17'(in_pkt.axon_id);   // temporarily: linker address
          idx <= in_pkt.index;
          j   <= '0;
          st  <= A_LINK;
        end
        A_LINK: st <= A_LWAIT;
        A_LWAIT: begin
          lk <= rlk;
          if (rlk.len == '0 && rlk.typ != AXI_SHARED) st <= A_IDLE;
          else st <= A_ID;
          haddr <= (AW+1)'(rlk.half_addr);
        end
        A_ID: begin                       // read the target ID half if the form has one
          if (lk.typ == AXI_BCAST) begin
            nid_q <= NID_BITS'(j);
            haddr <= w_ha; st <= A_W;
          end else if (lk.typ == AXI_RANGE && j != '0) begin
            nid_q <= nid_q + 1'b1;
            haddr <= w_ha; st <= A_W;
          end else begin
            haddr <= (lk.typ == AXI_RANGE) ? (AW+1)'(lk.half_addr) : id_ha;
            st <= A_IDRD;
          end
        end
        A_IDRD: st <= A_IDWAIT;
        A_IDWAIT: begin
          nid_q <= NID_BITS'(half);
          haddr <= w_ha; st <= A_W;
        end
        A_W: st <= A_WWAIT;
        A_WWAIT: begin
          syn_valid <= 1'b1;
          syn_nid   <= nid_q;
          syn_w     <= data_t'(half);
          syn_haddr <= haddr;
          j <= j + 1'b1;
          if (lk.typ == AXI_SHARED || j + 1'b1 >= lk.len) st <= A_IDLE;
          else st <= A_ID;
        end
        default: st <= A_IDLE;
      endcase
    end
  end

endmodule
