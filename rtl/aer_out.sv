// aer_out: spike output side of a neuron core (axon-out walk and AER OUT).
//
// Fired neuron IDs from the controller wait in a small FIFO. For each, the
// axon-out linker at the neuron's address gives the first entry of its
// chain and the source index to send. Entries {last flag, dx, dy, axon-in
// ID} are read one after another until an entry with the last flag set;
// each becomes one spike packet {dx, dy, axon-in ID, index} for the router.
// A neuron with several target nodes uses a chain with the last flag clear
// on all but the final entry (1# in the design), and several neurons may
// point their linkers at the same chain (2#), differing only in index.
//
// Memory: axon-out is 32 bits wide, read synchronously. The linker region
// is the first 2^NID_BITS words, one per neuron, as the design's
// (D2 - N) fan-out budget implies. A packet leaves every two cycles when
// the router accepts it; while pkt_ready is low the walk stalls. The FIFO
// depth and the relative (dx, dy) form of the node ID are this
// implementation's choices.
//
// Lint notes: the reserved bits of the linker and entry words are unused.
module aer_out
  import d3_pkg::*;
#(
  parameter int unsigned AW = 14,
  parameter int unsigned NID_BITS = NID_W,
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                spk_valid,
  output logic                spk_ready,
  input  logic [NID_BITS-1:0] spk_nid,
  output logic [AW-1:0]       mem_addr,
  output logic                mem_rd,
  input  logic [31:0]         mem_rdata,
  output logic                pkt_valid,
  input  logic                pkt_ready,
  output pkt_t                pkt,
  output logic                idle
);

  localparam int unsigned FA = $clog2(FIFO_DEPTH);
  logic [NID_BITS-1:0] fifo [FIFO_DEPTH];
  logic [FA:0] wp, rp;
  logic fifo_empty, fifo_full, pop;
  assign fifo_empty = (wp == rp);
  assign fifo_full  = (wp[FA] != rp[FA]) && (wp[FA-1:0] == rp[FA-1:0]);
  assign spk_ready  = !fifo_full;

  typedef enum logic [2:0] {O_IDLE, O_LINK, O_LWAIT, O_ENT, O_EWAIT, O_SEND} ostate_e;
  ostate_e st;
  logic [AW-1:0] ptr;
  logic [NID_W-1:0]    idx;          // source index sent with each packet
  aout_entry_t ent;
  aout_link_t  rlk;
  assign rlk = aout_link_t'(mem_rdata);

  assign pop = (st == O_IDLE) && !fifo_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0;
      for (int i = 0; i < FIFO_DEPTH; i++) fifo[i] <= '0;
    end else begin
      if (spk_valid && spk_ready) begin
        fifo[wp[FA-1:0]] <= spk_nid;
        wp <= wp + 1'b1;
      end
      if (pop) rp <= rp + 1'b1;
    end
  end

  always_comb begin
    mem_rd   = (st == O_LINK) || (st == O_ENT);
    mem_addr = ptr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= O_IDLE; ptr <= '0; idx <= '0; ent <= '0;
    end else begin
      unique case (st)
        O_IDLE: if (pop) begin
          ptr <= AW'(fifo[rp[FA-1:0]]);
          st  <= O_LINK;
        end
        O_LINK:  st <= O_LWAIT;
        O_LWAIT: begin
          ptr <= AW'(rlk.addr);
          idx <= rlk.index;
          st  <= O_ENT;
        end
        O_ENT:   st <= O_EWAIT;
        O_EWAIT: begin
          ent <= aout_entry_t'(mem_rdata);
          st  <= O_SEND;
        end
        O_SEND: if (pkt_ready) begin
          if (ent.lf) st <= O_IDLE;
          else begin
            ptr <= ptr + 1'b1;
            st  <= O_ENT;
          end
        end
        default: st <= O_IDLE;
      endcase
    end
  end

  assign pkt_valid = (st == O_SEND);
  assign pkt = '{dx: ent.dx, dy: ent.dy, axon_id: ent.axon_id, index: idx};
  assign idle = (st == O_IDLE) && fifo_empty;

endmodule
