// router: five-port mesh router of the network on chip.
//
// Ports are numbered 0 local, 1 north, 2 east, 3 south, 4 west. A packet
// carries the remaining offset (dx, dy) to its destination node rather than
// an absolute address, so packets need no address translation when they
// leave the chip to a neighbouring one. Routing is dimension ordered (XY):
// while dx is not zero the packet goes east (dx > 0) or west and dx moves one
// step toward zero; then the same in y, south for dy > 0 (y grows from row 0
// at the top to row 23 at the bottom); at (0, 0) it is delivered to the
// local port.
//
// Each input has a two-entry FIFO and each output a register, so a packet
// crosses an idle router in two cycles, the per-router delay the design
// gives. Each output grants its requesting inputs in round-robin order. The
// design improves plain XY routing with the CXY and OE-FAR congestion-aware
// strategies from earlier work; those are not built here. The FIFO depth
// and arbitration are this implementation's choices.
module router
  import d3_pkg::*;
#(
  parameter int unsigned NP = 5
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid  [NP],
  output logic in_ready  [NP],
  input  pkt_t in_pkt    [NP],
  output logic out_valid [NP],
  input  logic out_ready [NP],
  output pkt_t out_pkt   [NP]
);

  localparam int unsigned PL = 0, PN = 1, PE = 2, PS = 3, PW = 4;

  // input FIFOs, two entries
  pkt_t f_d [NP][2];
  logic [1:0] f_n [NP];
  logic f_pop [NP];
  pkt_t head [NP];
  logic [2:0] dir [NP];
  pkt_t hop [NP];

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      head[i] = f_d[i][0];
      hop[i]  = head[i];
      if (head[i].dx > 0)      begin dir[i] = 3'(PE); hop[i].dx = head[i].dx - 1'b1; end
      else if (head[i].dx < 0) begin dir[i] = 3'(PW); hop[i].dx = head[i].dx + 1'b1; end
      else if (head[i].dy > 0) begin dir[i] = 3'(PS); hop[i].dy = head[i].dy - 1'b1; end
      else if (head[i].dy < 0) begin dir[i] = 3'(PN); hop[i].dy = head[i].dy + 1'b1; end
      else                          dir[i] = 3'(PL);
      in_ready[i] = (f_n[i] != 2'd2);
    end
  end

  function automatic int rot(logic [2:0] base, int k);
    return (int'(base) + k) % NP;
  endfunction

  // output arbitration
  logic [2:0] rr [NP];
  logic grant [NP][NP];   // [out][in]
  logic out_take [NP];

  always_comb begin
    for (int o = 0; o < NP; o++) begin
      out_take[o] = 1'b0;
      for (int i = 0; i < NP; i++) grant[o][i] = 1'b0;
      if (!out_valid[o] || out_ready[o]) begin
        for (int k = 0; k < NP; k++) begin
          if (!out_take[o] && f_n[rot(rr[o], k)] != 2'd0 && int'(dir[rot(rr[o], k)]) == o) begin
            grant[o][rot(rr[o], k)] = 1'b1;
            out_take[o] = 1'b1;
          end
        end
      end
    end
  end

  always_comb
    for (int i = 0; i < NP; i++) begin
      f_pop[i] = 1'b0;
      for (int o = 0; o < NP; o++) if (grant[o][i]) f_pop[i] = 1'b1;
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NP; i++) begin
        f_n[i] <= '0; f_d[i][0] <= '0; f_d[i][1] <= '0;
        out_valid[i] <= 1'b0; out_pkt[i] <= '0; rr[i] <= '0;
      end
    end else begin
      for (int i = 0; i < NP; i++) begin
        logic push;
        push = in_valid[i] && in_ready[i];
        unique case ({push, f_pop[i]})
          2'b10: begin
            f_d[i][f_n[i][0]] <= in_pkt[i];
            f_n[i] <= f_n[i] + 1'b1;
          end
          2'b01: begin
            f_d[i][0] <= f_d[i][1];
            f_n[i] <= f_n[i] - 1'b1;
          end
          2'b11: begin
            if (f_n[i] == 2'd1) f_d[i][0] <= in_pkt[i];
            else begin f_d[i][0] <= f_d[i][1]; f_d[i][1] <= in_pkt[i]; end
          end
          default: ;
        endcase
      end
      for (int o = 0; o < NP; o++) begin
        if (out_ready[o]) out_valid[o] <= 1'b0;
        for (int i = 0; i < NP; i++) if (grant[o][i]) begin
          out_valid[o] <= 1'b1;
          out_pkt[o]   <= hop[i];
          rr[o]        <= 3'((i + 1) % NP);
        end
      end
    end
  end

endmodule
