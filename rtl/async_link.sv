// async_link: channel stage between two synchronous islands.
//
// In the chip, routers and nodes are joined by asynchronous interfaces built
// from click elements, which move a word across the boundary in two cycles
// and make the chip globally asynchronous, locally synchronous. This module
// is a synchronous stand-in with the same interface behaviour: a two-slot
// valid/ready pipeline whose latency is exactly two cycles and which keeps
// full throughput. The click-element circuit itself is not modelled.
//
// Interface: in_valid/in_ready/in_data, out_valid/out_ready/out_data; a word
// moves when valid and ready are both high. Data is never dropped or
// duplicated while out_ready is low.
module async_link #(
  parameter int unsigned W = 40
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  logic         v0, v1;
  logic [W-1:0] d0, d1;
  logic         rdy1, rdy0;

  assign rdy1      = !v1 || out_ready;
  assign rdy0      = !v0 || rdy1;
  assign in_ready  = rdy0;
  assign out_valid = v1;
  assign out_data  = d1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0; v1 <= 1'b0; d0 <= '0; d1 <= '0;
    end else begin
      if (rdy1) begin v1 <= v0; d1 <= d0; end
      if (rdy0) begin v0 <= in_valid; d0 <= in_data; end
    end
  end

  // handshake rule: a presented word stays until taken
  property p_hold;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  assert property (p_hold);
endmodule
