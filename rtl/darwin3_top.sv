// darwin3_top: the chip, a 24 x 24 mesh of nodes joined by a network on chip.
//
// Every mesh position (x, y) has a five-port router. The node at (0, 0) is
// the management processor, a RISC-V core that is not part of this RTL: its
// router's local port is brought out as riscv_*. Every other position holds
// a neuron core; in each 4 x 4 group of tiles the columns x mod 4 = 0, 1 are
// big tiles (axon-in 65536 words) and columns 2, 3 small tiles (28672
// words), after the floor plan of the chip (6 x 6 groups of 4 x 4 tiles).
// Each router-router and router-node connection runs through a two-cycle
// channel stage (async_link), standing in for the asynchronous click-element
// interfaces that make the chip globally asynchronous and locally
// synchronous. A spike therefore takes 2*N cycles in N routers plus
// 2*(N+1) cycles in the N+1 channel stages, the delay the design states.
//
// Router ports on the four chip edges are brought out as north_*, east_*,
// south_*, west_* arrays: the inter-chip communication units (compression
// and decompression to neighbouring chips) are not part of this RTL, and
// because packets carry relative offsets they can be passed to a
// neighbouring chip unchanged. The chip-wide time step comes from tik_gen;
// reset is released by reset_gen. Configuration is written over cfg into
// the node selected by cfg_x, cfg_y, or into all neuron cores when cfg_all
// is set.
//
// Lint notes: the one-cycle tick pulse of tik_gen and each core's own step
// counter are left unused here (cores follow gstep; the per-core counters
// are read through the hierarchy in simulation).
module darwin3_top
  import d3_pkg::*;
#(
  parameter int unsigned MESH_X     = 24,
  parameter int unsigned MESH_Y     = 24,
  parameter int unsigned N_NEURONS  = 4096,
  parameter int unsigned AIN_BIG    = 65536,
  parameter int unsigned AIN_SMALL  = 28672,
  parameter int unsigned AOUT_DEPTH = 16384
) (
  input  logic        clk,
  input  logic        rst_pad_n,
  // time step
  input  logic        tick_enable,
  input  logic [31:0] tick_period,
  // configuration
  input  cfg_t        cfg,
  input  logic [4:0]  cfg_x,
  input  logic [4:0]  cfg_y,
  input  logic        cfg_all,
  // management processor port at node (0,0)
  input  logic        riscv_out_valid,
  output logic        riscv_out_ready,
  input  pkt_t        riscv_out_pkt,
  output logic        riscv_in_valid,
  input  logic        riscv_in_ready,
  output pkt_t        riscv_in_pkt,
  // chip edges, toward the inter-chip communication units
  output logic        north_valid [MESH_X], input logic north_ready [MESH_X], output pkt_t north_pkt [MESH_X],
  input  logic        north_in_valid [MESH_X], output logic north_in_ready [MESH_X], input pkt_t north_in_pkt [MESH_X],
  output logic        south_valid [MESH_X], input logic south_ready [MESH_X], output pkt_t south_pkt [MESH_X],
  input  logic        south_in_valid [MESH_X], output logic south_in_ready [MESH_X], input pkt_t south_in_pkt [MESH_X],
  output logic        west_valid [MESH_Y], input logic west_ready [MESH_Y], output pkt_t west_pkt [MESH_Y],
  input  logic        west_in_valid [MESH_Y], output logic west_in_ready [MESH_Y], input pkt_t west_in_pkt [MESH_Y],
  output logic        east_valid [MESH_Y], input logic east_ready [MESH_Y], output pkt_t east_pkt [MESH_Y],
  input  logic        east_in_valid [MESH_Y], output logic east_in_ready [MESH_Y], input pkt_t east_in_pkt [MESH_Y],
  // status
  output logic        any_busy,
  output logic [31:0] total_syn_events,
  output logic [31:0] total_spikes,
  output logic [31:0] total_overruns,
  output logic [31:0] total_stall_in,
  output logic [31:0] total_stall_spike
);

  localparam int unsigned PL = 0, PN = 1, PE = 2, PS = 3, PW = 4;
  localparam int unsigned PKT_W = $bits(pkt_t);

  logic rst_n, gstep, tick;

  reset_gen u_rst (.clk, .rst_pad_n, .rst_n);
  tik_gen   u_tik (.clk, .rst_n, .enable(tick_enable), .period(tick_period), .gstep, .tick);

  // router port signals [y][x][port]
  logic ri_v [MESH_Y][MESH_X][5];
  logic ri_r [MESH_Y][MESH_X][5];
  pkt_t ri_d [MESH_Y][MESH_X][5];
  logic ro_v [MESH_Y][MESH_X][5];
  logic ro_r [MESH_Y][MESH_X][5];
  pkt_t ro_d [MESH_Y][MESH_X][5];

  logic        busy_n   [MESH_Y][MESH_X];
  logic [31:0] syn_n    [MESH_Y][MESH_X];
  logic [31:0] spk_n    [MESH_Y][MESH_X];
  logic [31:0] ovr_n    [MESH_Y][MESH_X];
  logic [31:0] stin_n   [MESH_Y][MESH_X];
  logic [31:0] stsp_n   [MESH_Y][MESH_X];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x

      router u_router (
        .clk, .rst_n,
        .in_valid(ri_v[y][x]), .in_ready(ri_r[y][x]), .in_pkt(ri_d[y][x]),
        .out_valid(ro_v[y][x]), .out_ready(ro_r[y][x]), .out_pkt(ro_d[y][x])
      );

      // ---- east neighbour links (both directions)
      if (x + 1 < MESH_X) begin : g_ew
        async_link #(.W(PKT_W)) u_e (
          .clk, .rst_n,
          .in_valid(ro_v[y][x][PE]), .in_ready(ro_r[y][x][PE]), .in_data(ro_d[y][x][PE]),
          .out_valid(ri_v[y][x+1][PW]), .out_ready(ri_r[y][x+1][PW]), .out_data(ri_d[y][x+1][PW]));
        async_link #(.W(PKT_W)) u_w (
          .clk, .rst_n,
          .in_valid(ro_v[y][x+1][PW]), .in_ready(ro_r[y][x+1][PW]), .in_data(ro_d[y][x+1][PW]),
          .out_valid(ri_v[y][x][PE]), .out_ready(ri_r[y][x][PE]), .out_data(ri_d[y][x][PE]));
      end else begin : g_eedge
        assign east_valid[y]    = ro_v[y][x][PE];
        assign ro_r[y][x][PE]   = east_ready[y];
        assign east_pkt[y]      = ro_d[y][x][PE];
        assign ri_v[y][x][PE]   = east_in_valid[y];
        assign east_in_ready[y] = ri_r[y][x][PE];
        assign ri_d[y][x][PE]   = east_in_pkt[y];
      end
      if (x == 0) begin : g_wedge
        assign west_valid[y]    = ro_v[y][x][PW];
        assign ro_r[y][x][PW]   = west_ready[y];
        assign west_pkt[y]      = ro_d[y][x][PW];
        assign ri_v[y][x][PW]   = west_in_valid[y];
        assign west_in_ready[y] = ri_r[y][x][PW];
        assign ri_d[y][x][PW]   = west_in_pkt[y];
      end

      // ---- south neighbour links
      if (y + 1 < MESH_Y) begin : g_ns
        async_link #(.W(PKT_W)) u_s (
          .clk, .rst_n,
          .in_valid(ro_v[y][x][PS]), .in_ready(ro_r[y][x][PS]), .in_data(ro_d[y][x][PS]),
          .out_valid(ri_v[y+1][x][PN]), .out_ready(ri_r[y+1][x][PN]), .out_data(ri_d[y+1][x][PN]));
        async_link #(.W(PKT_W)) u_n (
          .clk, .rst_n,
          .in_valid(ro_v[y+1][x][PN]), .in_ready(ro_r[y+1][x][PN]), .in_data(ro_d[y+1][x][PN]),
          .out_valid(ri_v[y][x][PS]), .out_ready(ri_r[y][x][PS]), .out_data(ri_d[y][x][PS]));
      end else begin : g_sedge
        assign south_valid[x]    = ro_v[y][x][PS];
        assign ro_r[y][x][PS]    = south_ready[x];
        assign south_pkt[x]      = ro_d[y][x][PS];
        assign ri_v[y][x][PS]    = south_in_valid[x];
        assign south_in_ready[x] = ri_r[y][x][PS];
        assign ri_d[y][x][PS]    = south_in_pkt[x];
      end
      if (y == 0) begin : g_nedge
        assign north_valid[x]    = ro_v[y][x][PN];
        assign ro_r[y][x][PN]    = north_ready[x];
        assign north_pkt[x]      = ro_d[y][x][PN];
        assign ri_v[y][x][PN]    = north_in_valid[x];
        assign north_in_ready[x] = ri_r[y][x][PN];
        assign ri_d[y][x][PN]    = north_in_pkt[x];
      end

      // ---- the node on the local port
      if (x == 0 && y == 0) begin : g_riscv
        async_link #(.W(PKT_W)) u_li (
          .clk, .rst_n,
          .in_valid(riscv_out_valid), .in_ready(riscv_out_ready), .in_data(riscv_out_pkt),
          .out_valid(ri_v[y][x][PL]), .out_ready(ri_r[y][x][PL]), .out_data(ri_d[y][x][PL]));
        async_link #(.W(PKT_W)) u_lo (
          .clk, .rst_n,
          .in_valid(ro_v[y][x][PL]), .in_ready(ro_r[y][x][PL]), .in_data(ro_d[y][x][PL]),
          .out_valid(riscv_in_valid), .out_ready(riscv_in_ready), .out_data(riscv_in_pkt));
        assign busy_n[y][x] = 1'b0;
        assign syn_n[y][x]  = '0;
        assign spk_n[y][x]  = '0;
        assign ovr_n[y][x]  = '0;
        assign stin_n[y][x] = '0;
        assign stsp_n[y][x] = '0;
      end else begin : g_core
        logic nv, nr, cv, cr;
        pkt_t nd, cd;
        logic [15:0] steps, ovr;
        cfg_t ccfg;
        always_comb begin
          ccfg = cfg;
          ccfg.we = cfg.we && (cfg_all || (int'(cfg_x) == x && int'(cfg_y) == y));
        end
        neuron_core #(
          .N_NEURONS (N_NEURONS),
          .AIN_DEPTH ((x % 4) < 2 ? AIN_BIG : AIN_SMALL),
          .AOUT_DEPTH(AOUT_DEPTH)
        ) u_core (
          .clk, .rst_n, .gstep, .cfg(ccfg),
          .in_valid(cv), .in_ready(cr), .in_pkt(cd),
          .out_valid(nv), .out_ready(nr), .out_pkt(nd),
          .busy(busy_n[y][x]), .step_count(steps), .overruns(ovr),
          .syn_events(syn_n[y][x]), .spikes_out(spk_n[y][x]),
          .stall_in(stin_n[y][x]), .stall_spike_cycles(stsp_n[y][x])
        );
        assign ovr_n[y][x] = 32'(ovr);
        async_link #(.W(PKT_W)) u_li (
          .clk, .rst_n,
          .in_valid(nv), .in_ready(nr), .in_data(nd),
          .out_valid(ri_v[y][x][PL]), .out_ready(ri_r[y][x][PL]), .out_data(ri_d[y][x][PL]));
        async_link #(.W(PKT_W)) u_lo (
          .clk, .rst_n,
          .in_valid(ro_v[y][x][PL]), .in_ready(ro_r[y][x][PL]), .in_data(ro_d[y][x][PL]),
          .out_valid(cv), .out_ready(cr), .out_data(cd));
      end
    end
  end

  // status reduction
  always_comb begin
    any_busy = 1'b0;
    total_syn_events = '0; total_spikes = '0; total_overruns = '0;
    total_stall_in = '0; total_stall_spike = '0;
    for (int y = 0; y < MESH_Y; y++)
      for (int x = 0; x < MESH_X; x++) begin
        any_busy          = any_busy | busy_n[y][x];
        total_syn_events  = total_syn_events + syn_n[y][x];
        total_spikes      = total_spikes + spk_n[y][x];
        total_overruns    = total_overruns + ovr_n[y][x];
        total_stall_in    = total_stall_in + stin_n[y][x];
        total_stall_spike = total_stall_spike + stsp_n[y][x];
      end
  end

endmodule
