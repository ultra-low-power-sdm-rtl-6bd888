// sdm_noc -- SDM circuit-switched 2-D mesh network-on-chip (top level).
//
// MESH_X x MESH_Y nodes, node n = y*MESH_X + x. Each node has one sdm_router,
// one sdm_ni_tx (packets leaving the node's core) and one sdm_ni_rx (packets
// arriving for it). Neighbouring routers are joined by a link of NUM_UNITS
// units in each direction; each unit is UNIT_BITS data wires plus a valid
// wire. Router inputs on the mesh edge are tied to zero, their outputs are
// left unused.
//
// A communication flow is served by a circuit: a chain of units, one per link
// and router on a minimal path, switched either by hard-wired cross-points or
// by programmable crossbar settings, and a set of lanes in the two network
// interfaces. A flow may use several paths of equal length (multi-path). All
// circuits are loaded before traffic starts by writing the crossbar and
// interface registers through the broadcast cfg bus (see sdm_pkg); finding
// them (task mapping and route allocation) is a design-time task outside the
// hardware.
//
// Latency of a packet on a circuit through R routers (hops + 1): the first
// flit is on the source interface's output one cycle after the packet is
// taken, reaches the destination interface R cycles later, and pkt_valid
// rises one cycle after the last flit arrives. With flit width W bits the
// packet therefore takes 1 + R + ceil(PKT_BITS/W) cycles from acceptance to
// delivery.
//
// The mesh, the router and the per-flow width follow the paper. The mesh size
// (4x4, the size used for the MWD and VOPD applications), the number of
// interface channels and the configuration bus are this design's choices.
module sdm_noc
  import sdm_pkg::*;
#(
  parameter int unsigned MESH_X    = 4,
  parameter int unsigned MESH_Y    = 4,
  parameter int unsigned NUM_UNITS = SDM_NUM_UNITS,
  parameter int unsigned UNIT_BITS = SDM_UNIT_BITS,
  parameter int unsigned HW_UNITS  = SDM_HW_UNITS,
  parameter int unsigned NUM_CH    = 4,
  parameter int unsigned PKT_BITS  = SDM_PKT_BITS
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  input  cfg_t                                         cfg,
  input  logic [MESH_X*MESH_Y-1:0][NUM_CH-1:0]               tx_valid,
  output logic [MESH_X*MESH_Y-1:0][NUM_CH-1:0]               tx_ready,
  input  logic [MESH_X*MESH_Y-1:0][NUM_CH-1:0][PKT_BITS-1:0] tx_data,
  output logic [MESH_X*MESH_Y-1:0][NUM_CH-1:0]               rx_valid,
  output logic [MESH_X*MESH_Y-1:0][NUM_CH-1:0][PKT_BITS-1:0] rx_data
);

  localparam int unsigned NODES = MESH_X * MESH_Y;

  typedef logic [NUM_UNITS-1:0][UNIT_BITS:0] link_t;

  link_t [NUM_PORTS-1:0] rin  [NODES];
  link_t [NUM_PORTS-1:0] rout [NODES];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int unsigned N = y * MESH_X + x;

      // Links: a router's input port p is fed by the neighbour's output
      // port that faces it.
      if (y > 0) begin : g_n_link
        assign rin[N][PORT_N] = rout[N-MESH_X][PORT_S];
      end else begin : g_n_edge
        assign rin[N][PORT_N] = '0;
      end
      if (y < MESH_Y - 1) begin : g_s_link
        assign rin[N][PORT_S] = rout[N+MESH_X][PORT_N];
      end else begin : g_s_edge
        assign rin[N][PORT_S] = '0;
      end
      if (x > 0) begin : g_w_link
        assign rin[N][PORT_W] = rout[N-1][PORT_E];
      end else begin : g_w_edge
        assign rin[N][PORT_W] = '0;
      end
      if (x < MESH_X - 1) begin : g_e_link
        assign rin[N][PORT_E] = rout[N+1][PORT_W];
      end else begin : g_e_edge
        assign rin[N][PORT_E] = '0;
      end

      sdm_router #(
        .NODE_ID(N), .NUM_UNITS(NUM_UNITS), .UNIT_BITS(UNIT_BITS), .HW_UNITS(HW_UNITS)
      ) u_router (
        .clk, .rst_n, .cfg, .in_link(rin[N]), .out_link(rout[N])
      );

      sdm_ni_tx #(
        .NODE_ID(N), .NUM_UNITS(NUM_UNITS), .UNIT_BITS(UNIT_BITS),
        .NUM_CH(NUM_CH), .PKT_BITS(PKT_BITS)
      ) u_tx (
        .clk, .rst_n, .cfg,
        .pkt_valid(tx_valid[N]), .pkt_ready(tx_ready[N]), .pkt_data(tx_data[N]),
        .out_units(rin[N][PORT_L])
      );

      sdm_ni_rx #(
        .NODE_ID(N), .NUM_UNITS(NUM_UNITS), .UNIT_BITS(UNIT_BITS),
        .NUM_CH(NUM_CH), .PKT_BITS(PKT_BITS)
      ) u_rx (
        .clk, .rst_n, .cfg, .in_units(rout[N][PORT_L]),
        .pkt_valid(rx_valid[N]), .pkt_data(rx_data[N])
      );
    end
  end

endmodule
