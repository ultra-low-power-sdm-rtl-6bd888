// sdm_pkg -- shared constants, types and the hard-wired cross-point table of
// the SDM circuit-switched mesh NoC.
//
// A link of SDM_LINK_BITS wires is cut into SDM_NUM_UNITS units of SDM_UNIT_BITS
// (128 wires as 32 units of 4, the evaluated configuration). The lowest
// SDM_HW_UNITS units of every port (12 units = 48 wires) are tied to hard-wired
// cross-points, the other RC_UNITS units (20 units = 80 wires) to the
// programmable crossbar. Each unit also carries one valid wire next to its
// SDM_UNIT_BITS data wires; that sideband and the unit-to-direction table below
// are this implementation's choices, the widths are the evaluated ones.
//
// Circuits are loaded through one configuration write bus (cfg_t) that is
// broadcast to every node; each router and network interface picks up the
// writes addressed to its own node number.
package sdm_pkg;

  // Evaluated configuration: 128-bit links, 32 units of 4 bits, 48 of the
  // 128 wires on hard-wired cross-points, 1024-bit packets.
  localparam int unsigned SDM_LINK_BITS = 128;
  localparam int unsigned SDM_UNIT_BITS = 4;
  localparam int unsigned SDM_NUM_UNITS = SDM_LINK_BITS / SDM_UNIT_BITS;
  localparam int unsigned SDM_HW_BITS   = 48;
  localparam int unsigned SDM_HW_UNITS  = SDM_HW_BITS / SDM_UNIT_BITS;
  localparam int unsigned SDM_PKT_BITS  = 1024;

  // Mesh router ports.
  localparam int unsigned NUM_PORTS = 5;
  typedef enum logic [2:0] {
    PORT_N = 3'd0,  // to / from the neighbour with y-1
    PORT_E = 3'd1,  // to / from the neighbour with x+1
    PORT_S = 3'd2,  // to / from the neighbour with y+1
    PORT_W = 3'd3,  // to / from the neighbour with x-1
    PORT_L = 3'd4   // to / from the local network interface
  } port_e;

  // Configuration write bus.
  typedef enum logic [1:0] {
    CFG_XBAR  = 2'd0,  // programmable crossbar: addr = out_port*RC_UNITS + rc_unit,
                       //   data = {en, 7'b0, src} with src = in_port*RC_UNITS + rc_unit
    CFG_NI_TX = 2'd1,  // serializer:   addr = local unit, data = {en, 3'b0, chan[3:0], lane[7:0]}
    CFG_NI_RX = 2'd2   // deserializer: addr = local unit, data = {en, 3'b0, chan[3:0], lane[7:0]}
  } cfg_target_e;

  typedef struct packed {
    logic        we;
    logic [7:0]  node;    // y*MESH_X + x
    cfg_target_e target;
    logic [7:0]  addr;
    logic [15:0] data;
  } cfg_t;

  localparam int unsigned CFG_EN_BIT = 15;

  // Hard-wired cross-points. Hard-wired unit h arriving on input port p leaves
  // on unit h of output port hw_out(p, h % 4). Unit class k = h % 4 serves
  // one-hop circuits in one direction: the local port sends class 0 east,
  // 1 west, 2 north and 3 south, and the neighbour reached that way ejects the
  // same class to its local port. The remaining entries run straight through
  // so that, for every k, p -> hw_out(p, k) is a permutation of the five ports
  // without a U-turn and every hard-wired output wire has exactly one driver.
  function automatic port_e hw_out(port_e p, int unsigned h);
    unique case (h % 4)
      0: case (p) PORT_N: return PORT_S; PORT_E: return PORT_W; PORT_S: return PORT_N;
                  PORT_W: return PORT_L; default: return PORT_E; endcase
      1: case (p) PORT_N: return PORT_S; PORT_E: return PORT_L; PORT_S: return PORT_N;
                  PORT_W: return PORT_E; default: return PORT_W; endcase
      2: case (p) PORT_N: return PORT_S; PORT_E: return PORT_W; PORT_S: return PORT_L;
                  PORT_W: return PORT_E; default: return PORT_N; endcase
      default:
         case (p) PORT_N: return PORT_L; PORT_E: return PORT_W; PORT_S: return PORT_N;
                  PORT_W: return PORT_E; default: return PORT_S; endcase
    endcase
  endfunction

  // Input port of the neighbour that an output port leads to.
  function automatic port_e opposite(port_e p);
    case (p)
      PORT_N:  return PORT_S;
      PORT_S:  return PORT_N;
      PORT_E:  return PORT_W;
      PORT_W:  return PORT_E;
      default: return PORT_L;
    endcase
  endfunction

endpackage
