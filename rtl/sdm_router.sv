// sdm_router -- five-port SDM circuit-switched mesh router.
//
// Every input port (N, E, S, W, local) is registered in an sdm_input_reg, so
// a circuit advances one hop per cycle. After the register each port's
// NUM_UNITS units split in two groups. Units 0 .. HW_UNITS-1 go through
// hard-wired cross-points: unit h of input port p is permanently wired to
// unit h of output port sdm_pkg::hw_out(p, h), with no switch in the path.
// Units HW_UNITS .. NUM_UNITS-1 go through the programmable sdm_crossbar,
// which may connect them to any reconfigurable unit of any output port.
// There is no buffering beyond the input register, no routing, arbitration or
// flow control: circuits are set up at configuration time and never contend.
//
// The split into a hard-wired and a programmable group with 48 of 128 wires
// hard-wired, the unit size and the input register follow the paper. Which
// units are hard-wired (the lowest ones) and where each one leads (the
// hw_out table) are this design's choices; the paper does not give them.
//
// Interface: in_link[p] / out_link[p] carry {valid, data} per unit, indexed by
// sdm_pkg::port_e. Latency: output = input registered once (1 cycle).
module sdm_router
  import sdm_pkg::*;
#(
  parameter int unsigned NODE_ID   = 0,
  parameter int unsigned NUM_UNITS = SDM_NUM_UNITS,
  parameter int unsigned UNIT_BITS = SDM_UNIT_BITS,
  parameter int unsigned HW_UNITS  = SDM_HW_UNITS
) (
  input  logic                                             clk,
  input  logic                                             rst_n,
  input  cfg_t                                             cfg,
  input  logic [NUM_PORTS-1:0][NUM_UNITS-1:0][UNIT_BITS:0] in_link,
  output logic [NUM_PORTS-1:0][NUM_UNITS-1:0][UNIT_BITS:0] out_link
);

  localparam int unsigned RC_UNITS = NUM_UNITS - HW_UNITS;

  logic [NUM_PORTS-1:0][NUM_UNITS-1:0][UNIT_BITS:0] in_q;
  logic [NUM_PORTS-1:0][RC_UNITS-1:0][UNIT_BITS:0]  rc_in, rc_out;

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    sdm_input_reg #(.NUM_UNITS(NUM_UNITS), .UNIT_BITS(UNIT_BITS)) u_inreg (
      .clk, .rst_n, .d(in_link[p]), .q(in_q[p])
    );
    for (genvar u = 0; u < RC_UNITS; u++) begin : g_rc
      assign rc_in[p][u]                 = in_q[p][HW_UNITS+u];
      assign out_link[p][HW_UNITS+u]     = rc_out[p][u];
    end
    // Hard-wired cross-points: fixed wires from input unit (p, h) to
    // output unit (hw_out(p, h), h).
    for (genvar h = 0; h < HW_UNITS; h++) begin : g_hw
      assign out_link[hw_out(port_e'(p), h)][h] = in_q[p][h];
    end
  end

  sdm_crossbar #(.NODE_ID(NODE_ID), .RC_UNITS(RC_UNITS), .UNIT_BITS(UNIT_BITS)) u_xbar (
    .clk, .rst_n, .cfg, .in_units(rc_in), .out_units(rc_out)
  );

endmodule
