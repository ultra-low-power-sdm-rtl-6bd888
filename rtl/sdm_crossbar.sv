// sdm_crossbar -- programmable SDM crossbar of one router.
//
// Unlike a conventional crossbar that switches a whole port, this one switches
// units of UNIT_BITS wires independently: every output unit of every output
// port can be connected to any input unit of any input port. Only the
// reconfigurable units (RC_UNITS per port) pass through it; the hard-wired
// units bypass it in the router. Each output unit has a configuration register
// {en, src}, where src = in_port*RC_UNITS + in_unit; an output unit whose
// register is disabled drives zeros (valid low). The registers are written
// through the broadcast configuration bus with target CFG_XBAR and this
// router's node number, addr = out_port*RC_UNITS + out_unit. Register
// per-output-unit selection, the zero default and the write bus are this
// design's choices; the unit granularity and any-to-any reach follow the paper.
//
// Timing: the data path is purely combinational (the router's input register
// provides the pipeline stage). A configuration write takes effect on the
// next clock edge.
module sdm_crossbar
  import sdm_pkg::*;
#(
  parameter int unsigned NODE_ID   = 0,
  parameter int unsigned RC_UNITS  = SDM_NUM_UNITS - SDM_HW_UNITS,
  parameter int unsigned UNIT_BITS = SDM_UNIT_BITS
) (
  input  logic                                            clk,
  input  logic                                            rst_n,
  input  cfg_t                                            cfg,
  input  logic [NUM_PORTS-1:0][RC_UNITS-1:0][UNIT_BITS:0] in_units,
  output logic [NUM_PORTS-1:0][RC_UNITS-1:0][UNIT_BITS:0] out_units
);

  localparam int unsigned NSRC  = NUM_PORTS * RC_UNITS;
  localparam int unsigned SEL_W = $clog2(NSRC);

  typedef struct packed {
    logic             en;
    logic [SEL_W-1:0] src;
  } xsel_t;

  xsel_t sel [NSRC];

  logic [NSRC-1:0][UNIT_BITS:0] src_flat;
  assign src_flat = in_units;

  logic cfg_hit;
  assign cfg_hit = cfg.we && cfg.target == CFG_XBAR && cfg.node == 8'(NODE_ID)
                   && cfg.addr < 8'(NSRC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSRC; i++) sel[i] <= '0;
    end else if (cfg_hit) begin
      sel[SEL_W'(cfg.addr)].en  <= cfg.data[CFG_EN_BIT];
      sel[SEL_W'(cfg.addr)].src <= cfg.data[SEL_W-1:0];
    end
  end

  always_comb begin
    for (int q = 0; q < NUM_PORTS; q++)
      for (int u = 0; u < RC_UNITS; u++) begin
        automatic logic [SEL_W-1:0] o = SEL_W'(q * RC_UNITS + u);
        out_units[q][u] = sel[o].en ? src_flat[sel[o].src] : '0;
      end
  end

  // A selection must name an existing input unit.
  a_src_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    cfg_hit && cfg.data[CFG_EN_BIT] |-> cfg.data[SEL_W-1:0] < SEL_W'(NSRC));

endmodule
