// sdm_input_reg -- the pipeline register at one router input port.
//
// Every hop of a circuit (link plus router) is one clock cycle: the units that
// arrive on an input port are captured here and cross the switch in the next
// cycle. The register is sliced in units of UNIT_BITS data wires plus the
// unit's valid wire, matching the SDM partitioning of the link. The figure of
// the router draws this element as a "latch"; the text describes a register
// that forwards the data in the next cycle, and this design uses an
// edge-triggered register. Reset clears all valid wires and data.
//
// Interface: d is the link from the neighbour (or the local interface), q the
// registered copy, one cycle later.
module sdm_input_reg #(
  parameter int unsigned NUM_UNITS = sdm_pkg::SDM_NUM_UNITS,
  parameter int unsigned UNIT_BITS = sdm_pkg::SDM_UNIT_BITS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [NUM_UNITS-1:0][UNIT_BITS:0] d,
  output logic [NUM_UNITS-1:0][UNIT_BITS:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else        q <= d;
  end

endmodule
