// sdm_ni_tx -- source side of a network interface: packet serializer.
//
// A node may be the source of several flows, each with its own circuit. The
// interface has NUM_CH channels, one per flow leaving the node. Each unit of
// the local router input port is assigned by configuration to at most one
// channel and given a lane number inside it; a channel with W lanes sends
// flits of W*UNIT_BITS bits, i.e. exactly the width of its circuit. Lane l of
// a flit carries bits [l*UNIT_BITS +: UNIT_BITS] of what is left of the
// packet; the packet register then shifts down by the flit width, so the
// serializer is a shift register with a configurable step. A packet of
// PKT_BITS takes ceil(PKT_BITS / (W*UNIT_BITS)) cycles; the last flit is
// padded with the zeros shifted in. A multi-path circuit is just a channel
// whose lanes are routed along different, equally long paths.
//
// The paper fixes the serialize-to-circuit-width principle and the packet
// size. The per-unit {channel, lane} registers, the number of channels, the
// valid wire sent with each unit and the valid/ready packet handshake are
// this design's choices.
//
// Configuration: target CFG_NI_TX, addr = local unit,
//   data = {en, 3'b0, chan[3:0], lane[7:0]}.
// Lanes of one channel must be numbered 0 .. W-1 without gaps.
// Handshake: a packet is taken when pkt_valid[c] && pkt_ready[c]. Its first
// flit is on out_units in the next cycle, one flit per cycle after that, and
// a new packet may be taken in the cycle the last flit is on the wires.
module sdm_ni_tx
  import sdm_pkg::*;
#(
  parameter int unsigned NODE_ID   = 0,
  parameter int unsigned NUM_UNITS = SDM_NUM_UNITS,
  parameter int unsigned UNIT_BITS = SDM_UNIT_BITS,
  parameter int unsigned NUM_CH    = 4,
  parameter int unsigned PKT_BITS  = SDM_PKT_BITS
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  cfg_t                                 cfg,
  input  logic [NUM_CH-1:0]                    pkt_valid,
  output logic [NUM_CH-1:0]                    pkt_ready,
  input  logic [NUM_CH-1:0][PKT_BITS-1:0]      pkt_data,
  output logic [NUM_UNITS-1:0][UNIT_BITS:0]    out_units
);

  localparam int unsigned CH_W  = (NUM_CH > 1) ? $clog2(NUM_CH) : 1;
  localparam int unsigned LN_W  = $clog2(NUM_UNITS);
  localparam int unsigned CNT_W = $clog2(PKT_BITS + 1);

  typedef struct packed {
    logic            en;
    logic [CH_W-1:0] chan;
    logic [LN_W-1:0] lane;
  } lane_cfg_t;

  lane_cfg_t                     ucfg    [NUM_UNITS];
  logic [PKT_BITS-1:0]           shreg   [NUM_CH];
  logic [CNT_W-1:0]              left    [NUM_CH];   // bits still to send
  logic [NUM_CH-1:0]             busy;
  logic [CNT_W-1:0]              width   [NUM_CH];   // flit width in bits
  logic [NUM_CH-1:0]             last;

  // Configuration registers.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int u = 0; u < NUM_UNITS; u++) ucfg[u] <= '0;
    end else if (cfg.we && cfg.target == CFG_NI_TX && cfg.node == 8'(NODE_ID)
                 && cfg.addr < 8'(NUM_UNITS)) begin
      ucfg[LN_W'(cfg.addr)] <= '{en:   cfg.data[CFG_EN_BIT],
                                 chan: cfg.data[8 +: CH_W],
                                 lane: cfg.data[LN_W-1:0]};
    end
  end

  // Flit width of each channel = number of units assigned to it.
  always_comb begin
    for (int c = 0; c < NUM_CH; c++) begin
      width[c] = '0;
      for (int u = 0; u < NUM_UNITS; u++)
        if (ucfg[u].en && ucfg[u].chan == CH_W'(c)) width[c] += CNT_W'(UNIT_BITS);
      last[c]      = busy[c] && (left[c] <= width[c]);
      pkt_ready[c] = (width[c] != '0) && (!busy[c] || last[c]);
    end
  end

  // Shift registers.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0;
      for (int c = 0; c < NUM_CH; c++) begin
        shreg[c] <= '0;
        left[c]  <= '0;
      end
    end else begin
      for (int c = 0; c < NUM_CH; c++) begin
        if (pkt_valid[c] && pkt_ready[c]) begin
          shreg[c] <= pkt_data[c];
          left[c]  <= CNT_W'(PKT_BITS);
          busy[c]  <= 1'b1;
        end else if (busy[c]) begin
          shreg[c] <= shreg[c] >> width[c];
          left[c]  <= last[c] ? '0 : left[c] - width[c];
          busy[c]  <= !last[c];
        end
      end
    end
  end

  // Drive the local port: lane l of a busy channel carries its slice.
  always_comb begin
    for (int u = 0; u < NUM_UNITS; u++) begin
      out_units[u] = '0;
      if (ucfg[u].en && busy[ucfg[u].chan]) begin
        out_units[u][UNIT_BITS]     = 1'b1;
        out_units[u][UNIT_BITS-1:0] = shreg[ucfg[u].chan][ucfg[u].lane * UNIT_BITS +: UNIT_BITS];
      end
    end
  end

endmodule
