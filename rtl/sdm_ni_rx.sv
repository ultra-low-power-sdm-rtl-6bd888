// sdm_ni_rx -- destination side of a network interface: packet deserializer.
//
// Mirror of sdm_ni_tx. Each unit of the local router output port is assigned
// by configuration to one of NUM_CH receive channels (one per flow ending at
// the node) with a lane number. Whenever the valid wire of any unit of a
// channel is high, that cycle's flit is gathered in lane order (lane l at
// bits [l*UNIT_BITS +: UNIT_BITS]) and OR-ed into the channel's packet
// register shifted up by the current fill offset; the offset then advances
// by the flit width. When PKT_BITS bits have arrived the packet is copied to pkt_data and
// pkt_valid pulses for one cycle. Because every part of a multi-path circuit
// has the same hop count, all lanes of a flit arrive in the same cycle and no
// reordering is needed.
//
// The paper fixes the deserialize-from-circuit-width principle and the packet
// size; the per-unit {channel, lane} registers, the valid wire and the
// one-cycle pkt_valid pulse (the core must take the packet then; circuits
// have no back-pressure) are this design's choices.
//
// Configuration: target CFG_NI_RX, addr = local unit,
//   data = {en, 3'b0, chan[3:0], lane[7:0]}.
// Timing: pkt_valid is high in the cycle after the last flit is on in_units.
module sdm_ni_rx
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
  input  logic [NUM_UNITS-1:0][UNIT_BITS:0]    in_units,
  output logic [NUM_CH-1:0]                    pkt_valid,
  output logic [NUM_CH-1:0][PKT_BITS-1:0]      pkt_data
);

  localparam int unsigned CH_W  = (NUM_CH > 1) ? $clog2(NUM_CH) : 1;
  localparam int unsigned LN_W  = $clog2(NUM_UNITS);
  localparam int unsigned CNT_W = $clog2(PKT_BITS + 1);

  typedef struct packed {
    logic            en;
    logic [CH_W-1:0] chan;
    logic [LN_W-1:0] lane;
  } lane_cfg_t;

  lane_cfg_t           ucfg   [NUM_UNITS];
  logic [PKT_BITS-1:0] acc    [NUM_CH];
  logic [PKT_BITS-1:0] acc_nx [NUM_CH];
  logic [CNT_W-1:0]    fill   [NUM_CH];
  logic [CNT_W-1:0]    width  [NUM_CH];
  logic [NUM_CH-1:0]   flit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int u = 0; u < NUM_UNITS; u++) ucfg[u] <= '0;
    end else if (cfg.we && cfg.target == CFG_NI_RX && cfg.node == 8'(NODE_ID)
                 && cfg.addr < 8'(NUM_UNITS)) begin
      ucfg[LN_W'(cfg.addr)] <= '{en:   cfg.data[CFG_EN_BIT],
                                 chan: cfg.data[8 +: CH_W],
                                 lane: cfg.data[LN_W-1:0]};
    end
  end

  // Flit width and presence, the flit gathered in lane order, and the
  // packet register with the flit merged in at the fill offset.
  logic [NUM_UNITS*UNIT_BITS-1:0] flit_bits [NUM_CH];

  always_comb begin
    for (int c = 0; c < NUM_CH; c++) begin
      width[c]     = '0;
      flit[c]      = 1'b0;
      flit_bits[c] = '0;
      for (int u = 0; u < NUM_UNITS; u++)
        if (ucfg[u].en && ucfg[u].chan == CH_W'(c)) begin
          width[c] += CNT_W'(UNIT_BITS);
          if (in_units[u][UNIT_BITS]) begin
            flit[c] = 1'b1;
            flit_bits[c][ucfg[u].lane * UNIT_BITS +: UNIT_BITS] = in_units[u][UNIT_BITS-1:0];
          end
        end
      acc_nx[c] = acc[c] | (PKT_BITS'(flit_bits[c]) << fill[c]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pkt_valid <= '0;
      pkt_data  <= '0;
      for (int c = 0; c < NUM_CH; c++) begin
        acc[c]  <= '0;
        fill[c] <= '0;
      end
    end else begin
      for (int c = 0; c < NUM_CH; c++) begin
        pkt_valid[c] <= 1'b0;
        if (flit[c]) begin
          if (int'(fill[c]) + int'(width[c]) >= PKT_BITS) begin
            pkt_data[c]  <= acc_nx[c];
            pkt_valid[c] <= 1'b1;
            acc[c]       <= '0;
            fill[c]      <= '0;
          end else begin
            acc[c]  <= acc_nx[c];
            fill[c] <= fill[c] + width[c];
          end
        end
      end
    end
  end

endmodule
