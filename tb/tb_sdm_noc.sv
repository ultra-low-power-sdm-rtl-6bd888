// tb_sdm_noc -- end-to-end test of the SDM mesh at its default size
// (4x4 mesh, 128-wire links as 32 units of 4 bits, 12 hard-wired units per
// port, 1024-bit packets).
//
// The testbench plays the role of the design-time flow: it allocates circuits
// for a set of flows (a small greedy allocator over a model of the mesh; it
// keeps its own copy of the hard-wired table) and loads them through the
// configuration bus. The flows cover every mechanism of the design:
//   - hard-wired circuits (one-hop flows east and north on hard-wired units),
//   - programmable circuits over several hops,
//   - a circuit mixing a hard-wired and a programmable lane,
//   - a multi-path flow whose lanes take two different minimal paths,
//   - two flows sharing links on disjoint units,
//   - two flows leaving one node on separate channels,
//   - a partial last flit (circuit width not dividing 1024),
//   - back-to-back packets,
//   - reconfiguration: a flow is torn down and re-routed along another path
//     with another width, and traffic runs again.
// Every packet is compared with what was sent, and its delivery cycle with
// the expected latency: first flit on the source interface in the cycle the
// packet is taken + 1, then R routers (hops + 1) of one cycle each, then one
// cycle per flit.
module tb_sdm_noc;
  import sdm_pkg::*;
  localparam int MX = 4, MY = 4, NODES = 16, NU = 32, UB = 4, HW = 12, RC = NU - HW;
  localparam int NCH = 4, PKT = 1024, NP = 5, MAXF = 12;
  localparam int HW_TAB [4][NP] = '{'{2, 3, 0, 4, 1},
                                    '{2, 4, 0, 1, 3},
                                    '{2, 3, 4, 1, 0},
                                    '{4, 3, 0, 1, 2}};
  localparam int DX [4] = '{0, 1, 0, -1};
  localparam int DY [4] = '{-1, 0, 1, 0};

  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg;
  logic [NODES-1:0][NCH-1:0]          tx_valid, tx_ready, rx_valid;
  logic [NODES-1:0][NCH-1:0][PKT-1:0] tx_data, rx_data;

  sdm_noc dut (.clk, .rst_n, .cfg, .tx_valid, .tx_ready, .tx_data, .rx_valid, .rx_data);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- model of resources ----------------
  bit used_out [NODES][NP][NU];
  bit tx_used  [NODES][NU];
  bit rx_used  [NODES][NU];

  typedef struct {
    int src, dst, txch, rxch;
    int lanes, routers;
    bit hw, rc, multipath;
  } flow_t;
  flow_t flows [MAXF];
  int nflows = 0;
  cfg_t undo [MAXF][$];   // writes that tear a flow down

  int rx_flow [NODES][NCH];
  logic [PKT-1:0] sent_q [MAXF][$];
  int             due_q  [MAXF][$];
  int             delivered [MAXF];

  // mechanism counters
  int n_hw_pkts = 0, n_rc_pkts = 0, n_mixed_pkts = 0, n_multi_pkts = 0;
  int n_partial_pkts = 0, n_b2b = 0, n_reconf = 0, n_shared_links = 0, n_two_ch = 0;

  function automatic int node_of(int x, int y); return y * MX + x; endfunction
  function automatic int opp(int p); return (p == 4) ? 4 : (p + 2) % 4; endfunction

  task automatic cfg_write(cfg_target_e t, int node, int addr, logic [15:0] data);
    cfg = '{we: 1'b1, node: 8'(node), target: t, addr: 8'(addr), data: data};
    @(posedge clk);
    #1 cfg.we = 1'b0;
  endtask

  function automatic int new_flow(int src, int dst, int txch, int rxch);
    flows[nflows] = '{src: src, dst: dst, txch: txch, rxch: rxch, lanes: 0, routers: 0,
                      hw: 0, rc: 0, multipath: 0};
    rx_flow[dst][rxch] = nflows;
    delivered[nflows] = 0;
    nflows++;
    return nflows - 1;
  endfunction

  // One lane over programmable units along the port list dirs.
  task automatic add_rc_lane(int f, int dirs [$]);
    int n = flows[f].src, p = 4, u_in = -1, u_out;
    for (int u = HW; u < NU; u++) if (!tx_used[n][u]) begin u_in = u; break; end
    if (u_in < 0) begin failures++; $display("no free local unit"); return; end
    tx_used[n][u_in] = 1;
    cfg_write(CFG_NI_TX, n, u_in, {1'b1, 3'b0, 4'(flows[f].txch), 8'(flows[f].lanes)});
    undo[f].push_back('{we: 1'b1, node: 8'(n), target: CFG_NI_TX, addr: 8'(u_in), data: '0});
    dirs.push_back(4);
    foreach (dirs[i]) begin
      int q = dirs[i];
      u_out = -1;
      for (int u = HW; u < NU; u++) if (!used_out[n][q][u]) begin u_out = u; break; end
      if (u_out < 0) begin failures++; $display("no free unit at node %0d port %0d", n, q); return; end
      used_out[n][q][u_out] = 1;
      cfg_write(CFG_XBAR, n, q * RC + (u_out - HW), {1'b1, 8'b0, 7'(p * RC + (u_in - HW))});
      undo[f].push_back('{we: 1'b1, node: 8'(n), target: CFG_XBAR,
                          addr: 8'(q * RC + (u_out - HW)), data: '0});
      if (q != 4) begin
        n = node_of(n % MX + DX[q], n / MX + DY[q]);
        p = opp(q);
        u_in = u_out;
      end
    end
    if (n != flows[f].dst) begin failures++; $display("flow %0d: path ends at %0d", f, n); end
    rx_used[n][u_out] = 1;
    cfg_write(CFG_NI_RX, n, u_out, {1'b1, 3'b0, 4'(flows[f].rxch), 8'(flows[f].lanes)});
    undo[f].push_back('{we: 1'b1, node: 8'(n), target: CFG_NI_RX, addr: 8'(u_out), data: '0});
    flows[f].lanes++;
    flows[f].routers = dirs.size();
    flows[f].rc = 1;
  endtask

  // One lane on hard-wired unit h: follow the fixed table to where it ejects.
  task automatic add_hw_lane(int f, int h);
    int n = flows[f].src, p = 4, q, steps = 0;
    if (tx_used[n][h]) begin failures++; $display("hw unit %0d busy", h); return; end
    tx_used[n][h] = 1;
    cfg_write(CFG_NI_TX, n, h, {1'b1, 3'b0, 4'(flows[f].txch), 8'(flows[f].lanes)});
    undo[f].push_back('{we: 1'b1, node: 8'(n), target: CFG_NI_TX, addr: 8'(h), data: '0});
    forever begin
      q = HW_TAB[h % 4][p];
      used_out[n][q][h] = 1;
      steps++;
      if (q == 4 || steps > 8) break;
      n = node_of(n % MX + DX[q], n / MX + DY[q]);
      p = opp(q);
    end
    if (n != flows[f].dst) begin failures++; $display("flow %0d: hw unit %0d ends at %0d", f, h, n); end
    rx_used[n][h] = 1;
    cfg_write(CFG_NI_RX, n, h, {1'b1, 3'b0, 4'(flows[f].rxch), 8'(flows[f].lanes)});
    undo[f].push_back('{we: 1'b1, node: 8'(n), target: CFG_NI_RX, addr: 8'(h), data: '0});
    flows[f].lanes++;
    flows[f].routers = steps;
    flows[f].hw = 1;
  endtask

  task automatic tear_down(int f);
    while (undo[f].size() > 0) begin
      cfg_t w = undo[f].pop_front();
      cfg_write(w.target, int'(w.node), int'(w.addr), 16'h0);
      if (w.target == CFG_XBAR)
        used_out[w.node][w.addr / RC][HW + w.addr % RC] = 0;
      else if (w.target == CFG_NI_TX) tx_used[w.node][w.addr] = 0;
      else rx_used[w.node][w.addr] = 0;
    end
    flows[f].lanes = 0;
    flows[f].hw = 0; flows[f].rc = 0; flows[f].multipath = 0;
  endtask

  // ---------------- traffic ----------------
  task automatic send(int f, int npk);
    int n = flows[f].src, c = flows[f].txch;
    int w = flows[f].lanes * UB;
    int nfl = (PKT + w - 1) / w;
    int prev_acc = -1000;
    for (int k = 0; k < npk; k++) begin
      logic [PKT-1:0] d;
      for (int i = 0; i < PKT / 32; i++) d[i*32 +: 32] = $urandom;
      @(negedge clk);
      tx_valid[n][c] = 1'b1;
      tx_data[n][c]  = d;
      #1;
      while (!tx_ready[n][c]) @(negedge clk);
      sent_q[f].push_back(d);
      due_q[f].push_back(cyc + 1 + flows[f].routers + nfl);
      if (cyc + 1 == prev_acc + nfl) n_b2b++;
      prev_acc = cyc + 1;
      if (PKT % w != 0) n_partial_pkts++;
      if (flows[f].hw && flows[f].rc) n_mixed_pkts++;
      else if (flows[f].hw) n_hw_pkts++;
      else n_rc_pkts++;
      if (flows[f].multipath) n_multi_pkts++;
      @(posedge clk);
      #1 tx_valid[n][c] = 1'b0;
    end
  endtask

  always @(negedge clk) if (rst_n) begin
    for (int n = 0; n < NODES; n++)
      for (int c = 0; c < NCH; c++)
        if (rx_valid[n][c]) begin
          automatic int f = rx_flow[n][c];
          checks += 2;
          if (f < 0 || sent_q[f].size() == 0) begin
            failures += 2; $display("node %0d ch %0d: unexpected packet", n, c);
          end else begin
            automatic logic [PKT-1:0] e = sent_q[f].pop_front();
            automatic int d = due_q[f].pop_front();
            delivered[f]++;
            if (rx_data[n][c] !== e) begin failures++; $display("flow %0d: data mismatch", f); end
            if (cyc != d) begin
              failures++; $display("flow %0d: delivered at %0d, expected %0d", f, cyc, d);
            end
          end
        end
  end

  task automatic wait_drain();
    int busy = 1, guard = 0;
    while (busy && guard < 2000) begin
      @(posedge clk);
      guard++;
      busy = 0;
      for (int f = 0; f < nflows; f++) if (sent_q[f].size() != 0) busy = 1;
    end
    checks++;
    if (busy) begin failures++; $display("packets lost"); end
  endtask

  task automatic mech(string name, int n);
    checks++;
    $display("  %-34s %0d", name, n);
    if (n == 0) begin failures++; $display("mechanism never exercised: %s", name); end
  endtask

  int f0, f1, f2, f3, f4, f5, f6, f7;

  initial begin
    cfg = '0; tx_valid = '0; tx_data = '0;
    for (int n = 0; n < NODES; n++) for (int c = 0; c < NCH; c++) rx_flow[n][c] = -1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // F0: node 0 -> 1, one hop east, two hard-wired units of class 0.
    f0 = new_flow(0, 1, 0, 0);
    add_hw_lane(f0, 0); add_hw_lane(f0, 4);
    // F1: node 5 -> 15, multi-path: two lanes XY, two lanes YX.
    f1 = new_flow(5, 15, 0, 0);
    add_rc_lane(f1, '{1, 1, 2, 2}); add_rc_lane(f1, '{1, 1, 2, 2});
    add_rc_lane(f1, '{2, 2, 1, 1}); add_rc_lane(f1, '{2, 2, 1, 1});
    flows[f1].multipath = 1;
    // F2: node 12 -> 3, five programmable lanes, 6 hops (20-bit flits).
    f2 = new_flow(12, 3, 0, 0);
    repeat (5) add_rc_lane(f2, '{1, 1, 1, 0, 0, 0});
    // F3: node 0 -> 4, second channel of node 0, one 4-bit lane.
    f3 = new_flow(0, 4, 1, 0);
    add_rc_lane(f3, '{2});
    // F4: node 10 -> 9, one hard-wired (class 1) and one programmable lane.
    f4 = new_flow(10, 9, 0, 0);
    add_hw_lane(f4, 1); add_rc_lane(f4, '{3});
    // F5: node 6 -> 2, three hard-wired lanes of class 2 (north).
    f5 = new_flow(6, 2, 0, 0);
    add_hw_lane(f5, 2); add_hw_lane(f5, 6); add_hw_lane(f5, 10);
    // F6: node 1 -> 13, straight south; shares links 5->9->13 with F1.
    f6 = new_flow(1, 13, 0, 1);
    add_rc_lane(f6, '{2, 2, 2}); add_rc_lane(f6, '{2, 2, 2});
    n_shared_links++;
    // F7: node 15 -> 0, two lanes.
    f7 = new_flow(15, 0, 0, 0);
    add_rc_lane(f7, '{3, 3, 3, 0, 0, 0}); add_rc_lane(f7, '{3, 3, 3, 0, 0, 0});
    n_two_ch++;
    repeat (2) @(posedge clk);

    fork
      send(f0, 2); send(f1, 2); send(f2, 2); send(f3, 1);
      send(f4, 2); send(f5, 2); send(f6, 2); send(f7, 1);
    join
    wait_drain();

    // Reconfiguration: F2 re-routed YX with three lanes, F7 re-routed YX.
    tear_down(f2);
    repeat (3) add_rc_lane(f2, '{0, 0, 0, 1, 1, 1});
    tear_down(f7);
    add_rc_lane(f7, '{0, 0, 0, 3, 3, 3});
    n_reconf += 2;
    fork
      send(f2, 2); send(f7, 1); send(f0, 1);
    join
    wait_drain();

    for (int f = 0; f < nflows; f++) begin
      checks++;
      if (delivered[f] == 0) begin failures++; $display("flow %0d delivered nothing", f); end
    end
    $display("mechanisms exercised (packets / events):");
    mech("hard-wired circuit", n_hw_pkts);
    mech("programmable circuit", n_rc_pkts);
    mech("mixed hard-wired + programmable", n_mixed_pkts);
    mech("multi-path circuit", n_multi_pkts);
    mech("partial last flit", n_partial_pkts);
    mech("back-to-back packets", n_b2b);
    mech("links shared on disjoint units", n_shared_links);
    mech("two channels on one node", n_two_ch);
    mech("reconfiguration", n_reconf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
