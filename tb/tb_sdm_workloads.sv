// tb_sdm_workloads -- application-sized traffic on a 6 x 5 SDM mesh.
//
// Runs task graphs with the sizes of the evaluated applications (tasks, flows
// and mesh) on one sdm_noc instance of 6 x 5 nodes; smaller meshes use the
// top-left corner of it. Published task graphs are not reproduced: each
// workload is a random graph of the stated size in which every task has at
// most NUM_CH outgoing and incoming flows, most flows join tasks at most two
// hops apart (as a traffic-aware mapping would place them), and each flow asks
// for 1 to 5 units of bandwidth.
//
// For every workload the testbench resets the mesh, allocates the circuits
// (hard-wired units first for one-hop flows, then programmable lanes along
// the XY path, then along the YX path, which makes the flow multi-path; if a
// flow does not fit, the clock is taken as doubled, halving every flow's unit
// count, and allocation starts over, as in the published evaluation),
// loads them, lets every flow send two packets at the same time and checks
// each packet bit for bit and its delivery cycle
// (accept + 1 + routers + ceil(1024 / width)). It fails if a flow cannot be
// routed, a packet is lost or wrong, or if no hard-wired lane or no
// partial last flit occurred over all workloads. Multi-path flows only arise
// when a link runs short of free units, so they are counted but not required
// here (tb_sdm_noc forces one).
module tb_sdm_workloads;
  import sdm_pkg::*;
  localparam int MX = 6, MY = 5, NODES = MX * MY, NU = 32, UB = 4, HW = 12, RC = NU - HW;
  localparam int NCH = 4, PKT = 1024, NP = 5, MAXF = 40;
  localparam int DX [4] = '{0, 1, 0, -1};
  localparam int DY [4] = '{-1, 0, 1, 0};
  localparam int HW_CLASS [4] = '{2, 0, 3, 1};   // class sent towards N, E, S, W

  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg;
  logic [NODES-1:0][NCH-1:0]          tx_valid, tx_ready, rx_valid;
  logic [NODES-1:0][NCH-1:0][PKT-1:0] tx_data, rx_data;

  sdm_noc #(.MESH_X(MX), .MESH_Y(MY)) dut (
    .clk, .rst_n, .cfg, .tx_valid, .tx_ready, .tx_data, .rx_valid, .rx_data
  );

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit used_out [NODES][NP][NU];
  bit tx_used  [NODES][NU];
  bit rx_used  [NODES][NU];
  int out_deg  [NODES], in_deg [NODES];

  typedef struct {
    int src, dst, txch, rxch, lanes, routers;
    bit hw, multipath;
  } flow_t;
  flow_t flows [MAXF];
  int nflows;
  int rx_flow [NODES][NCH];
  logic [PKT-1:0] sent_q [MAXF][$];
  int             due_q  [MAXF][$];
  int             delivered [MAXF];
  bit             checking;
  int             senders;
  bit             route_ok;

  int tot_hw_lanes = 0, tot_multi = 0, tot_partial = 0, tot_pkts = 0;

  function automatic int nx(int n, int q); return n % MX + DX[q]; endfunction
  function automatic int ny(int n, int q); return n / MX + DY[q]; endfunction
  function automatic int opp(int p); return (p == 4) ? 4 : (p + 2) % 4; endfunction

  task automatic cfg_write(cfg_target_e t, int node, int addr, logic [15:0] data);
    cfg = '{we: 1'b1, node: 8'(node), target: t, addr: 8'(addr), data: data};
    @(posedge clk);
    #1 cfg.we = 1'b0;
  endtask

  function automatic int free_rc(bit busy [NU]);
    for (int u = HW; u < NU; u++) if (!busy[u]) return u;
    return -1;
  endfunction

  // Can a programmable lane be laid along dirs (ending with the local port)?
  function automatic bit rc_fits(int f, int dirs [$]);
    int n = flows[f].src;
    bit b [NU];
    b = tx_used[n];
    if (free_rc(b) < 0) return 0;
    foreach (dirs[i]) begin
      b = used_out[n][dirs[i]];
      if (free_rc(b) < 0) return 0;
      if (dirs[i] != 4) n = ny(n, dirs[i]) * MX + nx(n, dirs[i]);
    end
    b = rx_used[n];
    return free_rc(b) >= 0;
  endfunction

  task automatic add_rc_lane(int f, int dirs [$]);
    int n = flows[f].src, p = 4, u_in, u_out;
    bit b [NU];
    b = tx_used[n];
    u_in = free_rc(b);
    tx_used[n][u_in] = 1;
    cfg_write(CFG_NI_TX, n, u_in, {1'b1, 3'b0, 4'(flows[f].txch), 8'(flows[f].lanes)});
    foreach (dirs[i]) begin
      int q = dirs[i];
      b = used_out[n][q];
      u_out = free_rc(b);
      used_out[n][q][u_out] = 1;
      cfg_write(CFG_XBAR, n, q * RC + (u_out - HW), {1'b1, 8'b0, 7'(p * RC + (u_in - HW))});
      if (q != 4) begin
        n = ny(n, q) * MX + nx(n, q);
        p = opp(q);
        u_in = u_out;
      end
    end
    rx_used[n][u_out] = 1;
    cfg_write(CFG_NI_RX, n, u_out, {1'b1, 3'b0, 4'(flows[f].rxch), 8'(flows[f].lanes)});
    flows[f].lanes++;
  endtask

  // Hard-wired lane for a one-hop flow in direction q; 0 if none is free.
  task automatic try_hw_lane(int f, int q, output bit ok);
    int s = flows[f].src, d = flows[f].dst;
    ok = 0;
    for (int h = HW_CLASS[q]; h < HW; h += 4)
      if (!tx_used[s][h] && !used_out[s][q][h] && !rx_used[d][h] && !used_out[d][4][h]) begin
        tx_used[s][h] = 1; used_out[s][q][h] = 1; rx_used[d][h] = 1; used_out[d][4][h] = 1;
        cfg_write(CFG_NI_TX, s, h, {1'b1, 3'b0, 4'(flows[f].txch), 8'(flows[f].lanes)});
        cfg_write(CFG_NI_RX, d, h, {1'b1, 3'b0, 4'(flows[f].rxch), 8'(flows[f].lanes)});
        flows[f].lanes++;
        flows[f].hw = 1;
        tot_hw_lanes++;
        ok = 1;
        return;
      end
  endtask

  task automatic route_flow(int f, int units, output bit ok);
    int s = flows[f].src, d = flows[f].dst;
    int dx = d % MX - s % MX, dy = d / MX - s / MX;
    int xy [$], yx [$], ys [$];
    bit used_xy = 0, used_yx = 0, hw_ok;
    for (int i = 0; i < (dx > 0 ? dx : -dx); i++) xy.push_back(dx > 0 ? 1 : 3);
    for (int i = 0; i < (dy > 0 ? dy : -dy); i++) ys.push_back(dy > 0 ? 2 : 0);
    yx = {ys, xy};
    xy = {xy, ys};
    xy.push_back(4); yx.push_back(4);
    flows[f].routers = xy.size();
    ok = 1;
    for (int k = 0; k < units; k++) begin
      hw_ok = 0;
      if (xy.size() == 2) try_hw_lane(f, xy[0], hw_ok);
      if (hw_ok) continue;
      if (rc_fits(f, xy)) begin add_rc_lane(f, xy); used_xy = 1; end
      else if (rc_fits(f, yx)) begin add_rc_lane(f, yx); used_yx = 1; end
      else begin
        ok = 0;
        $display("flow %0d (%0d -> %0d): no free units for lane %0d of %0d", f, s, d, k, units);
        return;
      end
    end
    if (used_xy && used_yx && xy != yx) begin flows[f].multipath = 1; tot_multi++; end
  endtask

  task automatic send(int f, int npk);
    int n = flows[f].src, c = flows[f].txch;
    int w = flows[f].lanes * UB;
    int nfl = (PKT + w - 1) / w;
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
      if (PKT % w != 0) tot_partial++;
      tot_pkts++;
      @(posedge clk);
      #1 tx_valid[n][c] = 1'b0;
    end
  endtask

  always @(negedge clk) if (rst_n && checking) begin
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

  // Reset the mesh (every circuit off) and the resource model.
  task automatic reset_mesh();
    rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < NODES; n++)
      for (int u = 0; u < NU; u++) begin
        tx_used[n][u] = 0; rx_used[n][u] = 0;
        for (int p = 0; p < NP; p++) used_out[n][p][u] = 0;
      end
    for (int f = 0; f < nflows; f++) begin
      flows[f].lanes = 0; flows[f].hw = 0; flows[f].multipath = 0;
    end
  endtask

  task automatic run_workload(string name, int tasks, int nfl, int wx, int wy);
    int node_of_task [$];
    int bw [MAXF];
    int hops_sum, lanes_sum, hw_lanes, multi, scale;
    int hw_start, mp_start;
    bit ok, pending;
    checking = 0;
    for (int n = 0; n < NODES; n++) begin
      out_deg[n] = 0; in_deg[n] = 0;
      for (int c = 0; c < NCH; c++) rx_flow[n][c] = -1;
    end
    // Place the tasks on distinct nodes of the wx x wy corner.
    for (int y = 0; y < wy; y++) for (int x = 0; x < wx; x++) node_of_task.push_back(y * MX + x);
    node_of_task.shuffle();
    // Random flows, mostly between nearby tasks.
    nflows = 0;
    for (int tries = 0; nflows < nfl && tries < 100000; tries++) begin
      int s = node_of_task[$urandom_range(tasks - 1)];
      int d = node_of_task[$urandom_range(tasks - 1)];
      int mdist = (s % MX > d % MX ? s % MX - d % MX : d % MX - s % MX)
               + (s / MX > d / MX ? s / MX - d / MX : d / MX - s / MX);
      bit dup = 0;
      if (s == d || out_deg[s] >= NCH || in_deg[d] >= NCH) continue;
      if (mdist > 2 && $urandom_range(9) < 7) continue;
      for (int f = 0; f < nflows; f++) if (flows[f].src == s && flows[f].dst == d) dup = 1;
      if (dup) continue;
      flows[nflows] = '{src: s, dst: d, txch: out_deg[s], rxch: in_deg[d], lanes: 0,
                        routers: 0, hw: 0, multipath: 0};
      rx_flow[d][in_deg[d]] = nflows;
      out_deg[s]++; in_deg[d]++;
      delivered[nflows] = 0;
      sent_q[nflows].delete(); due_q[nflows].delete();
      nflows++;
    end
    checks++;
    if (nflows != nfl) begin failures++; $display("%s: only %0d flows generated", name, nflows); end
    // Bandwidth demand of each flow in units at the base clock. If some flow
    // cannot be routed, the clock is doubled (each wire carries twice the
    // bandwidth, so a flow needs half the units) and allocation starts over.
    for (int f = 0; f < nflows; f++) bw[f] = 1 + $urandom_range(4);
    for (scale = 1; scale <= 4; scale *= 2) begin
      hw_start = tot_hw_lanes; mp_start = tot_multi;
      reset_mesh();
      route_ok = 1;
      hops_sum = 0; lanes_sum = 0;
      for (int f = 0; f < nflows && route_ok; f++) begin
        route_flow(f, (bw[f] + scale - 1) / scale, ok);
        if (!ok) route_ok = 0;
        hops_sum += flows[f].routers - 1;
        lanes_sum += flows[f].lanes;
      end
      hw_lanes = tot_hw_lanes - hw_start;
      multi = tot_multi - mp_start;
      if (route_ok) break;
      tot_hw_lanes = hw_start; tot_multi = mp_start;
      $display("%s: not routable at clock x%0d, doubling the clock", name, scale);
    end
    checks++;
    if (!route_ok) begin failures++; $display("%s: could not be routed", name); end
    checking = 1;
    senders = nflows;
    for (int f = 0; f < nflows; f++) begin
      automatic int ff = f;
      fork
        begin
          send(ff, 2);
          senders--;
        end
      join_none
    end
    while (senders != 0) @(posedge clk);
    pending = 1;
    for (int g = 0; g < 2000 && pending; g++) begin
      @(posedge clk);
      pending = 0;
      for (int f = 0; f < nflows; f++) if (sent_q[f].size() != 0) pending = 1;
    end
    for (int f = 0; f < nflows; f++) begin
      checks++;
      if (delivered[f] != 2) begin failures++; $display("%s: flow %0d delivered %0d of 2", name, f, delivered[f]); end
    end
    $display("%-14s %2d tasks %2d flows on %0dx%0d, clock x%0d: %3d lanes, %2d hard-wired lanes, %2d multi-path flows, mean hops %0.2f",
             name, tasks, nflows, wx, wy, scale, lanes_sum, hw_lanes, multi,
             real'(hops_sum) / nflows);
  endtask

  initial begin
    cfg = '0; tx_valid = '0; tx_data = '0; checking = 0;
    run_workload("MWD",           13, 15, 4, 4);
    run_workload("VOPD",          16, 21, 4, 4);
    run_workload("MMS",           27, 36, 6, 5);
    run_workload("Telecom",       24, 25, 6, 4);
    run_workload("Auto-industry", 22, 25, 6, 4);
    checks += 2;
    if (tot_hw_lanes == 0) begin failures++; $display("no hard-wired lane used"); end
    if (tot_partial == 0)  begin failures++; $display("no partial last flit"); end
    $display("packets %0d, hard-wired lanes %0d, multi-path flows %0d, partial last flits %0d",
             tot_pkts, tot_hw_lanes, tot_multi, tot_partial);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
