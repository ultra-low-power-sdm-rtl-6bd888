// tb_sdm_ni_tx -- self-checking test of the packet serializer.
// Three channels with circuits of 5, 1 and 2 units (20, 4 and 8 bits wide,
// lanes spread over arbitrary local units, one pair numbered in reverse) send
// random 1024-bit packets, two of them back to back on the first channel.
// A monitor rebuilds each packet from the lanes seen on the local port and
// compares it with what was sent. It also checks the timing: the first flit
// is on the wires in the cycle after the packet is taken, a packet takes
// exactly ceil(1024 / width) consecutive flits, and a back-to-back packet
// starts right after the last flit of the previous one.
module tb_sdm_ni_tx;
  import sdm_pkg::*;
  localparam int unsigned NU = 32, UB = 4, NCH = 4, PKT = 1024, NODE = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg;
  logic [NCH-1:0] pkt_valid, pkt_ready;
  logic [NCH-1:0][PKT-1:0] pkt_data;
  logic [NU-1:0][UB:0] out_units;
  int checks = 0, failures = 0;
  int cyc = 0;

  // Lane map of the test: unit -> {channel, lane}, -1 for unused units.
  int u_ch [NU], u_ln [NU];
  int ch_w [NCH];

  logic [PKT-1:0] sent_q [NCH][$];
  int             acc_q  [NCH][$];
  logic [PKT-1:0] rebuild [NCH];
  int             pos [NCH], nflit [NCH], first [NCH], lastc [NCH];
  int             got [NCH];
  int             b2b_seen = 0;

  sdm_ni_tx #(.NODE_ID(NODE), .NUM_UNITS(NU), .UNIT_BITS(UB), .NUM_CH(NCH), .PKT_BITS(PKT)) dut (
    .clk, .rst_n, .cfg, .pkt_valid, .pkt_ready, .pkt_data, .out_units
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(int addr, logic en, int ch, int ln);
    cfg = '{we: 1'b1, node: 8'(NODE), target: CFG_NI_TX, addr: 8'(addr),
            data: {en, 3'b0, 4'(ch), 8'(ln)}};
    @(posedge clk);
    #1 cfg.we = 1'b0;
  endtask

  task automatic map(int u, int ch, int ln);
    u_ch[u] = ch; u_ln[u] = ln; ch_w[ch] += UB;
    cfg_write(u, 1'b1, ch, ln);
  endtask

  task automatic send(int c, int n);
    for (int k = 0; k < n; k++) begin
      logic [PKT-1:0] p;
      for (int i = 0; i < PKT / 32; i++) p[i*32 +: 32] = $urandom;
      @(negedge clk);
      pkt_valid[c] = 1'b1;
      pkt_data[c]  = p;
      #1;
      while (!pkt_ready[c]) @(negedge clk);
      // Taken at the next rising edge.
      sent_q[c].push_back(p);
      acc_q[c].push_back(cyc + 1);
      @(posedge clk);
      #1 pkt_valid[c] = 1'b0;
    end
  endtask

  // Monitor: sample the local port between clock edges.
  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < NCH; c++) begin
      automatic logic any = 1'b0;
      for (int u = 0; u < NU; u++)
        if (u_ch[u] == c && out_units[u][UB]) begin
          any = 1'b1;
          if (pos[c] + u_ln[u]*UB < PKT) rebuild[c][pos[c] + u_ln[u]*UB +: UB] = out_units[u][UB-1:0];
        end
      if (any) begin
        if (nflit[c] == 0) first[c] = cyc;
        else if (cyc != lastc[c] + 1) begin
          failures++; $display("ch %0d: gap in flits at cycle %0d", c, cyc);
        end
        lastc[c] = cyc;
        nflit[c]++;
        pos[c] += ch_w[c];
        if (pos[c] >= PKT) begin
          automatic int exp_n = (PKT + ch_w[c] - 1) / ch_w[c];
          checks += 3;
          if (sent_q[c].size() == 0) begin
            failures += 3; $display("ch %0d: packet nobody sent", c);
          end else begin
            automatic logic [PKT-1:0] e = sent_q[c].pop_front();
            automatic int a = acc_q[c].pop_front();
            if (rebuild[c] !== e) begin failures++; $display("ch %0d: data mismatch", c); end
            if (first[c] != a) begin
              failures++; $display("ch %0d: first flit at %0d, taken at %0d", c, first[c], a);
            end
            if (nflit[c] != exp_n) begin
              failures++; $display("ch %0d: %0d flits, expected %0d", c, nflit[c], exp_n);
            end
          end
          got[c]++;
          pos[c] = 0; nflit[c] = 0; rebuild[c] = '0;
        end
      end
    end
  end

  initial begin
    cfg = '0; pkt_valid = '0; pkt_data = '0;
    for (int u = 0; u < NU; u++) begin u_ch[u] = -1; u_ln[u] = 0; end
    for (int c = 0; c < NCH; c++) begin
      ch_w[c] = 0; pos[c] = 0; nflit[c] = 0; got[c] = 0; rebuild[c] = '0;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    checks++;
    if (pkt_ready != '0) begin failures++; $display("ready without a circuit"); end
    map(3, 0, 0); map(7, 0, 1); map(8, 0, 2); map(20, 0, 3); map(31, 0, 4);
    map(12, 1, 0);
    map(1, 2, 0); map(0, 2, 1);
    fork
      send(0, 2);
      send(1, 1);
      send(2, 2);
    join
    repeat (300) @(posedge clk);
    // Back-to-back: the second packet of channel 0 followed the first without
    // a gap (the monitor flags gaps inside a packet; acceptance timing is
    // checked against the first flit).
    checks++;
    if (got[0] != 2 || got[1] != 1 || got[2] != 2) begin
      failures++; $display("packets received %0d %0d %0d", got[0], got[1], got[2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
