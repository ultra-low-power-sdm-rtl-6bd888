// tb_sdm_ni_rx -- self-checking test of the packet deserializer.
// Three receive channels with circuits of 3 units (12 bits, lanes scattered
// and out of order, so the last flit is partial), 1 unit and 8 units. The
// testbench cuts random 1024-bit packets into flits itself, drives them on
// the local port with random idle cycles in between, and checks that each
// packet comes out whole, on its own channel, with pkt_valid high exactly in
// the cycle after its last flit, and never at any other time.
module tb_sdm_ni_rx;
  import sdm_pkg::*;
  localparam int unsigned NU = 32, UB = 4, NCH = 4, PKT = 1024, NODE = 9;
  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg;
  logic [NU-1:0][UB:0] in_units;
  logic [NCH-1:0] pkt_valid;
  logic [NCH-1:0][PKT-1:0] pkt_data;
  int checks = 0, failures = 0;
  int cyc = 0;
  int u_ch [NU], u_ln [NU];
  int ch_w [NCH];
  logic [PKT-1:0] exp_q [NCH][$];
  int             due_q [NCH][$];
  int             got [NCH];

  sdm_ni_rx #(.NODE_ID(NODE), .NUM_UNITS(NU), .UNIT_BITS(UB), .NUM_CH(NCH), .PKT_BITS(PKT)) dut (
    .clk, .rst_n, .cfg, .in_units, .pkt_valid, .pkt_data
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
    cfg = '{we: 1'b1, node: 8'(NODE), target: CFG_NI_RX, addr: 8'(addr),
            data: {en, 3'b0, 4'(ch), 8'(ln)}};
    @(posedge clk);
    #1 cfg.we = 1'b0;
  endtask

  task automatic map(int u, int ch, int ln);
    u_ch[u] = ch; u_ln[u] = ln; ch_w[ch] += UB;
    cfg_write(u, 1'b1, ch, ln);
  endtask

  // Drive n packets on channel c; flits change just after a rising edge.
  task automatic drive(int c, int n);
    for (int k = 0; k < n; k++) begin
      logic [PKT-1:0] p;
      for (int i = 0; i < PKT / 32; i++) p[i*32 +: 32] = $urandom;
      for (int pos = 0; pos < PKT; pos += ch_w[c]) begin
        while ($urandom_range(3) == 0) @(posedge clk) #1;   // idle cycle
        for (int u = 0; u < NU; u++)
          if (u_ch[u] == c) begin
            in_units[u][UB] = 1'b1;
            in_units[u][UB-1:0] = (pos + u_ln[u]*UB < PKT) ? p[pos + u_ln[u]*UB +: UB] : '0;
          end
        if (pos + ch_w[c] >= PKT) begin
          exp_q[c].push_back(p);
          due_q[c].push_back(cyc + 1);   // pkt_valid in the next cycle
        end
        @(posedge clk) #1;
        for (int u = 0; u < NU; u++)
          if (u_ch[u] == c) in_units[u] = '0;
      end
    end
  endtask

  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < NCH; c++) begin
      if (pkt_valid[c]) begin
        checks += 2;
        got[c]++;
        if (exp_q[c].size() == 0) begin
          failures += 2; $display("ch %0d: unexpected packet at %0d", c, cyc);
        end else begin
          automatic logic [PKT-1:0] e = exp_q[c].pop_front();
          automatic int d = due_q[c].pop_front();
          if (pkt_data[c] !== e) begin failures++; $display("ch %0d: data mismatch", c); end
          if (cyc != d) begin
            failures++; $display("ch %0d: packet at %0d, expected %0d", c, cyc, d);
          end
        end
      end
    end
  end

  initial begin
    cfg = '0; in_units = '0;
    for (int u = 0; u < NU; u++) begin u_ch[u] = -1; u_ln[u] = 0; end
    for (int c = 0; c < NCH; c++) begin ch_w[c] = 0; got[c] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    map(5, 0, 2); map(9, 0, 0); map(30, 0, 1);
    map(14, 1, 0);
    for (int i = 0; i < 8; i++) map(16 + i, 3, i);
    fork
      drive(0, 2);
      drive(1, 1);
      drive(3, 3);
    join
    repeat (5) @(posedge clk);
    checks++;
    if (got[0] != 2 || got[1] != 1 || got[2] != 0 || got[3] != 3) begin
      failures++; $display("packets %0d %0d %0d %0d", got[0], got[1], got[2], got[3]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
