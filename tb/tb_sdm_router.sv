// tb_sdm_router -- self-checking test of the five-port SDM router.
// Checks the hard-wired units against a table written out here (port order
// N, E, S, W, L; unit class h % 4), loads random programmable crossbar
// connections for the other units and compares every output unit, one cycle
// after the input, with a reference model of the router. The one-cycle
// latency is checked by comparing with the input of the previous cycle.
module tb_sdm_router;
  import sdm_pkg::*;
  localparam int unsigned NU = 32, UB = 4, HW = 12, RC = NU - HW, NODE = 5;
  localparam int unsigned NP = 5;
  // HW_TAB[k][p] = output port of hard-wired class k arriving on port p.
  localparam int HW_TAB [4][NP] = '{'{2, 3, 0, 4, 1},
                                    '{2, 4, 0, 1, 3},
                                    '{2, 3, 4, 1, 0},
                                    '{4, 3, 0, 1, 2}};
  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg;
  logic [NP-1:0][NU-1:0][UB:0] in_link, out_link, prev_in;
  int ref_src [NP*RC];
  int checks = 0, failures = 0;
  int hw_used = 0, rc_used = 0;

  sdm_router #(.NODE_ID(NODE), .NUM_UNITS(NU), .UNIT_BITS(UB), .HW_UNITS(HW)) dut (
    .clk, .rst_n, .cfg, .in_link, .out_link
  );

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(int addr, logic en, int src);
    cfg = '{we: 1'b1, node: 8'(NODE), target: CFG_XBAR, addr: 8'(addr),
            data: {en, 8'b0, 7'(src)}};
    @(posedge clk);
    #1 cfg.we = 1'b0;
  endtask

  task automatic load_random();
    int perm [NP*RC];
    for (int i = 0; i < NP*RC; i++) perm[i] = i;
    for (int i = NP*RC - 1; i > 0; i--) begin
      int j = $urandom_range(i);
      int t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
    for (int o = 0; o < NP*RC; o++) begin
      ref_src[o] = ($urandom_range(4) == 0) ? -1 : perm[o];
      cfg_write(o, ref_src[o] >= 0, ref_src[o] >= 0 ? ref_src[o] : 0);
    end
  endtask

  function automatic logic [UB:0] expect_out(int q, int u);
    if (u < HW) begin
      for (int p = 0; p < NP; p++)
        if (HW_TAB[u % 4][p] == q) return prev_in[p][u];
      return '0;
    end else begin
      int o = q * RC + (u - HW);
      if (ref_src[o] < 0) return '0;
      return prev_in[ref_src[o] / RC][HW + ref_src[o] % RC];
    end
  endfunction

  task automatic run(int cycles);
    for (int c = 0; c < cycles; c++) begin
      for (int p = 0; p < NP; p++)
        for (int u = 0; u < NU; u++) in_link[p][u] = (UB+1)'($urandom);
      prev_in = in_link;
      @(posedge clk);
      #1;
      for (int q = 0; q < NP; q++)
        for (int u = 0; u < NU; u++) begin
          checks++;
          if (u < HW) hw_used++; else rc_used++;
          if (out_link[q][u] !== expect_out(q, u)) begin
            failures++;
            if (failures < 10)
              $display("port %0d unit %0d = %h expected %h", q, u, out_link[q][u], expect_out(q, u));
          end
        end
    end
  endtask

  initial begin
    cfg = '0;
    in_link = '0;
    for (int o = 0; o < NP*RC; o++) ref_src[o] = -1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    run(5);
    for (int pass = 0; pass < 3; pass++) begin
      load_random();
      run(20);
    end
    if (hw_used == 0 || rc_used == 0) failures++;
    $display("hard-wired unit checks %0d, crossbar unit checks %0d", hw_used, rc_used);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
