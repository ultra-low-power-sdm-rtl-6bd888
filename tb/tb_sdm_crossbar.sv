// tb_sdm_crossbar -- self-checking test of the programmable SDM crossbar.
// Loads random one-to-one unit connections (each output unit from a distinct
// input unit of any port, some outputs left disabled) through the
// configuration bus, drives random input units and compares every output unit
// with a reference table kept by the testbench. Repeats with new settings to
// cover reconfiguration, and checks that writes for another node are ignored.
module tb_sdm_crossbar;
  import sdm_pkg::*;
  localparam int unsigned RC = 20, UB = 4, NODE = 3;
  localparam int unsigned NS = NUM_PORTS * RC;
  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg;
  logic [NUM_PORTS-1:0][RC-1:0][UB:0] in_units, out_units;
  logic [NS-1:0][UB:0] in_flat, out_flat;
  int ref_src [NS];   // -1: disabled
  int checks = 0, failures = 0;

  sdm_crossbar #(.NODE_ID(NODE), .RC_UNITS(RC), .UNIT_BITS(UB)) dut (
    .clk, .rst_n, .cfg, .in_units, .out_units
  );
  assign in_units = in_flat;
  assign out_flat = out_units;

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(int node, int addr, logic en, int src);
    cfg = '{we: 1'b1, node: 8'(node), target: CFG_XBAR, addr: 8'(addr),
            data: {en, 8'b0, 7'(src)}};
    @(posedge clk);
    #1 cfg.we = 1'b0;
  endtask

  task automatic load_random();
    int perm [NS];
    for (int i = 0; i < NS; i++) perm[i] = i;
    for (int i = NS - 1; i > 0; i--) begin
      int j = $urandom_range(i);
      int t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
    for (int o = 0; o < NS; o++) begin
      ref_src[o] = ($urandom_range(3) == 0) ? -1 : perm[o];
      cfg_write(NODE, o, ref_src[o] >= 0, ref_src[o] >= 0 ? ref_src[o] : 0);
    end
  endtask

  task automatic check_outputs(int rounds);
    for (int r = 0; r < rounds; r++) begin
      for (int i = 0; i < NS; i++) in_flat[i] = (UB+1)'($urandom);
      #1;
      for (int o = 0; o < NS; o++) begin
        logic [UB:0] exp = (ref_src[o] >= 0) ? in_flat[ref_src[o]] : '0;
        checks++;
        if (out_flat[o] !== exp) begin
          failures++;
          if (failures < 10) $display("out %0d = %h expected %h", o, out_flat[o], exp);
        end
      end
    end
  endtask

  initial begin
    cfg = '0;
    in_flat = '0;
    for (int o = 0; o < NS; o++) ref_src[o] = -1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check_outputs(3);                    // after reset everything is off
    for (int pass = 0; pass < 4; pass++) begin
      load_random();
      check_outputs(20);
    end
    // Writes for another router must not change anything.
    for (int o = 0; o < NS; o++) cfg_write(NODE + 1, o, 1'b1, 0);
    check_outputs(5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
