// tb_sdm_input_reg -- self-checking test of the router input register.
// Drives random unit data and valid bits every cycle and checks that q shows
// exactly the previous cycle's d (one cycle of latency), and that reset
// clears the register.
module tb_sdm_input_reg;
  localparam int unsigned NU = 32, UB = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NU-1:0][UB:0] d, q, prev;
  int checks = 0, failures = 0;

  sdm_input_reg #(.NUM_UNITS(NU), .UNIT_BITS(UB)) dut (.clk, .rst_n, .d, .q);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '1;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (q != '0) begin failures++; $display("reset: q not cleared"); end
    rst_n = 1'b1;
    for (int i = 0; i < 200; i++) begin
      for (int u = 0; u < NU; u++) d[u] = (UB+1)'($urandom);
      prev = d;
      @(posedge clk);
      #1;
      checks++;
      if (q != prev) begin
        failures++;
        $display("cycle %0d: q=%h expected %h", i, q, prev);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
