// tb_ldo_comparator: test of the clocked comparator model.
// Random vref/vout pairs are applied just before each rising edge. After the
// edge, the output must equal (vout < vref) as it was at that edge. The
// inputs are then flipped early in the cycle, and the output must hold
// through the falling edge, until the next rising edge.
`timescale 1ns/1ps
module tb_ldo_comparator;
  logic clk = 1'b0;
  real  vref = 0.7, vout = 0.0;
  logic dout;
  logic expect_d;
  int checks = 0, failures = 0;

  ldo_comparator dut (.clk(clk), .vref(vref), .vout(vout), .dout(dout));

  always #10 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    checks++;
    if (dout !== 1'b0) begin failures++; $display("power-up value not 0"); end
    for (int i = 0; i < 500; i++) begin
      // New inputs 2 ns before the rising edge.
      @(posedge clk); #18;
      vref = 0.5 + real'($urandom_range(0, 400)) * 1.0e-3;
      vout = 0.5 + real'($urandom_range(0, 400)) * 1.0e-3;
      expect_d = (vout < vref);
      @(posedge clk); #1;
      checks++;
      if (dout !== expect_d) begin
        failures++;
        $display("vref=%f vout=%f dout=%b", vref, vout, dout);
      end
      // Flip the inputs well before the falling edge.
      #2;
      vout = expect_d ? vref + 0.01 : vref - 0.01;
      @(negedge clk); #1;
      checks++;
      if (dout !== expect_d) begin failures++; $display("output did not hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
