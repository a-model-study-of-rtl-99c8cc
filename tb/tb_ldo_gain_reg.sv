// tb_ldo_gain_reg: self-checking test of the gain register.
// Checks the reset value, then 400 random cycles of writes and idle cycles
// against a plain reference variable. A write must show up right after its
// edge, and an idle cycle must leave the value alone.
`timescale 1ns/1ps
module tb_ldo_gain_reg;
  import dldo_pkg::*;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  wr_en = 1'b0;
  gain_e wr_k = GAIN_0;
  gain_e k;
  gain_e k_ref;
  int checks = 0, failures = 0;

  ldo_gain_reg dut (.clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_k(wr_k), .k(k));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #12;
    checks++;
    if (k !== GAIN_1) begin failures++; $display("reset value %b, expected 01", k); end
    k_ref = GAIN_1;
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      wr_en = 1'($urandom_range(0, 1));
      wr_k  = gain_e'($urandom_range(0, 3));
      @(posedge clk);
      if (wr_en) k_ref = wr_k;
      #1;
      checks++;
      if (k !== k_ref) begin
        failures++;
        $display("cycle %0d: k=%b expected %b", i, k, k_ref);
      end
    end
    // Asynchronous reset in mid-cycle.
    @(negedge clk);
    wr_en = 1'b1; wr_k = GAIN_3;
    @(posedge clk); #2;
    rst_n = 1'b0; #1;
    checks++;
    if (k !== GAIN_1) begin failures++; $display("async reset failed: %b", k); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
