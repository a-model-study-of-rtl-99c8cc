// ldo_gain_reg: the programmable gain register of the digital LDO.
//
// It holds the step size K_FORWARD of the barrel shifter as the two bits
// {K1,K0}: 11 = 3, 10 = 2, 01 = 1 (the paper's encoding) and 00 = 0 (hold).
// The paper says only that the gain is "register programmable". The simple
// write port and the reset value are this design's own choices.
//
// Interface: when wr_en is high at a rising clk edge, wr_k is stored. The new
// value is on k from that edge on. An asynchronous active-low rst_n loads
// RESET_K (gain 1 by default).
module ldo_gain_reg
  import dldo_pkg::*;
#(
  parameter gain_e RESET_K = GAIN_1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wr_en,
  input  gain_e      wr_k,
  output gain_e      k
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     k <= RESET_K;
    else if (wr_en) k <= wr_k;
  end

endmodule
