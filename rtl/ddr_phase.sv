// ddr_phase: tells the Clk x2 domain which half of the current Clk x1 cycle it is
// in. clk1x and clk2x are edge-aligned (every clk1x rising edge coincides with a
// clk2x rising edge). A register toggling on clk1x is re-sampled on clk2x; the two
// differ only in the first clk2x cycle after a clk1x edge, so first_half is high
// in that cycle and low in the second one. Two flip-flops and an XOR.
module ddr_phase (
  input  logic clk1x,
  input  logic clk2x,
  input  logic rst,
  output logic first_half
);
  logic t_slow, t_fast;
  always_ff @(posedge clk1x) begin
    if (rst) t_slow <= 1'b0;
    else     t_slow <= ~t_slow;
  end
  always_ff @(posedge clk2x) begin
    if (rst) t_fast <= 1'b0;
    else     t_fast <= t_slow;
  end
  assign first_half = t_slow ^ t_fast;
endmodule
