// dpu_ddr_ctrl: Clk x2 control of one PE of the output-stationary engine: the
// clock enables of the B1/B2 ping-pong registers and the INMODE[4] select of the
// in-DSP multiplexer for each of the N DSPs of a chain, and the slot and first-
// iteration strobes of the ring accumulator.
//
// Data reach the PE in blocks of two Clk x1 cycles (par = 0, then 1). With
// first_half from ddr_phase the fast phase of DSP 0 is q0 = {par, !first_half},
// 0..3 over the four Clk x2 cycles of a block. DSP k runs the same pattern k fast
// cycles later (the P cascade adds one fast cycle per DSP): q[k] = q0 delayed by
// k. For each DSP: ce1 (load B1 with the first weight of the block) when q = 1,
// ce2 (load B2 with the second weight) when q = 3, and sel (B1 to the multiplier)
// when q is odd, so the products come out as a0*w0, a0*w1, a1*w0, a1*w1.
// The ring accumulator sees slot q of a block at its top DSP N+5 fast cycles
// after DSP 0 and at its bottom DSP N+6 cycles after; first_blk is delayed by
// the same amounts to start a new accumulation (bias in, feedback out).
// The par and first_blk inputs are Clk x1 signals sampled in the Clk x2 domain.
module dpu_ddr_ctrl #(
  parameter int unsigned N = 4
) (
  input  logic         clk2x,
  input  logic         rst,
  input  logic         first_half,
  input  logic         par,
  input  logic         first_blk,
  output logic [N-1:0] ce1,
  output logic [N-1:0] ce2,
  output logic [N-1:0] sel,
  output logic [1:0]   slot_top,
  output logic         first_top,
  output logic         first_bot
);
  localparam int unsigned DT = N + 5;

  logic [1:0] q0;
  logic [1:0] qd [DT+1];
  logic [DT+1:0] fd;

  assign q0 = {par, ~first_half};
  assign qd[0] = q0;

  always_ff @(posedge clk2x) begin
    if (rst) begin
      for (int i = 1; i <= DT; i++) qd[i] <= '0;
      fd[DT+1:1] <= '0;
    end else begin
      for (int i = 1; i <= DT; i++) qd[i] <= qd[i-1];
      fd[DT+1:1] <= fd[DT:0];
    end
  end
  assign fd[0] = first_blk;

  for (genvar k = 0; k < N; k++) begin : g_dsp
    assign ce1[k] = (qd[k] == 2'd1);
    assign ce2[k] = (qd[k] == 2'd3);
    assign sel[k] = qd[k][0];
  end

  assign slot_top  = qd[DT];
  assign first_top = fd[DT];
  assign first_bot = fd[DT+1];
endmodule
