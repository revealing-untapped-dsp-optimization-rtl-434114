// dpu_ring_acc: the ring accumulator of a PE of the enhanced output-stationary
// engine: two cascaded DSP48E2 slices at Clk x2 in SIMD TWO24 mode that combine
// the packed partial sums of the PE's two chain groups, add the bias, correct the
// INT8 packing and accumulate, all in one loop.
//
// A chain word P = hi*2^18 + lo (lo a signed 18-bit sum) is rewired, without
// logic, into A = {P[41:18], six copies of P[17]} and B = P[17:0], so that A:B
// holds lo sign-extended in lane 0 and the 24-bit high field in lane 1. Because a
// negative lo borrowed one from the high field, the W multiplexer adds the RND
// constant 2^24 (one in lane 1) when P[17] is set ("P is negative"); the sign bit
// is registered along with A/B, like OPMODEREG.
//  * Top DSP (group 1, AREG=BREG=1): P_top = A:B + RND? + (first_top ? bias : 0),
//    the bias of the output channel of the slot from a two-entry bias store
//    (slots 0 and 2 use bias[0], slots 1 and 3 bias[1]), copied into both lanes.
//  * Bottom DSP (group 0, AREG=BREG=2 to line up with the top): P_bot = PCIN
//    (P_top) + A:B + RND? + (first_bot ? 0 : C), where C (CREG=1) is its own
//    output after two Clk x2 delay registers.
// P_bot -> delay 1 -> delay 2 -> C register -> P_bot is a loop of four Clk x2
// cycles, so the four slots of a block each own one accumulator in the loop, and
// successive blocks add onto them. The accumulator has the paper's latency of two
// (C and P registers) and the two delay registers. Every Clk x1 edge the two
// delay registers are copied into res_a (older slot) and res_b (newer slot): the
// serial-to-parallel conversion back to Clk x1. 24-bit lanes: the reduced bias
// and accumulator precision the paper chose to fit TWO24.
// Timing: a chain word presented during fast cycle f reaches P_bot in cycle f+3.
module dpu_ring_acc
  import dsp_pkg::*;
(
  input  logic          clk1x,
  input  logic          clk2x,
  input  logic          rst,
  input  logic [PW-1:0] p_g0,       // {P1,P2}: packed word of group 0
  input  logic [PW-1:0] p_g1,       // {P3,P4}: packed word of group 1
  input  logic [1:0]    slot_top,   // slot now in the top DSP's A/B registers
  input  logic          first_top,  // first block of an accumulation (bias on)
  input  logic          first_bot,  // first block at the bottom DSP (feedback off)
  input  logic [23:0]   bias [2],
  output logic [PW-1:0] res_a,      // Clk x1: older of the two latest slots
  output logic [PW-1:0] res_b       // Clk x1: newer slot
);

  localparam logic [PW-1:0] RND_HI = {23'b0, 1'b1, 24'b0};

  function automatic logic [AW-1:0] a_of(input logic [PW-1:0] w);
    return {w[41:18], {6{w[17]}}};
  endfunction

  // sign registers (OPMODE registers): group 1 one stage, group 0 two stages
  logic neg1_r, neg0_r, neg0_rr;
  always_ff @(posedge clk2x) begin
    if (rst) begin
      neg1_r <= 1'b0; neg0_r <= 1'b0; neg0_rr <= 1'b0;
    end else begin
      neg1_r  <= p_g1[17];
      neg0_r  <= p_g0[17];
      neg0_rr <= neg0_r;
    end
  end

  // Bias, selected by output channel of the slot
  logic [23:0] bias_sel;
  assign bias_sel = bias[slot_top[0]];

  logic [PW-1:0] p_top, pc_top, p_bot, pc_bot;
  logic [AW-1:0] ac_t, ac_b;
  logic [BW-1:0] bc_t, bc_b;
  logic [PW-1:0] dly1, dly2;

  dsp48e2_lite #(
    .AREG(1), .BREG(1), .USE_DPORT(1'b0), .MREG(1'b0), .CREG(1'b0),
    .SIMD(SIMD_TWO24), .RND(RND_HI)
  ) u_top (
    .clk(clk2x), .rst,
    .a(a_of(p_g1)), .acin('0), .b(p_g1[17:0]), .bcin('0),
    .c({bias_sel, bias_sel}), .d('0), .pcin('0),
    .cea1(1'b0), .cea2(1'b1), .ceb1(1'b0), .ceb2(1'b1), .cec(1'b0), .ced(1'b0),
    .cead(1'b0), .cem(1'b0), .cep(1'b1), .inmode4(1'b0),
    .opmode('{w: neg1_r ? W_RND : W_ZERO, x: X_AB,
              y: first_top ? Y_C : Y_ZERO, z: Z_ZERO}),
    .p(p_top), .pcout(pc_top), .acout(ac_t), .bcout(bc_t)
  );

  dsp48e2_lite #(
    .AREG(2), .BREG(2), .USE_DPORT(1'b0), .MREG(1'b0), .CREG(1'b1),
    .SIMD(SIMD_TWO24), .RND(RND_HI)
  ) u_bot (
    .clk(clk2x), .rst,
    .a(a_of(p_g0)), .acin('0), .b(p_g0[17:0]), .bcin('0),
    .c(dly2), .d('0), .pcin(pc_top),
    .cea1(1'b1), .cea2(1'b1), .ceb1(1'b1), .ceb2(1'b1), .cec(1'b1), .ced(1'b0),
    .cead(1'b0), .cem(1'b0), .cep(1'b1), .inmode4(1'b0),
    .opmode('{w: neg0_rr ? W_RND : W_ZERO, x: X_AB,
              y: first_bot ? Y_ZERO : Y_C, z: Z_PCIN}),
    .p(p_bot), .pcout(pc_bot), .acout(ac_b), .bcout(bc_b)
  );

  // Delay registers closing the ring
  always_ff @(posedge clk2x) begin
    if (rst) begin
      dly1 <= '0;
      dly2 <= '0;
    end else begin
      dly1 <= p_bot;
      dly2 <= dly1;
    end
  end

  // Serial-to-parallel into Clk x1
  always_ff @(posedge clk1x) begin
    if (rst) begin
      res_a <= '0;
      res_b <= '0;
    end else begin
      res_a <= dly2;
      res_b <= dly1;
    end
  end

endmodule
