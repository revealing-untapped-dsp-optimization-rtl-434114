// tpu_pe: one processing element of the weight-stationary (TPUv1-like) engine,
// mapped onto a single DSP48E2 slice with in-DSP operand prefetching.
//
// The B input pipeline is set up as in the paper's prefetch scheme: BREG=2,
// BCASCREG=1 and the B input taken from the BCIN cascade (the first PE of a
// cascade takes the B port instead). B1 is the prefetch stage: with ce1 high it
// loads the weight of the PE below and passes its old value on through BCOUT, so
// the B1 registers of a cascade form a shift chain. B2 holds the stationary weight
// used by the multiplier (INMODE[4]=0); a one-cycle ce2 pulse copies B1 into B2.
//
// Two INT8 activations share the weight (INT8 packing): act_hi goes to A shifted
// left by 18 bits and act_lo to D, the pre-adder forms act_hi*2^18 + act_lo and
// the product carries both act_lo*w (bits 17:0) and act_hi*w (bits 47:18).
// Partial sums enter through PCIN and leave through PCOUT. The first PE of a
// cascade adds the RND constant 2^17 instead of PCIN: this offset keeps the low
// field non-negative for up to 7 packed products, so it never borrows from the
// high field (the offset is removed once, at the column adder). This offset is a
// choice of this design; the paper names INT8 packing without giving its
// correction for this engine.
//
// Timing: act_* are registered in A2/D (edge 1), the pre-adder in AD (edge 2), the
// product in M (edge 3) and the sum in P (edge 4). ce2 must be high in the cycle
// after the first activation pair for the new weight is presented (while A2/D hold
// it). All enables except ce1/ce2 are tied high.
module tpu_pe
  import dsp_pkg::*;
#(
  parameter bit HEAD = 1'b0   // first PE of a cascade: B from w_in, no PCIN
) (
  input  logic              clk,
  input  logic              rst,
  input  logic signed [7:0] act_lo,
  input  logic signed [7:0] act_hi,
  input  logic signed [7:0] w_in,     // weight input, used when HEAD
  input  logic [BW-1:0]     bcin,     // prefetch cascade from the PE below
  input  logic [PW-1:0]     pcin,     // partial sum cascade from the PE below
  input  logic              ce1,      // prefetch shift
  input  logic              ce2,      // weight swap
  output logic [BW-1:0]     bcout,
  output logic [PW-1:0]     pcout
);

  localparam logic [PW-1:0] HEAD_OFFSET = PW'(1) << 17;

  logic [AW-1:0] a_word;
  logic [DW-1:0] d_word;
  opmode_t       opm;
  logic [PW-1:0] p_unused;
  logic [AW-1:0] acout_unused;

  assign a_word = AW'({{4{act_hi[7]}}, act_hi, 18'b0});
  assign d_word = DW'(signed'(act_lo));
  assign opm    = HEAD ? '{w: W_RND,  x: X_M, y: Y_ZERO, z: Z_ZERO}
                       : '{w: W_ZERO, x: X_M, y: Y_ZERO, z: Z_PCIN};

  dsp48e2_lite #(
    .AREG(1), .BREG(2), .B_CASCADE(!HEAD), .BCASCREG(1),
    .USE_DPORT(1'b1), .MREG(1'b1), .CREG(1'b0),
    .SIMD(SIMD_ONE48), .RND(HEAD ? HEAD_OFFSET : '0)
  ) u_dsp (
    .clk, .rst,
    .a(a_word), .acin('0),
    .b(BW'(signed'(w_in))), .bcin,
    .c('0), .d(d_word), .pcin,
    .cea1(1'b1), .cea2(1'b1), .ceb1(ce1), .ceb2(ce2), .cec(1'b0), .ced(1'b1),
    .cead(1'b1), .cem(1'b1), .cep(1'b1),
    .inmode4(1'b0), .opmode(opm),
    .p(p_unused), .pcout, .acout(acout_unused), .bcout
  );

endmodule
