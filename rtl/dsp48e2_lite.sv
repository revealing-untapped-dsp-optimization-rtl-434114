// dsp48e2_lite: cycle-accurate functional model of the subset of the Xilinx
// DSP48E2 slice that the systolic engines of this design configure.
//
// What it models (from the slice's block structure: A/B/C/D pipelines, pre-adder,
// 27x18 multiplier, W/X/Y/Z multiplexers, SIMD ALU, three cascade paths):
//  * A pipeline: A1/A2 registers with separate enables (AREG 0..2), input from the
//    A port or the ACIN cascade, ACOUT taken after A1 or A2 (ACASCREG).
//  * B pipeline: B1/B2 with separate enables (CEB1/CEB2), input from B or BCIN.
//    With BREG=2 B2 loads from B1; with BREG=1 B1 and B2 both load from the input,
//    which is the "ping-pong" arrangement. INMODE[4] (inmode4) picks B1 (1) or B2
//    (0) for the multiplier. BCOUT is B1 when BCASCREG=1, else B2.
//  * Optional D port with pre-adder (A2 + D, ADREG=1), used for INT8 packing.
//  * Multiplier (27 x 18 signed) with MREG, C register (CREG), P register.
//  * Dynamic OPMODE as a struct of W/X/Y/Z selects; ALU always computes
//    W + X + Y + Z (ALUMODE 0000), split into lanes by SIMD.
// It is synthesizable, but it is a model: on a Xilinx device this module would be
// replaced by the DSP48E2 primitive with the same attributes.
// Timing: every register stage is one clk edge; P is registered (PREG=1).
// One synchronous reset clears all registers.
module dsp48e2_lite
  import dsp_pkg::*;
#(
  parameter int unsigned AREG      = 1,   // 0, 1 or 2
  parameter int unsigned BREG      = 1,   // 1 or 2
  parameter bit          A_CASCADE = 1'b0,
  parameter bit          B_CASCADE = 1'b0,
  parameter int unsigned ACASCREG  = 1,
  parameter int unsigned BCASCREG  = 1,
  parameter bit          USE_DPORT = 1'b0,
  parameter bit          MREG      = 1'b1,
  parameter bit          CREG      = 1'b1,
  parameter simd_e       SIMD      = SIMD_ONE48,
  parameter logic [PW-1:0] RND     = '0
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [AW-1:0]        a,
  input  logic [AW-1:0]        acin,
  input  logic [BW-1:0]        b,
  input  logic [BW-1:0]        bcin,
  input  logic [CW-1:0]        c,
  input  logic [DW-1:0]        d,
  input  logic [PW-1:0]        pcin,
  input  logic                 cea1, cea2, ceb1, ceb2, cec, ced, cead, cem, cep,
  input  logic                 inmode4,
  input  opmode_t              opmode,
  output logic [PW-1:0]        p,
  output logic [PW-1:0]        pcout,
  output logic [AW-1:0]        acout,
  output logic [BW-1:0]        bcout
);

  logic [AW-1:0] a_src, a1, a2, a_mul;
  logic [BW-1:0] b_src, b1, b2, b_mul;
  logic [DW-1:0] d_r, ad_r, ad_mux;
  logic [CW-1:0] c_r, c_mux;
  logic signed [44:0] m_comb;
  logic [PW-1:0] m_r, m_mux;
  logic [PW-1:0] wv, xv, yv, zv;

  assign a_src = A_CASCADE ? acin : a;
  assign b_src = B_CASCADE ? bcin : b;

  // A pipeline
  always_ff @(posedge clk) begin
    if (rst) begin
      a1 <= '0;
      a2 <= '0;
    end else begin
      if (cea1) a1 <= a_src;
      if (cea2) a2 <= (AREG == 2) ? a1 : a_src;
    end
  end
  assign a_mul = (AREG == 0) ? a_src : a2;
  assign acout = (AREG == 2 && ACASCREG == 1) ? a1 : a_mul;

  // B pipeline
  always_ff @(posedge clk) begin
    if (rst) begin
      b1 <= '0;
      b2 <= '0;
    end else begin
      if (ceb1) b1 <= b_src;
      if (ceb2) b2 <= (BREG == 2) ? b1 : b_src;
    end
  end
  assign b_mul = inmode4 ? b1 : b2;
  assign bcout = (BCASCREG == 1) ? b1 : b2;

  // D port and pre-adder
  always_ff @(posedge clk) begin
    if (rst) begin
      d_r  <= '0;
      ad_r <= '0;
    end else begin
      if (ced)  d_r  <= d;
      if (cead) ad_r <= a_mul[DW-1:0] + d_r;
    end
  end
  assign ad_mux = USE_DPORT ? ad_r : a_mul[DW-1:0];

  // Multiplier
  assign m_comb = $signed(ad_mux) * $signed(b_mul);
  always_ff @(posedge clk) begin
    if (rst)      m_r <= '0;
    else if (cem) m_r <= PW'(m_comb);
  end
  assign m_mux = MREG ? m_r : PW'(m_comb);

  // C register
  always_ff @(posedge clk) begin
    if (rst)      c_r <= '0;
    else if (cec) c_r <= c;
  end
  assign c_mux = CREG ? c_r : c;

  // Wide-bus multiplexers
  always_comb begin
    unique case (opmode.w)
      W_P:     wv = p;
      W_RND:   wv = RND;
      W_C:     wv = c_mux;
      default: wv = '0;
    endcase
    unique case (opmode.x)
      X_M:     xv = m_mux;
      X_P:     xv = p;
      X_AB:    xv = {a_mul, b_mul};
      default: xv = '0;
    endcase
    unique case (opmode.y)
      Y_C:     yv = c_mux;
      Y_ONES:  yv = '1;
      default: yv = '0;
    endcase
    unique case (opmode.z)
      Z_PCIN:  zv = pcin;
      Z_P:     zv = p;
      Z_C:     zv = c_mux;
      default: zv = '0;
    endcase
  end

  // SIMD ALU and P register
  always_ff @(posedge clk) begin
    if (rst)      p <= '0;
    else if (cep) p <= simd_add4(SIMD, wv, xv, yv, zv);
  end
  assign pcout = p;

endmodule
