// snn_pe: one DSP48E2 of the FireFly-style spiking crossbar, acting as a 2 x 4
// synaptic crossbar, with in-DSP weight prefetching on its A and B pipelines.
//
// The ALU runs in SIMD FOUR12 (four 12-bit lanes, one per postsynaptic neuron).
// Two presynaptic spikes steer the wide-bus multiplexers: spike1 ? A:B : 0,
// Y = spike2 ? C : 0, Z = PCIN (0 at the head of a chain), and P is their sum. A:B
// holds the four weights of presynaptic input 1 and C those of input 2, each INT8
// sign-extended into a 12-bit lane; lane sums wrap modulo 2^12 like the DSP.
// Prefetching: the A and B pipelines are set up like the weight-stationary PE
// (AREG=BREG=2, A1/B1 fed from ACIN/BCIN and cascaded on through ACOUT/BCOUT):
// with ce1 the A1:B1 chain shifts the next weights in, with ce2 A2:B2 take them
// over. C has no cascade path, so its next weights shift through one fabric
// register per PE (c_pf, also on ce1) and are taken over by the C register on
// ce2. The spikes pass through one register (the OPMODE register) before use.
// Timing: spikes presented in cycle t steer the sum registered in P at the end of
// cycle t+1; ce2 in cycle t makes the new weights count from cycle t+1 on.
module snn_pe
  import dsp_pkg::*;
#(
  parameter bit HEAD = 1'b0
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          spike1,
  input  logic          spike2,
  input  logic [31:0]   w_ab_in,   // head only: four INT8 weights for spike1
  input  logic [31:0]   w_c_in,    // four INT8 weights for spike2 (prefetch chain in)
  input  logic [AW-1:0] acin,
  input  logic [BW-1:0] bcin,
  input  logic [PW-1:0] pcin,
  input  logic          ce1,
  input  logic          ce2,
  output logic [AW-1:0] acout,
  output logic [BW-1:0] bcout,
  output logic [31:0]   w_c_out,
  output logic [PW-1:0] pcout
);

  function automatic logic [PW-1:0] lanes(input logic [31:0] w);
    logic [PW-1:0] r;
    for (int l = 0; l < 4; l++) r[l*12 +: 12] = 12'(signed'(w[l*8 +: 8]));
    return r;
  endfunction

  logic [PW-1:0] ab_word;
  assign ab_word = lanes(w_ab_in);

  // C prefetch register in fabric
  always_ff @(posedge clk) begin
    if (rst)      w_c_out <= '0;
    else if (ce1) w_c_out <= w_c_in;
  end

  // Spikes: OPMODE register
  logic s1_r, s2_r;
  always_ff @(posedge clk) begin
    if (rst) begin
      s1_r <= 1'b0;
      s2_r <= 1'b0;
    end else begin
      s1_r <= spike1;
      s2_r <= spike2;
    end
  end

  // In the DSP48E2 the A:B concatenation enters the ALU through the X
  // multiplexer (the figure of FireFly's slice writes this input as "W").
  opmode_t opm;
  assign opm = '{w: W_ZERO, x: s1_r ? X_AB : X_ZERO, y: s2_r ? Y_C : Y_ZERO,
                 z: HEAD ? Z_ZERO : Z_PCIN};

  logic [PW-1:0] p_unused;

  dsp48e2_lite #(
    .AREG(2), .BREG(2), .A_CASCADE(!HEAD), .B_CASCADE(!HEAD),
    .ACASCREG(1), .BCASCREG(1), .USE_DPORT(1'b0), .MREG(1'b0), .CREG(1'b1),
    .SIMD(SIMD_FOUR12)
  ) u_dsp (
    .clk, .rst,
    .a(ab_word[47:18]), .acin, .b(ab_word[17:0]), .bcin,
    .c(lanes(w_c_out)), .d('0), .pcin,
    .cea1(ce1), .cea2(ce2), .ceb1(ce1), .ceb2(ce2), .cec(ce2), .ced(1'b0),
    .cead(1'b0), .cem(1'b0), .cep(1'b1), .inmode4(1'b0),
    .opmode(opm),
    .p(p_unused), .pcout, .acout, .bcout
  );

endmodule
