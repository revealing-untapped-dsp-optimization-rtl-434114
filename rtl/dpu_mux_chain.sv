// dpu_mux_chain: a cascade of N DSP48E2 slices running at Clk x2 with in-DSP
// multiplexing and INT8 packing, the compute part of one group of a PE of the
// enhanced output-stationary engine.
//
// Each Clk x1 cycle DSP k takes one packed activation word (two INT8 pixels,
// act[k] = {pixel1, pixel0}) and one INT8 weight (wgt[k]) from the slow domain.
// Activations go through the A pipeline (clock enables always high) and, via the
// pre-adder, as pixel1*2^18 + pixel0 into the multiplier. Weights go to B1 and B2
// as a ping-pong pair (BREG=1, direct B input): ce1 loads the first weight of a
// two-cycle block into B1, ce2 the second into B2, and sel (INMODE[4]) switches
// the multiplier between B1 and B2 every Clk x2 cycle. Per block of two Clk x1
// cycles every DSP so forms a0*w0, a0*w1, a1*w0, a1*w1 (a = packed pixel pair),
// and the P cascade sums them over the N DSPs: four packed pairs of partial sums
// every four Clk x2 cycles, on p.
//
// The P cascade adds one Clk x2 cycle per DSP, so DSP k must run k fast cycles
// behind DSP 0. That skew is built from floor((k+1)/2) Clk x1 staging registers
// on its inputs plus, for odd k, one A register fewer (AREG=1 instead of 2); the
// B side follows from the control pattern delayed by k (dpu_ddr_ctrl). This skew
// arrangement is this design's own; the paper shows the DSP settings but not how
// a chain is skewed.
// Timing: the product of slot s of the block whose first Clk x1 cycle starts at
// fast cycle 4j leaves on p during fast cycle 4j + N + 4 + s.
module dpu_mux_chain
  import dsp_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic         clk1x,
  input  logic         clk2x,
  input  logic         rst,
  input  logic [15:0]  act [N],
  input  logic [7:0]   wgt [N],
  input  logic [N-1:0] ce1,
  input  logic [N-1:0] ce2,
  input  logic [N-1:0] sel,
  output logic [PW-1:0] p
);

  logic [PW-1:0] pc [N+1];
  assign pc[0] = '0;

  for (genvar k = 0; k < N; k++) begin : g_dsp
    localparam int unsigned SK = (k + 1) / 2;
    logic [15:0] a_sk;
    logic [7:0]  w_sk;

    if (SK == 0) begin : g_nosk
      assign a_sk = act[k];
      assign w_sk = wgt[k];
    end else begin : g_sk
      logic [15:0] a_sr [SK];
      logic [7:0]  w_sr [SK];
      always_ff @(posedge clk1x) begin
        if (rst) begin
          for (int i = 0; i < SK; i++) begin a_sr[i] <= '0; w_sr[i] <= '0; end
        end else begin
          a_sr[0] <= act[k];
          w_sr[0] <= wgt[k];
          for (int i = 1; i < SK; i++) begin a_sr[i] <= a_sr[i-1]; w_sr[i] <= w_sr[i-1]; end
        end
      end
      assign a_sk = a_sr[SK-1];
      assign w_sk = w_sr[SK-1];
    end

    logic [AW-1:0] a_word;
    logic [DW-1:0] d_word;
    logic [PW-1:0] p_unused;
    logic [AW-1:0] acout_unused;
    logic [BW-1:0] bcout_unused;
    assign a_word = AW'({{4{a_sk[15]}}, a_sk[15:8], 18'b0});
    assign d_word = DW'(signed'(a_sk[7:0]));

    // The D register follows the A pipeline depth so the two pre-adder operands
    // stay together; it is modelled here by delaying d_word in the same way.
    logic [DW-1:0] d_al;
    if (k % 2 == 0) begin : g_d2
      always_ff @(posedge clk2x) begin
        if (rst) d_al <= '0;
        else     d_al <= d_word;
      end
    end else begin : g_d1
      assign d_al = d_word;
    end

    dsp48e2_lite #(
      .AREG((k % 2 == 0) ? 2 : 1), .BREG(1), .B_CASCADE(1'b0),
      .USE_DPORT(1'b1), .MREG(1'b1), .CREG(1'b0), .SIMD(SIMD_ONE48)
    ) u_dsp (
      .clk(clk2x), .rst,
      .a(a_word), .acin('0), .b(BW'(signed'(w_sk))), .bcin('0),
      .c('0), .d(d_al), .pcin(pc[k]),
      .cea1(1'b1), .cea2(1'b1), .ceb1(ce1[k]), .ceb2(ce2[k]), .cec(1'b0), .ced(1'b1),
      .cead(1'b1), .cem(1'b1), .cep(1'b1),
      .inmode4(sel[k]),
      .opmode((k == 0) ? '{w: W_ZERO, x: X_M, y: Y_ZERO, z: Z_ZERO}
                       : '{w: W_ZERO, x: X_M, y: Y_ZERO, z: Z_PCIN}),
      .p(p_unused), .pcout(pc[k+1]), .acout(acout_unused), .bcout(bcout_unused)
    );
  end

  assign p = pc[N];

endmodule
