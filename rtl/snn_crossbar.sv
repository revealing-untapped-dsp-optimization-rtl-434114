// snn_crossbar: the FireFly-style synaptic crossbar with in-DSP weight
// prefetching: CHAINS DSP chains of LEN snn_pe each (4 x 16 = 64 DSPs by
// default). Each time step it takes 2*LEN input spikes and produces, for every
// chain, four 12-bit lane sums: lane l of chain h is the sum of the weights
// W[i][4h+l] over all inputs i that spiked (wrapping modulo 2^12).
// Input i = 2k+j (j = 0, 1) is handled by PE k of every chain, on its A:B (j=0)
// or C (j=1) weights. Spikes are skewed by PE position (systolic_setup) and
// staged from chain to chain through one register per chain (the spike staging
// path); partial sums run up each chain through the P cascade.
// Weights: the next set is shifted in with w_shift during LEN cycles, in the
// order PE LEN-1 first; w_ab_in[h] and w_c_in[h] carry the four INT8 weights of
// inputs 2k and 2k+1 for chain h's outputs. swap, given with a spike vector,
// makes it the first one that uses the new set; w_shift must stay low while busy.
// Latency: out_valid[h] follows the spike vector by h + LEN + 2 cycles.
module snn_crossbar
  import dsp_pkg::*;
#(
  parameter int unsigned CHAINS = 4,
  parameter int unsigned LEN    = 16
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [2*LEN-1:0]   spikes,
  input  logic               spk_valid,
  input  logic               swap,
  input  logic [31:0]        w_ab_in [CHAINS],
  input  logic [31:0]        w_c_in  [CHAINS],
  input  logic               w_shift,
  output logic [11:0]        out_lanes [CHAINS][4],
  output logic [CHAINS-1:0]  out_valid,
  output logic               busy
);

  localparam int unsigned LAT = LEN + 2;

  logic [1:0] sk_in [LEN], sk_out [LEN];
  for (genvar k = 0; k < LEN; k++) begin : g_pack
    assign sk_in[k] = spikes[2*k +: 2];
  end
  systolic_setup #(.ROWS(LEN), .SEG(LEN), .W(2)) u_setup (
    .clk, .rst, .din(sk_in), .dout(sk_out));

  // Spike staging: chain h gets the skewed spikes after h+1 registers, the
  // swap/valid tokens after h registers (the PEs register spikes once more).
  logic [1:0] st [CHAINS+1][LEN];
  logic [CHAINS:0] vld_st, swap_st;
  for (genvar k = 0; k < LEN; k++) begin : g_s0
    assign st[0][k] = sk_out[k];
  end
  assign vld_st[0]  = spk_valid;
  assign swap_st[0] = swap;
  for (genvar h = 1; h <= CHAINS; h++) begin : g_stage
    always_ff @(posedge clk) begin
      if (rst) begin
        for (int k = 0; k < LEN; k++) st[h][k] <= '0;
        vld_st[h]  <= 1'b0;
        swap_st[h] <= 1'b0;
      end else begin
        for (int k = 0; k < LEN; k++) st[h][k] <= st[h-1][k];
        vld_st[h]  <= vld_st[h-1];
        swap_st[h] <= swap_st[h-1];
      end
    end
  end

  logic [CHAINS-1:0] busy_h;

  for (genvar h = 0; h < CHAINS; h++) begin : g_chain
    logic [AW-1:0]  ac [LEN+1];
    logic [BW-1:0]  bc [LEN+1];
    logic [31:0]    cc [LEN+1];
    logic [PW-1:0]  pc [LEN+1];
    logic           ce1;
    logic [LEN-1:0] ce2;
    logic           loaded_unused;

    prefetch_ctrl #(.N(LEN)) u_ctrl (
      .clk, .rst, .w_shift, .swap(swap_st[h]), .ce1, .ce2,
      .busy(busy_h[h]), .loaded(loaded_unused)
    );

    assign ac[0] = '0;
    assign bc[0] = '0;
    assign cc[0] = w_c_in[h];
    assign pc[0] = '0;
    for (genvar k = 0; k < LEN; k++) begin : g_pe
      snn_pe #(.HEAD(k == 0)) u_pe (
        .clk, .rst,
        .spike1(st[h+1][k][0]), .spike2(st[h+1][k][1]),
        .w_ab_in(w_ab_in[h]), .w_c_in(cc[k]),
        .acin(ac[k]), .bcin(bc[k]), .pcin(pc[k]),
        .ce1, .ce2(ce2[k]),
        .acout(ac[k+1]), .bcout(bc[k+1]), .w_c_out(cc[k+1]), .pcout(pc[k+1])
      );
    end
    for (genvar l = 0; l < 4; l++) begin : g_lane
      assign out_lanes[h][l] = pc[LEN][l*12 +: 12];
    end

    logic [LAT-1:0] vsr;
    always_ff @(posedge clk) begin
      if (rst) vsr <= '0;
      else     vsr <= {vsr[LAT-2:0], vld_st[h]};
    end
    assign out_valid[h] = vsr[LAT-1];
  end

  assign busy = |busy_h | (|swap_st);

endmodule
