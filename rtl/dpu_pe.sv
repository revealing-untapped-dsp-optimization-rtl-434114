// dpu_pe: processing element of the enhanced output-stationary engine: GRP=2
// groups, each a chain of N=4 DSP slices with in-DSP multiplexing (dpu_mux_chain),
// and one ring accumulator (dpu_ring_acc) shared by both groups: 10 DSPs.
//
// Per two-cycle block (Clk x1) the PE takes, for each of its GRP*N input channels,
// two packed activation words (cycle 0: pixels 0/1, cycle 1: pixels 2/3) and two
// weights (cycle 0: output channel 0, cycle 1: output channel 1). Group g handles
// input channels g*N .. g*N+N-1. It accumulates the 4 pixel x 2 channel outputs
// of the block onto the output-stationary sums, starting from the bias at a block
// marked first. After a block marked last the eight 24-bit results leave on two
// Clk x1 cycles: res_half 0 carries slot 0 (res_a) and slot 1 (res_b), res_half 1
// carries slots 2 and 3, where slot 0 = pixels 0/1 x channel 0, slot 1 = pixels
// 0/1 x channel 1, slot 2 = pixels 2/3 x channel 0, slot 3 = pixels 2/3 x channel
// 1, and each word holds the lower pixel in bits 23:0 and the upper in 47:24.
// Latency: res_valid rises N/2+5 Clk x1 cycles after the first cycle of the last
// block. first_half comes from the engine's ddr_phase. bias[0] and bias[1] (the
// biases of output channels 0 and 1) must be held during both cycles of the
// first block of an accumulation.
module dpu_pe
  import dsp_pkg::*;
#(
  parameter int unsigned N   = 4,
  parameter int unsigned GRP = 2
) (
  input  logic          clk1x,
  input  logic          clk2x,
  input  logic          rst,
  input  logic          first_half,
  input  logic [15:0]   act [GRP*N],
  input  logic [7:0]    wgt [GRP*N],
  input  dpu_ctl_t      ctl,
  input  logic [23:0]   bias [2],
  output logic [PW-1:0] res_a,
  output logic [PW-1:0] res_b,
  output logic          res_valid,
  output logic          res_half
);

  localparam int unsigned OLAT = N / 2 + 5;

  initial begin
    assert (GRP == 2 && N % 2 == 0 && N >= 2 && N <= 6)
      else $fatal(1, "dpu_pe: GRP must be 2 and N even, at most 6 (18-bit low field)");
  end

  logic [N-1:0] ce1, ce2, sel;
  logic [1:0]   slot_top;
  logic         first_top, first_bot;

  dpu_ddr_ctrl #(.N(N)) u_ctrl (
    .clk2x, .rst, .first_half, .par(ctl.par), .first_blk(ctl.first),
    .ce1, .ce2, .sel, .slot_top, .first_top, .first_bot
  );

  logic [PW-1:0] pg [GRP];
  for (genvar g = 0; g < GRP; g++) begin : g_grp
    logic [15:0] a_g [N];
    logic [7:0]  w_g [N];
    for (genvar k = 0; k < N; k++) begin : g_k
      assign a_g[k] = act[g*N + k];
      assign w_g[k] = wgt[g*N + k];
    end
    dpu_mux_chain #(.N(N)) u_chain (
      .clk1x, .clk2x, .rst, .act(a_g), .wgt(w_g), .ce1, .ce2, .sel, .p(pg[g])
    );
  end

  // Bias stack: bias[oc] is given with the first block of an accumulation and
  // delayed in Clk x1 so that it is in place exactly while the top DSP handles
  // the slots of that output channel (slots 0/2 and 1/3 fall one Clk x1 cycle
  // apart, so the two channels get different depths).
  localparam int unsigned BD0 = (N + 5) / 2;
  localparam int unsigned BD1 = (N + 6) / 2;
  logic [23:0] bsr0 [BD0];
  logic [23:0] bsr1 [BD1];
  logic [23:0] bias_d [2];
  always_ff @(posedge clk1x) begin
    if (rst) begin
      for (int i = 0; i < BD0; i++) bsr0[i] <= '0;
      for (int i = 0; i < BD1; i++) bsr1[i] <= '0;
    end else begin
      bsr0[0] <= bias[0];
      bsr1[0] <= bias[1];
      for (int i = 1; i < BD0; i++) bsr0[i] <= bsr0[i-1];
      for (int i = 1; i < BD1; i++) bsr1[i] <= bsr1[i-1];
    end
  end
  assign bias_d[0] = bsr0[BD0-1];
  assign bias_d[1] = bsr1[BD1-1];

  dpu_ring_acc u_acc (
    .clk1x, .clk2x, .rst, .p_g0(pg[0]), .p_g1(pg[1]),
    .slot_top, .first_top, .first_bot, .bias(bias_d), .res_a, .res_b
  );

  // Output valid: the last token of a block, delayed to the serial-to-parallel
  // capture.
  logic [OLAT:0] last_sr;
  assign last_sr[0] = ctl.valid & ctl.last & ~ctl.par;
  always_ff @(posedge clk1x) begin
    if (rst) last_sr[OLAT:1] <= '0;
    else     last_sr[OLAT:1] <= last_sr[OLAT-1:0];
  end
  logic last_sr_d;
  always_ff @(posedge clk1x) begin
    if (rst) last_sr_d <= 1'b0;
    else     last_sr_d <= last_sr[OLAT];
  end
  assign res_valid = last_sr[OLAT] | last_sr_d;
  assign res_half  = last_sr_d;

endmodule
