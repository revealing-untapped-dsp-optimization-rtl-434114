// dpu_engine: the enhanced output-stationary systolic engine in the B1024
// parallelism of the Xilinx deep-learning processor unit DPUCZDX8G: ROWS x COLS = 4 x 4 PEs, each with
// two chains of four DSPs (8 input channels, INT8 packing, in-DSP multiplexing)
// and a two-DSP ring accumulator: 128 multiplier DSPs and 32 accumulator DSPs.
// Per Clk x1 cycle it performs 4 x 128 = 512 INT8 multiply-accumulates.
//
// Activations enter at the top of each PE column (act_col[c], 8 input channels of
// packed pixel pairs) and flow down; weights enter at the left of each PE row
// (wgt_row[r], 8 input channels, one output channel per Clk x1 cycle) and flow
// right, through one Clk x1 staging register per PE. The engine first skews column
// c and row r by c and r cycles, so PE (r,c) sees matching operands r+c cycles
// after they entered. The DSPs, the multiplexer select and the ring accumulators
// run at Clk x2; all staging is in Clk x1.
// Work per accumulation: column c covers 4 pixels (two packed pairs, given on the
// two cycles of a block), row r covers 2 output channels (one per cycle of a
// block); ctl marks blocks (see dsp_pkg::dpu_ctl_t) and applies to the whole
// array; bias_row[r] holds the two channel biases during the first block.
// Results of PE (r,c) appear on res_a/res_b[r][c] with res_valid/res_half
// (see dpu_pe), r+c+N/2+5 Clk x1 cycles after the last block began.
module dpu_engine
  import dsp_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4,
  parameter int unsigned N    = 4,
  parameter int unsigned GRP  = 2
) (
  input  logic          clk1x,
  input  logic          clk2x,
  input  logic          rst,
  input  logic [15:0]   act_col  [COLS][GRP*N],
  input  logic [7:0]    wgt_row  [ROWS][GRP*N],
  input  dpu_ctl_t      ctl,
  input  logic [23:0]   bias_row [ROWS][2],
  output logic [PW-1:0] res_a    [ROWS][COLS],
  output logic [PW-1:0] res_b    [ROWS][COLS],
  output logic [ROWS-1:0][COLS-1:0] res_valid,
  output logic [ROWS-1:0][COLS-1:0] res_half
);

  localparam int unsigned IC = GRP * N;
  localparam int unsigned AVW = IC * 16 + $bits(dpu_ctl_t);   // activation bundle
  localparam int unsigned WVW = IC * 8 + 48;                   // weight bundle + biases

  logic first_half;
  ddr_phase u_phase (.clk1x, .clk2x, .rst, .first_half);

  // Pack bundles and skew them (systolic data setup).
  logic [AVW-1:0] a_in [COLS], a_sk [COLS];
  logic [WVW-1:0] w_in [ROWS], w_sk [ROWS];
  for (genvar c = 0; c < COLS; c++) begin : g_apack
    for (genvar i = 0; i < IC; i++) begin : g_i
      assign a_in[c][i*16 +: 16] = act_col[c][i];
    end
    assign a_in[c][AVW-1 -: $bits(dpu_ctl_t)] = ctl;
  end
  for (genvar r = 0; r < ROWS; r++) begin : g_wpack
    for (genvar i = 0; i < IC; i++) begin : g_i
      assign w_in[r][i*8 +: 8] = wgt_row[r][i];
    end
    assign w_in[r][WVW-1 -: 48] = {bias_row[r][1], bias_row[r][0]};
  end

  systolic_setup #(.ROWS(COLS), .SEG(COLS), .W(AVW)) u_askew (
    .clk(clk1x), .rst, .din(a_in), .dout(a_sk));
  systolic_setup #(.ROWS(ROWS), .SEG(ROWS), .W(WVW)) u_wskew (
    .clk(clk1x), .rst, .din(w_in), .dout(w_sk));

  // av[r][c]: activation bundle at PE (r,c); wv[r][c]: weight bundle at PE (r,c).
  logic [AVW-1:0] av [ROWS][COLS];
  logic [WVW-1:0] wv [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      if (r == 0) begin : g_atop
        assign av[r][c] = a_sk[c];
      end else begin : g_astage
        always_ff @(posedge clk1x) begin
          if (rst) av[r][c] <= '0;
          else     av[r][c] <= av[r-1][c];
        end
      end
      if (c == 0) begin : g_wleft
        assign wv[r][c] = w_sk[r];
      end else begin : g_wstage
        always_ff @(posedge clk1x) begin
          if (rst) wv[r][c] <= '0;
          else     wv[r][c] <= wv[r][c-1];
        end
      end

      logic [15:0] pa [IC];
      logic [7:0]  pw [IC];
      logic [23:0] pb [2];
      dpu_ctl_t    pc;
      for (genvar i = 0; i < IC; i++) begin : g_i
        assign pa[i] = av[r][c][i*16 +: 16];
        assign pw[i] = wv[r][c][i*8 +: 8];
      end
      assign pc    = av[r][c][AVW-1 -: $bits(dpu_ctl_t)];
      assign pb[0] = wv[r][c][IC*8 +: 24];
      assign pb[1] = wv[r][c][IC*8+24 +: 24];

      dpu_pe #(.N(N), .GRP(GRP)) u_pe (
        .clk1x, .clk2x, .rst, .first_half,
        .act(pa), .wgt(pw), .ctl(pc), .bias(pb),
        .res_a(res_a[r][c]), .res_b(res_b[r][c]),
        .res_valid(res_valid[r][c]), .res_half(res_half[r][c])
      );
    end
  end

endmodule
