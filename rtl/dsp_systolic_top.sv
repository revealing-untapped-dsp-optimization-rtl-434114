// dsp_systolic_top: the three DSP48E2-optimised systolic engines of this design,
// side by side, each with its own ports:
//  * tpu_*: the 14 x 14 INT8 weight-stationary engine (TPUv1-like) with in-DSP
//    operand prefetching (tpu_engine), clocked by clk;
//  * dpu_*: the B1024 output-stationary engine (DPU-like) with in-DSP
//    multiplexing and ring accumulators (dpu_engine), clocked by the edge-aligned
//    pair clk1x / clk2x;
//  * snn_*: the 32-input spiking crossbar (FireFly-like) with in-DSP weight
//    prefetching (snn_crossbar), clocked by clk.
// The engines share nothing but the synchronous reset, which must be held for a
// few clk1x cycles. The buffers that feed them (the weight bank, activation and
// spike sources) and the consumers of their results are outside this design:
// their signals are the ports below. See the engine modules for the protocols.
module dsp_systolic_top
  import dsp_pkg::*;
#(
  parameter int unsigned TPU_ROWS = 14,
  parameter int unsigned TPU_COLS = 14,
  parameter int unsigned TPU_CASC = 7,
  parameter int unsigned DPU_ROWS = 4,
  parameter int unsigned DPU_COLS = 4,
  parameter int unsigned DPU_N    = 4,
  parameter int unsigned SNN_CHAINS = 4,
  parameter int unsigned SNN_LEN  = 16
) (
  input  logic               clk,
  input  logic               clk1x,
  input  logic               clk2x,
  input  logic               rst,
  // weight-stationary engine
  input  logic signed [7:0]  tpu_act_lo [TPU_ROWS],
  input  logic signed [7:0]  tpu_act_hi [TPU_ROWS],
  input  logic               tpu_act_valid,
  input  logic               tpu_swap,
  input  logic signed [7:0]  tpu_w_in [TPU_COLS][TPU_ROWS/TPU_CASC],
  input  logic               tpu_w_shift,
  output logic signed [23:0] tpu_out_lo [TPU_COLS],
  output logic signed [23:0] tpu_out_hi [TPU_COLS],
  output logic [TPU_COLS-1:0] tpu_out_valid,
  output logic               tpu_busy,
  output logic               tpu_loaded,
  // output-stationary engine
  input  logic [15:0]        dpu_act_col  [DPU_COLS][2*DPU_N],
  input  logic [7:0]         dpu_wgt_row  [DPU_ROWS][2*DPU_N],
  input  dpu_ctl_t           dpu_ctl,
  input  logic [23:0]        dpu_bias_row [DPU_ROWS][2],
  output logic [47:0]        dpu_res_a    [DPU_ROWS][DPU_COLS],
  output logic [47:0]        dpu_res_b    [DPU_ROWS][DPU_COLS],
  output logic [DPU_ROWS-1:0][DPU_COLS-1:0] dpu_res_valid,
  output logic [DPU_ROWS-1:0][DPU_COLS-1:0] dpu_res_half,
  // spiking crossbar
  input  logic [2*SNN_LEN-1:0] snn_spikes,
  input  logic               snn_spk_valid,
  input  logic               snn_swap,
  input  logic [31:0]        snn_w_ab_in [SNN_CHAINS],
  input  logic [31:0]        snn_w_c_in  [SNN_CHAINS],
  input  logic               snn_w_shift,
  output logic [11:0]        snn_out_lanes [SNN_CHAINS][4],
  output logic [SNN_CHAINS-1:0] snn_out_valid,
  output logic               snn_busy
);

  tpu_engine #(.ROWS(TPU_ROWS), .COLS(TPU_COLS), .CASC(TPU_CASC)) u_tpu (
    .clk, .rst,
    .act_lo(tpu_act_lo), .act_hi(tpu_act_hi), .act_valid(tpu_act_valid),
    .swap(tpu_swap), .w_in(tpu_w_in), .w_shift(tpu_w_shift),
    .out_lo(tpu_out_lo), .out_hi(tpu_out_hi), .out_valid(tpu_out_valid),
    .busy(tpu_busy), .loaded(tpu_loaded)
  );

  dpu_engine #(.ROWS(DPU_ROWS), .COLS(DPU_COLS), .N(DPU_N), .GRP(2)) u_dpu (
    .clk1x, .clk2x, .rst,
    .act_col(dpu_act_col), .wgt_row(dpu_wgt_row), .ctl(dpu_ctl), .bias_row(dpu_bias_row),
    .res_a(dpu_res_a), .res_b(dpu_res_b), .res_valid(dpu_res_valid), .res_half(dpu_res_half)
  );

  snn_crossbar #(.CHAINS(SNN_CHAINS), .LEN(SNN_LEN)) u_snn (
    .clk, .rst,
    .spikes(snn_spikes), .spk_valid(snn_spk_valid), .swap(snn_swap),
    .w_ab_in(snn_w_ab_in), .w_c_in(snn_w_c_in), .w_shift(snn_w_shift),
    .out_lanes(snn_out_lanes), .out_valid(snn_out_valid), .busy(snn_busy)
  );

endmodule
