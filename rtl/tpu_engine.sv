// tpu_engine: the weight-stationary INT8 systolic matrix engine (TPUv1-like)
// with in-DSP operand prefetching, ROWS x COLS PEs (14 x 14 by default).
//
// Every cycle the engine takes one vector of ROWS activation pairs (act_lo,
// act_hi: two independent INT8 input streams that share each weight, INT8
// packing) and produces, COLS cycles skewed, for every column c the two dot
// products sum_r W[r][c]*act_lo[r] and sum_r W[r][c]*act_hi[r].
// Activations are skewed by systolic_setup and then staged from column to column
// through one register per PE (no broadcast); the vld/swap tokens travel with
// them. Partial sums run down the DSP P cascades.
//
// Weight loading: while the current weights compute, the next set is shifted in
// through the B1 cascades: CASC cycles of w_shift with w_in[c][h] carrying, in
// the order they are shifted, the weights of PE positions CASC-1 down to 0 of
// cascade h of column c (row h*CASC+p). Asserting swap together with an input
// vector makes that vector the first one computed with the new weights; the swap
// wave then runs diagonally through the array, and w_shift must stay low while
// busy is high (COLS+CASC cycles after the swap).
// Latency: out_valid[c] follows the input vector by c + CASC + 5 cycles.
module tpu_engine #(
  parameter int unsigned ROWS = 14,
  parameter int unsigned COLS = 14,
  parameter int unsigned CASC = 7
) (
  input  logic               clk,
  input  logic               rst,
  input  logic signed [7:0]  act_lo [ROWS],
  input  logic signed [7:0]  act_hi [ROWS],
  input  logic               act_valid,
  input  logic               swap,
  input  logic signed [7:0]  w_in   [COLS][ROWS/CASC],
  input  logic               w_shift,
  output logic signed [23:0] out_lo [COLS],
  output logic signed [23:0] out_hi [COLS],
  output logic [COLS-1:0]    out_valid,
  output logic               busy,
  output logic               loaded
);


  logic [15:0] setup_in  [ROWS];
  logic [15:0] setup_out [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_pack
    assign setup_in[r] = {act_hi[r], act_lo[r]};
  end

  systolic_setup #(.ROWS(ROWS), .SEG(CASC), .W(16)) u_setup (
    .clk, .rst, .din(setup_in), .dout(setup_out)
  );

  // Horizontal staging: stage[c] feeds column c; one register between columns.
  logic [15:0] stage [COLS][ROWS];
  logic [COLS-1:0] vld_st, swap_st, busy_c, loaded_c;

  for (genvar r = 0; r < ROWS; r++) begin : g_row0
    assign stage[0][r] = setup_out[r];
  end
  assign vld_st[0]  = act_valid;
  assign swap_st[0] = swap;

  for (genvar c = 1; c < COLS; c++) begin : g_stage
    always_ff @(posedge clk) begin
      if (rst) begin
        for (int r = 0; r < ROWS; r++) stage[c][r] <= '0;
        vld_st[c]  <= 1'b0;
        swap_st[c] <= 1'b0;
      end else begin
        for (int r = 0; r < ROWS; r++) stage[c][r] <= stage[c-1][r];
        vld_st[c]  <= vld_st[c-1];
        swap_st[c] <= swap_st[c-1];
      end
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic signed [7:0] lo [ROWS];
    logic signed [7:0] hi [ROWS];
    for (genvar r = 0; r < ROWS; r++) begin : g_split
      assign lo[r] = stage[c][r][7:0];
      assign hi[r] = stage[c][r][15:8];
    end
    tpu_column #(.ROWS(ROWS), .CASC(CASC)) u_col (
      .clk, .rst, .act_lo(lo), .act_hi(hi),
      .vld_in(vld_st[c]), .swap_in(swap_st[c]),
      .w_in(w_in[c]), .w_shift,
      .out_lo(out_lo[c]), .out_hi(out_hi[c]), .out_valid(out_valid[c]),
      .busy(busy_c[c]), .loaded(loaded_c[c])
    );
  end

  assign busy   = |busy_c | (|swap_st);
  assign loaded = &loaded_c;

endmodule
