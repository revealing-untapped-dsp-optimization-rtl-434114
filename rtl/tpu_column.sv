// tpu_column: one PE column of the weight-stationary engine.
//
// The ROWS PEs of a column are split into NCH = ROWS/CASC cascades of CASC PEs
// (CASC at most 7: the paper's maximum cascade length for INT8 packing; seven
// packed products of -128*-128 plus the 2^17 offset still fit the 18-bit low
// field). Each cascade has its own B1 prefetch chain fed by w_in[h] and its own
// P cascade. One more DSP (SIMD TWO24) adds the two cascade outputs: both packed
// words are rewired so that the low field sits in lane 0 and the high field in
// lane 1, and its static RND constant removes the 2^17 offsets. That is the 15th
// DSP of a 14-row column (Table I: 210 DSPs for 14x14). With NCH=1 the adder
// only unpacks.
//
// Inputs: act_lo/act_hi[r] must already be skewed by r mod CASC (systolic_setup);
// vld_in and swap_in mark the cycle at which the vector is at cascade position 0.
// out_lo/out_hi are the two 24-bit column sums (sum over rows of w*act_lo and of
// w*act_hi), valid with out_valid CASC+5 cycles after vld_in.
module tpu_column
  import dsp_pkg::*;
#(
  parameter int unsigned ROWS = 14,
  parameter int unsigned CASC = 7
) (
  input  logic              clk,
  input  logic              rst,
  input  logic signed [7:0] act_lo [ROWS],
  input  logic signed [7:0] act_hi [ROWS],
  input  logic              vld_in,
  input  logic              swap_in,
  input  logic signed [7:0] w_in   [ROWS/CASC],
  input  logic              w_shift,
  output logic signed [23:0] out_lo,
  output logic signed [23:0] out_hi,
  output logic              out_valid,
  output logic              busy,
  output logic              loaded
);

  localparam int unsigned NCH = ROWS / CASC;
  localparam int unsigned LAT = CASC + 5;

  initial begin
    assert (NCH * CASC == ROWS && (NCH == 1 || NCH == 2) && CASC >= 2 && CASC <= 7)
      else $fatal(1, "tpu_column: ROWS must be CASC or 2*CASC with 2 <= CASC <= 7");
  end

  logic [PW-1:0] chain_out [NCH];
  logic [NCH-1:0] busy_h, loaded_h;

  for (genvar h = 0; h < NCH; h++) begin : g_casc
    logic [BW-1:0]   bc [CASC+1];
    logic [PW-1:0]   pc [CASC+1];
    logic            ce1;
    logic [CASC-1:0] ce2;

    prefetch_ctrl #(.N(CASC)) u_ctrl (
      .clk, .rst, .w_shift, .swap(swap_in), .ce1, .ce2,
      .busy(busy_h[h]), .loaded(loaded_h[h])
    );

    assign bc[0] = '0;
    assign pc[0] = '0;
    for (genvar p = 0; p < CASC; p++) begin : g_pe
      tpu_pe #(.HEAD(p == 0)) u_pe (
        .clk, .rst,
        .act_lo(act_lo[h*CASC + p]), .act_hi(act_hi[h*CASC + p]),
        .w_in(w_in[h]), .bcin(bc[p]), .pcin(pc[p]),
        .ce1, .ce2(ce2[p]),
        .bcout(bc[p+1]), .pcout(pc[p+1])
      );
    end
    assign chain_out[h] = pc[CASC];
  end

  assign busy   = |busy_h;
  assign loaded = &loaded_h;

  // Column adder: lane 0 = low fields, lane 1 = high fields, offsets removed.
  localparam logic [23:0] LANE0_FIX = 24'(-(NCH * (1 << 17)));
  localparam logic [PW-1:0] ADD_RND = {24'b0, LANE0_FIX};

  logic [AW-1:0] add_a;
  logic [BW-1:0] add_b;
  logic [CW-1:0] add_c;
  logic [PW-1:0] add_p, add_pcout;
  logic [AW-1:0] add_acout;
  logic [BW-1:0] add_bcout;

  assign add_a = {chain_out[0][41:18], 6'b0};
  assign add_b = chain_out[0][17:0];
  if (NCH == 2) begin : g_two
    assign add_c = {chain_out[1][41:18], 6'b0, chain_out[1][17:0]};
  end else begin : g_one
    assign add_c = '0;
  end

  dsp48e2_lite #(
    .AREG(1), .BREG(1), .USE_DPORT(1'b0), .MREG(1'b0), .CREG(1'b1),
    .SIMD(SIMD_TWO24), .RND(ADD_RND)
  ) u_add (
    .clk, .rst,
    .a(add_a), .acin('0), .b(add_b), .bcin('0), .c(add_c), .d('0), .pcin('0),
    .cea1(1'b0), .cea2(1'b1), .ceb1(1'b0), .ceb2(1'b1), .cec(1'b1), .ced(1'b0),
    .cead(1'b0), .cem(1'b0), .cep(1'b1),
    .inmode4(1'b0),
    .opmode('{w: W_RND, x: X_AB, y: Y_C, z: Z_ZERO}),
    .p(add_p), .pcout(add_pcout), .acout(add_acout), .bcout(add_bcout)
  );

  assign out_lo = add_p[23:0];
  assign out_hi = add_p[47:24];

  // Valid token delay line
  logic [LAT-1:0] vld_sr;
  always_ff @(posedge clk) begin
    if (rst) vld_sr <= '0;
    else     vld_sr <= {vld_sr[LAT-2:0], vld_in};
  end
  assign out_valid = vld_sr[LAT-1];

endmodule
