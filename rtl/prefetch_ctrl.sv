// prefetch_ctrl: clock-enable generator for the in-DSP weight prefetch of one
// PE cascade of the weight-stationary engine (B1/B2 registers) or of one chain
// of the spiking crossbar (A1/A2 and B1/B2 registers plus the C weight stage).
//
// ce1 (prefetch) is the shift enable of the cascaded B1 registers and is simply
// the w_shift request. ce2 (swap) is a wave: a swap token entering with the first
// activation of a new weight round makes ce2[p] high one cycle after that
// activation reaches PE p, i.e. swap delayed by p+1 cycles, so every PE changes
// weight exactly when the skewed activation front reaches it. While the wave runs
// the B1 chain must hold still (ce1 low, as in the paper's waveform): busy reports
// this, and an assertion flags a shift during the wave. A second assertion flags
// a swap issued before N new weights were shifted in (loaded).
module prefetch_ctrl #(
  parameter int unsigned N = 7    // PEs in the cascade
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         w_shift,
  input  logic         swap,
  output logic         ce1,
  output logic [N-1:0] ce2,
  output logic         busy,
  output logic         loaded
);

  logic [N-1:0]        wave;
  logic [$clog2(N+1)-1:0] shifts;

  always_ff @(posedge clk) begin
    if (rst) wave <= '0;
    else     wave <= {wave[N-2:0], swap};
  end
  assign ce2  = wave;
  assign ce1  = w_shift;
  assign busy = swap | (|wave[N-2:0]);

  always_ff @(posedge clk) begin
    if (rst)                         shifts <= '0;
    else if (swap)                   shifts <= '0;
    else if (w_shift && 32'(shifts) != N) shifts <= shifts + 1'b1;
  end
  assign loaded = (32'(shifts) == N);

  a_no_shift_in_wave: assert property (@(posedge clk) disable iff (rst) busy |-> !w_shift)
    else $error("weight prefetch shift while a swap wave is running");

endmodule
