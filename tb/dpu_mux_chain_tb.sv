// dpu_mux_chain_tb: one chain of N=4 DSPs of the output-stationary engine with
// its controller. Random blocks (two Clk x1 cycles: pixel pair 0 with the weights
// of output channel 0, then pixel pair 1 with those of channel 1) are streamed
// without gaps. The chain output must give, one per Clk x2 cycle, the four packed
// sums a0*w0, a0*w1, a1*w0, a1*w1 (each hi*2^18 + lo over the N inputs) of every
// block, N+4 Clk x2 cycles after the block reaches the chain. This shows each
// weight being fetched once and reused from the B1/B2 pair.
module dpu_mux_chain_tb;
  localparam int N = 4, NB = 40;
  logic clk2x = 1'b0, clk1x = 1'b0, rst = 1'b1;
  initial forever begin
    #5 clk2x = 1'b1; clk1x = ~clk1x;
    #5 clk2x = 1'b0;
  end

  logic first_half, par;
  logic [N-1:0] ce1, ce2, sel;
  logic [1:0] slot_top;
  logic first_top, first_bot;
  logic [15:0] act [N];
  logic [7:0]  wgt [N];
  logic [47:0] p;

  ddr_phase u_ph (.clk1x, .clk2x, .rst, .first_half);
  dpu_ddr_ctrl #(.N(N)) u_ctrl (.clk2x, .rst, .first_half, .par, .first_blk(1'b0),
                                .ce1, .ce2, .sel, .slot_top, .first_top, .first_bot);
  dpu_mux_chain #(.N(N)) dut (.clk1x, .clk2x, .rst, .act, .wgt, .ce1, .ce2, .sel, .p);

  int checks = 0, failures = 0, f = 0;
  logic signed [7:0] A [NB][2][N][2];   // [block][pixel pair][k][pixel]
  logic signed [7:0] Wt [NB][2][N];     // [block][out channel][k]
  int fs [NB];
  logic [47:0] E [NB][4];
  always @(posedge clk2x) f <= f + 1;

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int blk_seen = 0;
  always @(negedge clk2x) if (!rst) begin
    for (int j = 0; j < NB; j++) if (fs[j] >= 0) for (int s = 0; s < 4; s++)
      if (f == fs[j] + N + 4 + s) begin
        checks++;
        if (p != E[j][s]) begin failures++; $display("block %0d slot %0d: %h exp %h", j, s, p, E[j][s]); end
      end
  end

  initial begin
    for (int j = 0; j < NB; j++) begin
      fs[j] = -1;
      for (int y = 0; y < 2; y++) for (int k = 0; k < N; k++) begin
        A[j][y][k][0] = (j == 3) ? -8'sd128 : 8'($urandom);
        A[j][y][k][1] = (j == 3) ? -8'sd128 : 8'($urandom);
        Wt[j][y][k]   = (j == 3) ? -8'sd128 : 8'($urandom);
      end
      for (int s = 0; s < 4; s++) begin
        automatic longint e = 0;
        for (int k = 0; k < N; k++)
          e += longint'(Wt[j][s%2][k]) * (longint'(A[j][s/2][k][1]) * 262144 + longint'(A[j][s/2][k][0]));
        E[j][s] = 48'(e);
      end
    end
    par = 0;
    for (int k = 0; k < N; k++) begin act[k] = 0; wgt[k] = 0; end
    repeat (3) @(posedge clk1x);
    @(negedge clk2x) rst = 1'b0;
    repeat (2) @(posedge clk1x);
    for (int j = 0; j < NB; j++)
      for (int y = 0; y < 2; y++) begin
        @(posedge clk1x); @(negedge clk2x);
        if (y == 0) fs[j] = f;
        par = y[0];
        for (int k = 0; k < N; k++) begin act[k] = {A[j][y][k][1], A[j][y][k][0]}; wgt[k] = Wt[j][y][k]; end
      end
    repeat (N + 6) @(posedge clk1x);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
