// dpu_ring_acc_tb: the two-DSP ring accumulator on its own. The testbench drives
// the packed chain words of both groups (random 24-bit high and signed 18-bit low
// fields, so about half need the borrow correction) one slot per Clk x2 cycle,
// with the slot, first-block strobes and biases the PE controller would give.
// Tiles of 1 to 4 blocks run back to back. At every Clk x1 edge both
// serial-to-parallel outputs are compared with the running per-slot sums
// computed here: res_a must hold the sum after the slot presented six Clk x2
// cycles before the edge and res_b the one five cycles before.
module dpu_ring_acc_tb;
  import dsp_pkg::*;
  logic clk2x = 1'b0, clk1x = 1'b0, rst = 1'b1;
  initial forever begin
    #5 clk2x = 1'b1; clk1x = ~clk1x;
    #5 clk2x = 1'b0;
  end

  logic [47:0] p_g0, p_g1, res_a, res_b;
  logic [1:0]  slot_top;
  logic        first_top, first_bot;
  logic [23:0] bias [2];

  dpu_ring_acc dut (.*);

  localparam int T0 = 8, NB = 40, NC = T0 + 4*NB + 12;
  int checks = 0, failures = 0, f = 0, n_neg = 0, n_first = 0;
  logic [47:0] W0 [NC], W1 [NC];
  logic        FIRST [NC];
  logic [23:0] B [NC][2];
  logic [23:0] M [NC][2];            // model: accumulator lanes after cycle i

  always @(posedge clk2x) f <= f + 1;

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [47:0] word(input int hi, input int lo);
    return 48'(longint'(hi) * 262144 + longint'(lo));
  endfunction

  // check the serial-to-parallel outputs after every Clk x1 edge
  always @(negedge clk2x) if (!rst && clk1x && f - 6 >= T0 && f - 5 < T0 + 4*NB) begin
    checks += 2;
    if (res_a != {M[f-6][1], M[f-6][0]}) begin failures++; $display("res_a @%0d: %h exp %h", f, res_a, {M[f-6][1], M[f-6][0]}); end
    if (res_b != {M[f-5][1], M[f-5][0]}) begin failures++; $display("res_b @%0d: %h exp %h", f, res_b, {M[f-5][1], M[f-5][0]}); end
  end

  initial begin
    // build the stimulus and the model
    automatic int left = 0;
    logic [23:0] tb0, tb1;
    for (int i = 0; i < NC; i++) begin
      W0[i] = '0; W1[i] = '0; FIRST[i] = 1'b0; B[i][0] = '0; B[i][1] = '0; M[i][0] = '0; M[i][1] = '0;
    end
    for (int i = T0; i < T0 + 4*NB; i++) begin
      automatic int s = (i - T0) % 4;
      automatic int lo0 = int'($urandom_range(0, 262143)) - 131072, lo1 = int'($urandom_range(0, 262143)) - 131072;
      automatic int hi0 = int'($urandom_range(0, 16777215)) - 8388608, hi1 = int'($urandom_range(0, 16777215)) - 8388608;
      if (s == 0) begin
        if (left == 0) begin
          left = 1 + $urandom_range(0, 3);
          tb0 = 24'($urandom); tb1 = 24'($urandom);
          n_first++;
        end
        left--;
      end
      W0[i] = word(hi0, lo0); W1[i] = word(hi1, lo1);
      if (lo0 < 0) n_neg++;
      B[i][0] = tb0; B[i][1] = tb1;
    end
    // mark first blocks: a block is first when the bias pair changed
    for (int i = T0; i < T0 + 4*NB; i += 4)
      FIRST[i] = (i == T0) || (B[i][0] != B[i-4][0]) || (B[i][1] != B[i-4][1]);
    for (int i = T0; i < T0 + 4*NB; i++) begin
      automatic int s = (i - T0) % 4;
      automatic logic first = FIRST[i - s];
      automatic logic [23:0] bs = B[i][s % 2];
      for (int l = 0; l < 2; l++) begin
        // lane 0: the signed low fields; lane 1: the high fields with the borrow restored
        automatic logic signed [17:0] lo0 = W0[i][17:0], lo1 = W1[i][17:0];
        automatic logic [23:0] lane0 = 24'(lo0) + 24'(lo1);
        automatic logic [23:0] lane1 = W0[i][41:18] + 24'(W0[i][17]) + W1[i][41:18] + 24'(W1[i][17]);
        automatic logic [23:0] part = (l == 0) ? lane0 : lane1;
        M[i][l] = part + (first ? bs : M[i-4][l]);
      end
    end

    p_g0 = '0; p_g1 = '0; slot_top = '0; first_top = 0; first_bot = 0; bias[0] = '0; bias[1] = '0;
    repeat (3) @(negedge clk2x);
    rst = 1'b0;
    // align so that f is even at slot 0 (clk1x edge pairs slots 0/1 and 2/3)
    while (f < 2) @(negedge clk2x);
    while (f < NC) begin
      automatic int i = f;
      p_g0 = (i < NC) ? W0[i] : '0;
      p_g1 = (i < NC) ? W1[i] : '0;
      // top DSP holds cycle i-1, bottom DSP adds cycle i-2
      slot_top  = (i - 1 >= T0) ? 2'((i - 1 - T0) % 4) : 2'd0;
      first_top = (i - 1 >= T0 && i - 1 < T0 + 4*NB) ? FIRST[i - 1 - (i - 1 - T0) % 4] : 1'b1;
      first_bot = (i - 2 >= T0 && i - 2 < T0 + 4*NB) ? FIRST[i - 2 - (i - 2 - T0) % 4] : 1'b1;
      bias[0]   = (i - 1 >= 0) ? B[i-1][0] : '0;
      bias[1]   = (i - 1 >= 0) ? B[i-1][1] : '0;
      @(negedge clk2x);
    end
    checks++;
    if (n_neg == 0 || n_first < 2) begin failures++; $display("stimulus lacks negative low fields or tiles"); end
    $display("tiles %0d, negative low fields %0d", n_first, n_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
