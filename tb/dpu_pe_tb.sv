// dpu_pe_tb: self-checking test of one PE of the output-stationary engine with
// two edge-aligned clocks (Clk x2 period 10, Clk x1 period 20). Several
// accumulation tiles of random length are run back to back with random INT8
// activations, weights and 24-bit biases, including all -128 operands; the eight
// results of every tile are compared with sums computed here, and the result
// latency (N/2+5 Clk x1 cycles after the last block starts) is checked.
module dpu_pe_tb;
  import dsp_pkg::*;
  localparam int N = 4, GRP = 2, IC = GRP * N;
  localparam int NT = 6;            // tiles

  logic clk2x = 1'b0, clk1x = 1'b0, rst = 1'b1;
  // Both clocks from one process so that their common rising edges fall in
  // the same evaluation step.
  initial forever begin
    #5 clk2x = 1'b1; clk1x = ~clk1x;
    #5 clk2x = 1'b0;
  end

  logic        first_half;
  logic [15:0] act [IC];
  logic [7:0]  wgt [IC];
  dpu_ctl_t    ctl;
  logic [23:0] bias [2];
  logic [47:0] res_a, res_b;
  logic        res_valid, res_half;

  ddr_phase u_ph (.clk1x, .clk2x, .rst, .first_half);
  dpu_pe #(.N(N), .GRP(GRP)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int exp_v [NT][4][2];        // [tile][slot][lane]
  int t_last [NT];
  int n_res = 0, n_neg = 0, n_bias = 0;
  always @(posedge clk1x) cyc <= cyc + 1;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result checker (Clk x1)
  int half_seen = 0;
  always @(negedge clk1x) begin
    if (!rst && res_valid) begin
      automatic int t = n_res / 2;
      automatic int h = n_res % 2;
      automatic int sa = 2*h, sb = 2*h + 1;
      checks += 5;
      if (t >= NT) failures++;
      else begin
        if (32'(signed'(res_a[23:0]))  != exp_v[t][sa][0] || 32'(signed'(res_a[47:24])) != exp_v[t][sa][1] ||
            32'(signed'(res_b[23:0]))  != exp_v[t][sb][0] || 32'(signed'(res_b[47:24])) != exp_v[t][sb][1]) begin
          failures++;
          $display("tile %0d half %0d: got %0d %0d %0d %0d exp %0d %0d %0d %0d", t, h,
                   $signed(res_a[23:0]), $signed(res_a[47:24]), $signed(res_b[23:0]), $signed(res_b[47:24]),
                   exp_v[t][sa][0], exp_v[t][sa][1], exp_v[t][sb][0], exp_v[t][sb][1]);
        end
        if (res_half != h[0]) failures++;
        if (cyc - t_last[t] != N/2 + 5 + h) begin
          failures++;
          $display("tile %0d half %0d: latency %0d", t, h, cyc - t_last[t]);
        end
      end
      n_res++;
    end
  end

  initial begin
    ctl = '0;
    bias[0] = 0; bias[1] = 0;
    for (int i = 0; i < IC; i++) begin act[i] = 0; wgt[i] = 0; end
    repeat (4) begin @(posedge clk1x); @(negedge clk2x); end
    rst = 1'b0;
    // align to a slow cycle whose first half is coming
    repeat (2) begin @(posedge clk1x); @(negedge clk2x); end
    for (int t = 0; t < NT; t++) begin
      automatic int nb = 1 + $urandom_range(0, 5);
      automatic int b0 = int'($urandom_range(0, 200000)) - 100000;
      automatic int b1 = int'($urandom_range(0, 200000)) - 100000;
      logic signed [7:0] A [2][IC][2];   // [cycle][ic][pixel of pair]
      logic signed [7:0] Wt [2][IC];     // [cycle = out channel][ic]
      bias[0] = 24'(b0); bias[1] = 24'(b1);
      n_bias++;
      for (int s = 0; s < 4; s++) begin
        exp_v[t][s][0] = (s % 2 == 0) ? b0 : b1;
        exp_v[t][s][1] = (s % 2 == 0) ? b0 : b1;
      end
      for (int b = 0; b < nb; b++) begin
        for (int c = 0; c < 2; c++)
          for (int i = 0; i < IC; i++) begin
            A[c][i][0] = (t == 1) ? -8'sd128 : 8'($urandom);
            A[c][i][1] = (t == 1) ? -8'sd128 : 8'($urandom);
            Wt[c][i]   = (t == 1) ? -8'sd128 : 8'($urandom);
          end
        // expected: slot = 2*pixelpair + outch
        for (int pp = 0; pp < 2; pp++)
          for (int oc = 0; oc < 2; oc++)
            for (int ln = 0; ln < 2; ln++)
              for (int i = 0; i < IC; i++)
                exp_v[t][2*pp+oc][ln] += int'(A[pp][i][ln]) * int'(Wt[oc][i]);
        for (int c = 0; c < 2; c++) begin
          for (int i = 0; i < IC; i++) begin
            act[i] = {A[c][i][1], A[c][i][0]};
            wgt[i] = Wt[c][i];
            if (A[c][i][0] * Wt[0][i] < 0) n_neg++;
          end
          ctl = '{valid: 1'b1, par: c[0], first: (b == 0), last: (b == nb - 1)};
          if (c == 0 && b == nb - 1) t_last[t] = cyc;
          begin @(posedge clk1x); @(negedge clk2x); end
        end
      end
    end
    ctl = '0;
    repeat (20) begin @(posedge clk1x); @(negedge clk2x); end
    checks++;
    if (n_res != 2*NT) begin failures++; $display("results seen %0d", n_res); end
    checks++;
    if (n_neg == 0 || n_bias == 0) failures++;
    $display("tiles %0d, negative low products %0d", NT, n_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
