// dpu_engine_tb: the output-stationary engine at a reduced size (3 x 2 PEs, so
// that row and column skews differ) with N=4, two groups. Six accumulation tiles
// of random length (1 to 4 blocks) with random biases and INT8 data are streamed
// back to back; every result pair of every PE is checked against sums computed
// here, as is its latency of r + c + N/2 + 5 Clk x1 cycles after the last block.
module dpu_engine_tb;
  import dsp_pkg::*;
  localparam int DR = 3, DC = 2, DN = 4, DIC = 2 * DN;
  logic clk2x = 1'b0, clk1x = 1'b0, rst = 1'b1;
  initial forever begin
    #5 clk2x = 1'b1; clk1x = ~clk1x;
    #5 clk2x = 1'b0;
  end

  logic [15:0]        dpu_act_col [DC][DIC];
  logic [7:0]         dpu_wgt_row [DR][DIC];
  dpu_ctl_t           dpu_ctl;
  logic [23:0]        dpu_bias_row [DR][2];
  logic [47:0]        dpu_res_a [DR][DC], dpu_res_b [DR][DC];
  logic [DR-1:0][DC-1:0] dpu_res_valid, dpu_res_half;

  dpu_engine #(.ROWS(DR), .COLS(DC), .N(DN), .GRP(2)) dut (
    .clk1x, .clk2x, .rst, .act_col(dpu_act_col), .wgt_row(dpu_wgt_row), .ctl(dpu_ctl),
    .bias_row(dpu_bias_row), .res_a(dpu_res_a), .res_b(dpu_res_b),
    .res_valid(dpu_res_valid), .res_half(dpu_res_half)
  );

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk2x) cyc <= cyc + 1;

  initial begin
    #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam int DNT = 6;
  int d_nb [DNT];
  int d_exp [DNT][DR][DC][4][2];
  int d_tlast [DNT];
  int d_cnt [DR][DC];
  int n_bias = 0, n_s2p = 0;

  always @(negedge clk1x) if (!rst) begin
    for (int r = 0; r < DR; r++) for (int c = 0; c < DC; c++) if (dpu_res_valid[r][c]) begin
      automatic int t = d_cnt[r][c] / 2, h = d_cnt[r][c] % 2;
      n_s2p++;
      checks += 5;
      if (t >= DNT) failures++;
      else begin
        if (32'(signed'(dpu_res_a[r][c][23:0]))  != d_exp[t][r][c][2*h][0] ||
            32'(signed'(dpu_res_a[r][c][47:24])) != d_exp[t][r][c][2*h][1] ||
            32'(signed'(dpu_res_b[r][c][23:0]))  != d_exp[t][r][c][2*h+1][0] ||
            32'(signed'(dpu_res_b[r][c][47:24])) != d_exp[t][r][c][2*h+1][1]) begin
          failures++; $display("OS PE %0d,%0d tile %0d half %0d mismatch", r, c, t, h);
        end
        if (dpu_res_half[r][c] != h[0]) failures++;
        if (cyc/2 - d_tlast[t] != r + c + DN/2 + 5 + h) begin
          failures++; $display("OS latency PE %0d,%0d: %0d", r, c, cyc/2 - d_tlast[t]);
        end
      end
      d_cnt[r][c]++;
    end
  end

  task automatic run_dpu();
    logic signed [7:0] A [DC][2][DIC][2];
    logic signed [7:0] Wt [DR][2][DIC];
    for (int t = 0; t < DNT; t++) begin
      for (int r = 0; r < DR; r++) begin
        automatic int b0 = int'($urandom_range(0, 200000)) - 100000;
        automatic int b1 = int'($urandom_range(0, 200000)) - 100000;
        dpu_bias_row[r][0] = 24'(b0); dpu_bias_row[r][1] = 24'(b1);
        for (int c = 0; c < DC; c++) for (int s = 0; s < 4; s++) for (int l = 0; l < 2; l++)
          d_exp[t][r][c][s][l] = (s % 2 == 0) ? b0 : b1;
      end
      n_bias++;
      for (int b = 0; b < d_nb[t]; b++) begin
        for (int c = 0; c < DC; c++) for (int y = 0; y < 2; y++) for (int i = 0; i < DIC; i++) begin
          A[c][y][i][0] = 8'($urandom); A[c][y][i][1] = 8'($urandom);
        end
        for (int r = 0; r < DR; r++) for (int y = 0; y < 2; y++) for (int i = 0; i < DIC; i++)
          Wt[r][y][i] = 8'($urandom);
        for (int r = 0; r < DR; r++) for (int c = 0; c < DC; c++)
          for (int pp = 0; pp < 2; pp++) for (int oc = 0; oc < 2; oc++) for (int l = 0; l < 2; l++)
            for (int i = 0; i < DIC; i++)
              d_exp[t][r][c][2*pp+oc][l] += int'(A[c][pp][i][l]) * int'(Wt[r][oc][i]);
        for (int y = 0; y < 2; y++) begin
          for (int c = 0; c < DC; c++) for (int i = 0; i < DIC; i++) dpu_act_col[c][i] = {A[c][y][i][1], A[c][y][i][0]};
          for (int r = 0; r < DR; r++) for (int i = 0; i < DIC; i++) dpu_wgt_row[r][i] = Wt[r][y][i];
          dpu_ctl = '{valid: 1'b1, par: y[0], first: (b == 0), last: (b == d_nb[t] - 1)};
          if (y == 0 && b == d_nb[t] - 1) d_tlast[t] = cyc / 2;
          begin @(posedge clk1x); @(negedge clk2x); end
        end
      end
    end
    dpu_ctl = '0;
    repeat (DR + DC + 16) begin @(posedge clk1x); @(negedge clk2x); end
  endtask


  initial begin
    dpu_ctl = '0;
    for (int t = 0; t < DNT; t++) d_nb[t] = 1 + $urandom_range(0, 3);
    for (int c = 0; c < DC; c++) for (int i = 0; i < DIC; i++) dpu_act_col[c][i] = 0;
    for (int r = 0; r < DR; r++) begin
      for (int i = 0; i < DIC; i++) dpu_wgt_row[r][i] = 0;
      dpu_bias_row[r][0] = 0; dpu_bias_row[r][1] = 0;
      for (int c = 0; c < DC; c++) d_cnt[r][c] = 0;
    end
    repeat (4) @(negedge clk1x);
    @(negedge clk2x) rst = 1'b0;
    repeat (2) begin @(posedge clk1x); @(negedge clk2x); end
    run_dpu();
    for (int r = 0; r < DR; r++) for (int c = 0; c < DC; c++) begin
      checks++;
      if (d_cnt[r][c] != 2*DNT) begin failures++; $display("PE %0d,%0d: %0d results", r, c, d_cnt[r][c]); end
    end
    checks++;
    if (n_bias != DNT || n_s2p != 2*DNT*DR*DC) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
