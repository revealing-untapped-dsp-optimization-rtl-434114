// dsp_systolic_top_tb: end-to-end test of the whole design at its default sizes
// (14 x 14 weight-stationary engine, 4 x 4-PE output-stationary engine, 32-input
// x 16-output spiking crossbar). The three engines run concurrently:
//  * weight-stationary: two weight sets; the second is prefetched through the B1
//    chains while the first computes and swapped in mid-stream;
//  * output-stationary: three accumulation tiles of 3, 1 and 2 blocks with
//    biases, checked in all 16 PEs (64 x 2 lane results per tile);
//  * spiking: two weight sets, prefetch overlapped with spike processing.
// All results are compared with reference sums computed here, including the
// latencies. It also counts how often each mechanism occurred (weight swap, prefetch
// during compute, multiplexer switching between B1 and B2, packing correction
// for a negative low field, bias insertion, serial-to-parallel readout) and
// counts a failure for any that never happened.
module dsp_systolic_top_tb;
  import dsp_pkg::*;
  localparam int TR = 14, TC = 14, TK = 7, TNCH = TR / TK;
  localparam int DR = 4, DC = 4, DN = 4, DIC = 2 * DN;
  localparam int SCH = 4, SL = 16, SIN = 2 * SL;

  logic clk2x = 1'b0, clk1x = 1'b0, rst = 1'b1;
  logic clk;
  initial forever begin
    #5 clk2x = 1'b1; clk1x = ~clk1x;
    #5 clk2x = 1'b0;
  end
  assign clk = clk2x;

  logic signed [7:0]  tpu_act_lo [TR], tpu_act_hi [TR];
  logic               tpu_act_valid, tpu_swap, tpu_w_shift, tpu_busy, tpu_loaded;
  logic signed [7:0]  tpu_w_in [TC][TNCH];
  logic signed [23:0] tpu_out_lo [TC], tpu_out_hi [TC];
  logic [TC-1:0]      tpu_out_valid;
  logic [15:0]        dpu_act_col [DC][DIC];
  logic [7:0]         dpu_wgt_row [DR][DIC];
  dpu_ctl_t           dpu_ctl;
  logic [23:0]        dpu_bias_row [DR][2];
  logic [47:0]        dpu_res_a [DR][DC], dpu_res_b [DR][DC];
  logic [DR-1:0][DC-1:0] dpu_res_valid, dpu_res_half;
  logic [SIN-1:0]     snn_spikes;
  logic               snn_spk_valid, snn_swap, snn_w_shift, snn_busy;
  logic [31:0]        snn_w_ab_in [SCH], snn_w_c_in [SCH];
  logic [11:0]        snn_out_lanes [SCH][4];
  logic [SCH-1:0]     snn_out_valid;

  dsp_systolic_top dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk2x) cyc <= cyc + 1;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- weight-stationary engine ----------------
  localparam int TNV = 30, TNR = 2;
  logic signed [7:0] TW [TNR][TR][TC];
  logic signed [7:0] TAl [TNR*TNV][TR], TAh [TNR*TNV][TR];
  int t_tin [TNR*TNV];
  int t_cnt [TC];
  int n_tswap = 0, n_toverlap = 0;

  always @(negedge clk) if (!rst) begin
    for (int c = 0; c < TC; c++) if (tpu_out_valid[c]) begin
      automatic int v = t_cnt[c], s = t_cnt[c] / TNV, el = 0, eh = 0;
      for (int r = 0; r < TR; r++) begin
        el += int'(TW[s][r][c]) * int'(TAl[v][r]);
        eh += int'(TW[s][r][c]) * int'(TAh[v][r]);
      end
      checks += 2;
      if (int'(tpu_out_lo[c]) != el || int'(tpu_out_hi[c]) != eh) begin
        failures++; $display("WS col %0d vec %0d mismatch", c, v);
      end
      if (cyc - t_tin[v] != c + TK + 5) begin failures++; $display("WS latency"); end
      t_cnt[c]++;
    end
  end

  task automatic run_tpu();
    for (int s = 0; s < TNR; s++) for (int r = 0; r < TR; r++) for (int c = 0; c < TC; c++)
      TW[s][r][c] = 8'($urandom);
    for (int v = 0; v < TNR*TNV; v++) for (int r = 0; r < TR; r++) begin
      TAl[v][r] = 8'($urandom); TAh[v][r] = 8'($urandom);
    end
    for (int k = 0; k < TK; k++) begin
      for (int c = 0; c < TC; c++) for (int h = 0; h < TNCH; h++) tpu_w_in[c][h] = TW[0][h*TK + TK-1-k][c];
      tpu_w_shift = 1; @(negedge clk);
    end
    tpu_w_shift = 0;
    for (int v = 0; v < TNR*TNV; v++) begin
      for (int r = 0; r < TR; r++) begin tpu_act_lo[r] = TAl[v][r]; tpu_act_hi[r] = TAh[v][r]; end
      tpu_act_valid = 1; tpu_swap = (v % TNV == 0); t_tin[v] = cyc;
      if (tpu_swap) n_tswap++;
      if (v % TNV >= 20 && v % TNV < 20 + TK && v / TNV + 1 < TNR) begin
        if (tpu_busy) begin failures++; $display("WS busy during prefetch"); end
        for (int c = 0; c < TC; c++) for (int h = 0; h < TNCH; h++)
          tpu_w_in[c][h] = TW[v / TNV + 1][h*TK + TK-1-(v % TNV - 20)][c];
        tpu_w_shift = 1; n_toverlap++;
      end else tpu_w_shift = 0;
      @(negedge clk);
      tpu_swap = 0;
    end
    tpu_act_valid = 0; tpu_w_shift = 0;
    repeat (TC + TK + 10) @(negedge clk);
  endtask

  // ---------------- output-stationary engine ----------------
  localparam int DNT = 3;
  int d_nb [DNT] = '{3, 1, 2};
  int d_exp [DNT][DR][DC][4][2];
  int d_tlast [DNT];
  int d_cnt [DR][DC];
  int n_bias = 0, n_s2p = 0, n_sel = 0, n_neg = 0;

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

  // mechanism probes inside the output-stationary engine
  always @(posedge clk2x) if (!rst) begin
    if (dut.u_dpu.g_r[0].g_c[0].u_pe.u_ctrl.sel[0] && dut.u_dpu.g_r[0].g_c[0].u_pe.u_ctrl.ce2[0] == 1'b0) n_sel++;
    if (dut.u_dpu.g_r[0].g_c[0].u_pe.u_acc.neg0_r) n_neg++;
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

  // ---------------- spiking crossbar ----------------
  localparam int SNV = 40, SNR = 2;
  logic signed [7:0] SW [SNR][SIN][SCH*4];
  logic [SIN-1:0] SS [SNR*SNV];
  int s_tin [SNR*SNV];
  int s_cnt [SCH];
  int n_sswap = 0, n_soverlap = 0;

  always @(negedge clk) if (!rst) begin
    for (int h = 0; h < SCH; h++) if (snn_out_valid[h]) begin
      automatic int v = s_cnt[h], s = s_cnt[h] / SNV;
      for (int l = 0; l < 4; l++) begin
        automatic int e = 0;
        for (int i = 0; i < SIN; i++) if (SS[v][i]) e += int'(SW[s][i][4*h + l]);
        checks++;
        if (snn_out_lanes[h][l] != 12'(e)) begin failures++; $display("SNN chain %0d lane %0d vec %0d mismatch", h, l, v); end
      end
      checks++;
      if (cyc - s_tin[v] != h + SL + 2) begin failures++; $display("SNN latency"); end
      s_cnt[h]++;
    end
  end

  function automatic logic [31:0] sword(int set, int in, int h);
    logic [31:0] r;
    for (int l = 0; l < 4; l++) r[l*8 +: 8] = SW[set][in][4*h + l];
    return r;
  endfunction

  task automatic run_snn();
    for (int s = 0; s < SNR; s++) for (int i = 0; i < SIN; i++) for (int o = 0; o < SCH*4; o++)
      SW[s][i][o] = 8'($urandom);
    for (int v = 0; v < SNR*SNV; v++) SS[v] = SIN'($urandom);
    for (int k = 0; k < SL; k++) begin
      for (int h = 0; h < SCH; h++) begin
        snn_w_ab_in[h] = sword(0, 2*(SL-1-k), h); snn_w_c_in[h] = sword(0, 2*(SL-1-k)+1, h);
      end
      snn_w_shift = 1; @(negedge clk);
    end
    snn_w_shift = 0;
    for (int v = 0; v < SNR*SNV; v++) begin
      snn_spikes = SS[v]; snn_spk_valid = 1; snn_swap = (v % SNV == 0); s_tin[v] = cyc;
      if (snn_swap) n_sswap++;
      if (v % SNV >= 22 && v % SNV < 22 + SL && v / SNV + 1 < SNR) begin
        automatic int k = v % SNV - 22;
        if (snn_busy) begin failures++; $display("SNN busy during prefetch"); end
        for (int h = 0; h < SCH; h++) begin
          snn_w_ab_in[h] = sword(1, 2*(SL-1-k), h); snn_w_c_in[h] = sword(1, 2*(SL-1-k)+1, h);
        end
        snn_w_shift = 1; n_soverlap++;
      end else snn_w_shift = 0;
      @(negedge clk);
      snn_swap = 0;
    end
    snn_spk_valid = 0; snn_w_shift = 0;
    repeat (SL + SCH + 8) @(negedge clk);
  endtask

  initial begin
    tpu_act_valid = 0; tpu_swap = 0; tpu_w_shift = 0;
    for (int r = 0; r < TR; r++) begin tpu_act_lo[r] = 0; tpu_act_hi[r] = 0; end
    for (int c = 0; c < TC; c++) begin t_cnt[c] = 0; for (int h = 0; h < TNCH; h++) tpu_w_in[c][h] = 0; end
    dpu_ctl = '0;
    for (int c = 0; c < DC; c++) for (int i = 0; i < DIC; i++) dpu_act_col[c][i] = 0;
    for (int r = 0; r < DR; r++) begin
      for (int i = 0; i < DIC; i++) dpu_wgt_row[r][i] = 0;
      dpu_bias_row[r][0] = 0; dpu_bias_row[r][1] = 0;
      for (int c = 0; c < DC; c++) d_cnt[r][c] = 0;
    end
    snn_spikes = 0; snn_spk_valid = 0; snn_swap = 0; snn_w_shift = 0;
    for (int h = 0; h < SCH; h++) begin snn_w_ab_in[h] = 0; snn_w_c_in[h] = 0; s_cnt[h] = 0; end
    repeat (4) @(negedge clk1x);
    rst = 1'b0;
    @(negedge clk1x);
    fork
      run_tpu();
      run_dpu();
      run_snn();
    join
    for (int c = 0; c < TC; c++) begin checks++; if (t_cnt[c] != TNR*TNV) begin failures++; $display("WS col %0d count %0d", c, t_cnt[c]); end end
    for (int r = 0; r < DR; r++) for (int c = 0; c < DC; c++) begin
      checks++; if (d_cnt[r][c] != 2*DNT) begin failures++; $display("OS PE %0d,%0d count %0d", r, c, d_cnt[r][c]); end
    end
    for (int h = 0; h < SCH; h++) begin checks++; if (s_cnt[h] != SNR*SNV) begin failures++; $display("SNN count"); end end
    $display("mechanisms: WS swaps %0d, WS prefetch overlapped %0d, OS B1 selects %0d, OS negative-low corrections %0d, OS bias tiles %0d, OS serial-to-parallel words %0d, SNN swaps %0d, SNN prefetch overlapped %0d",
             n_tswap, n_toverlap, n_sel, n_neg, n_bias, n_s2p, n_sswap, n_soverlap);
    checks += 8;
    if (n_tswap == 0) failures++;
    if (n_toverlap == 0) failures++;
    if (n_sel == 0) failures++;
    if (n_neg == 0) failures++;
    if (n_bias == 0) failures++;
    if (n_s2p == 0) failures++;
    if (n_sswap == 0) failures++;
    if (n_soverlap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
