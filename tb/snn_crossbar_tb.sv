// snn_crossbar_tb: self-checking test of the spiking crossbar at a reduced size
// (2 chains of 4 PEs: 8 inputs x 8 outputs). Three weight sets are used; each
// next set is prefetched through the A/B and C paths while the current one is
// computing, then swapped in with a spike vector. Every lane sum is compared with
// the sum of weights of the inputs that spiked, modulo 2^12, and the h+LEN+2
// cycle latency is checked.
module snn_crossbar_tb;
  localparam int CH = 2, LEN = 4, NIN = 2 * LEN;
  localparam int NV = 20, NR = 3;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic [NIN-1:0] spikes;
  logic           spk_valid, swap, w_shift, busy;
  logic [31:0]    w_ab_in [CH], w_c_in [CH];
  logic [11:0]    out_lanes [CH][4];
  logic [CH-1:0]  out_valid;

  snn_crossbar #(.CHAINS(CH), .LEN(LEN)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, n_swap = 0, n_overlap = 0;
  logic signed [7:0] W [NR][NIN][CH*4];
  logic [NIN-1:0] S [NR*NV];
  int t_in [NR*NV];
  int out_cnt [CH];
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] wword(int set, int in, int h);
    logic [31:0] r;
    for (int l = 0; l < 4; l++) r[l*8 +: 8] = W[set][in][4*h + l];
    return r;
  endfunction

  task automatic set_weights(int set, int k);   // k-th shift: PE LEN-1-k
    for (int h = 0; h < CH; h++) begin
      w_ab_in[h] = wword(set, 2*(LEN-1-k), h);
      w_c_in[h]  = wword(set, 2*(LEN-1-k) + 1, h);
    end
  endtask

  function automatic void check_outputs();
    for (int h = 0; h < CH; h++) if (out_valid[h]) begin
      automatic int v = out_cnt[h];
      automatic int set = v / NV;
      for (int l = 0; l < 4; l++) begin
        automatic int e = 0;
        for (int i = 0; i < NIN; i++) if (S[v][i]) e += int'(W[set][i][4*h + l]);
        checks++;
        if (out_lanes[h][l] != 12'(e)) begin
          failures++;
          $display("chain %0d lane %0d vec %0d: got %h expected %h", h, l, v, out_lanes[h][l], 12'(e));
        end
      end
      checks++;
      if (cycle - t_in[v] != h + LEN + 2) begin failures++; $display("latency %0d", cycle - t_in[v]); end
      out_cnt[h]++;
    end
  endfunction

  initial begin
    for (int s = 0; s < NR; s++) for (int i = 0; i < NIN; i++) for (int o = 0; o < CH*4; o++)
      W[s][i][o] = (s == 1) ? -8'sd128 : 8'($urandom);
    for (int v = 0; v < NR*NV; v++) S[v] = (v % 7 == 3) ? '1 : NIN'($urandom);
    for (int h = 0; h < CH; h++) out_cnt[h] = 0;
    spikes = '0; spk_valid = 0; swap = 0; w_shift = 0;
    for (int h = 0; h < CH; h++) begin w_ab_in[h] = 0; w_c_in[h] = 0; end
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int k = 0; k < LEN; k++) begin set_weights(0, k); w_shift = 1; @(negedge clk); end
    w_shift = 0;
    for (int v = 0; v < NR*NV; v++) begin
      spikes = S[v]; spk_valid = 1; swap = (v % NV == 0); t_in[v] = cycle;
      if (swap) n_swap++;
      if (v % NV >= NV/2 && v % NV < NV/2 + LEN && v / NV + 1 < NR) begin
        checks++;
        if (busy) begin failures++; $display("busy during prefetch"); end
        set_weights(v / NV + 1, v % NV - NV/2);
        w_shift = 1;
        n_overlap++;
      end else w_shift = 0;
      @(negedge clk);
      check_outputs();
      swap = 0;
    end
    spk_valid = 0; w_shift = 0;
    repeat (LEN + CH + 8) begin @(negedge clk); check_outputs(); end
    for (int h = 0; h < CH; h++) begin
      checks++;
      if (out_cnt[h] != NR*NV) begin failures++; $display("chain %0d outputs %0d", h, out_cnt[h]); end
    end
    checks++;
    if (n_swap != NR || n_overlap == 0) failures++;
    $display("weight swaps %0d, prefetch cycles overlapped %0d", n_swap, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
