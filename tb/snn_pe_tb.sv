// snn_pe_tb: a head PE and one cascaded PE of the spiking crossbar. Weights for
// both are prefetched (A:B through the A1/B1 cascade, C through the fabric
// register chain) and swapped in; then random spike pairs are applied (the
// second PE one cycle later) and each of the four 12-bit lanes of the second
// PE's output must equal the sum of the weights of the spiking inputs, two
// cycles after its spikes. A second prefetch during spiking must not change the
// results until its swap.
module snn_pe_tb;
  import dsp_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic s1a, s2a, s1b, s2b, ce1, ce2a, ce2b;
  logic [31:0] w_ab_in, w_c_in, wc_mid, wc_out;
  logic [29:0] ac0, ac1;
  logic [17:0] bc0, bc1;
  logic [47:0] pc0, pc1;

  snn_pe #(.HEAD(1'b1)) u0 (.clk, .rst, .spike1(s1a), .spike2(s2a), .w_ab_in, .w_c_in,
    .acin('0), .bcin('0), .pcin('0), .ce1, .ce2(ce2a), .acout(ac0), .bcout(bc0), .w_c_out(wc_mid), .pcout(pc0));
  snn_pe #(.HEAD(1'b0)) u1 (.clk, .rst, .spike1(s1b), .spike2(s2b), .w_ab_in(32'd0), .w_c_in(wc_mid),
    .acin(ac0), .bcin(bc0), .pcin(pc0), .ce1, .ce2(ce2b), .acout(ac1), .bcout(bc1), .w_c_out(wc_out), .pcout(pc1));

  int checks = 0, failures = 0;
  initial begin #50000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  localparam int NV = 50;
  logic [3:0] S [NV];                 // {s2b, s1b, s2a, s1a}
  logic [31:0] WAB [2][2], WC [2][2]; // [set][pe]

  function automatic logic [11:0] lane(input logic [31:0] w, int l);
    return 12'(signed'(w[l*8 +: 8]));
  endfunction

  task automatic prefetch(input int set);
    w_ab_in = WAB[set][1]; w_c_in = WC[set][1]; ce1 = 1; @(negedge clk);
    w_ab_in = WAB[set][0]; w_c_in = WC[set][0]; @(negedge clk);
    ce1 = 0;
  endtask

  initial begin
    s1a = 0; s2a = 0; s1b = 0; s2b = 0; ce1 = 0; ce2a = 0; ce2b = 0; w_ab_in = 0; w_c_in = 0;
    for (int s = 0; s < 2; s++) for (int p = 0; p < 2; p++) begin WAB[s][p] = $urandom; WC[s][p] = $urandom; end
    for (int v = 0; v < NV; v++) S[v] = 4'($urandom);
    repeat (2) @(negedge clk); rst = 0;
    prefetch(0);
    ce2a = 1; ce2b = 1; @(negedge clk); ce2a = 0; ce2b = 0;
    for (int n = 0; n < NV + 4; n++) begin
      if (n < NV) begin s1a = S[n][0]; s2a = S[n][1]; end else begin s1a = 0; s2a = 0; end
      if (n >= 1 && n - 1 < NV) begin s1b = S[n-1][2]; s2b = S[n-1][3]; end else begin s1b = 0; s2b = 0; end
      if (n == 10) begin w_ab_in = WAB[1][1]; w_c_in = WC[1][1]; ce1 = 1; end
      else if (n == 11) begin w_ab_in = WAB[1][0]; w_c_in = WC[1][0]; ce1 = 1; end
      else ce1 = 0;
      #1;
      if (n >= 3 && n - 3 < NV) begin
        automatic int v = n - 3;
        for (int l = 0; l < 4; l++) begin
          automatic logic [11:0] e = 0;
          if (S[v][0]) e += lane(WAB[0][0], l);
          if (S[v][1]) e += lane(WC[0][0], l);
          if (S[v][2]) e += lane(WAB[0][1], l);
          if (S[v][3]) e += lane(WC[0][1], l);
          checks++;
          if (pc1[l*12 +: 12] != e) begin failures++; $display("vec %0d lane %0d: got %h exp %h", v, l, pc1[l*12 +: 12], e); end
        end
      end
      @(negedge clk);
    end
    // swap in set 1 and check one all-spike vector
    ce2a = 1; ce2b = 1; @(negedge clk); ce2a = 0; ce2b = 0;
    s1a = 1; s2a = 1; @(negedge clk); s1a = 0; s2a = 0; s1b = 1; s2b = 1; @(negedge clk); s1b = 0; s2b = 0;
    @(negedge clk);
    for (int l = 0; l < 4; l++) begin
      automatic logic [11:0] e = lane(WAB[1][0], l) + lane(WC[1][0], l) + lane(WAB[1][1], l) + lane(WC[1][1], l);
      checks++;
      if (pc1[l*12 +: 12] != e) begin failures++; $display("after swap lane %0d: got %h exp %h", l, pc1[l*12 +: 12], e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
