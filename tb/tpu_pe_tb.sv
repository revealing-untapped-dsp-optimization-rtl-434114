// tpu_pe_tb: a head PE and one cascaded PE. Two weights are shifted through the
// B1 prefetch chain and swapped into B2, then random packed activation pairs are
// streamed (the second PE one cycle later). The packed partial sum leaving the
// second PE must be (lo sum + 2^17) + 2^18 * hi sum, four cycles after its input.
// While streaming, a new pair of weights is prefetched and must not disturb the
// results until swapped in.
module tpu_pe_tb;
  import dsp_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic signed [7:0] lo0, hi0, lo1, hi1, w_in;
  logic ce1, ce2_0, ce2_1;
  logic [17:0] bc0, bc1;
  logic [47:0] pc0, pc1;

  tpu_pe #(.HEAD(1'b1)) u0 (.clk, .rst, .act_lo(lo0), .act_hi(hi0), .w_in, .bcin('0), .pcin('0),
                            .ce1, .ce2(ce2_0), .bcout(bc0), .pcout(pc0));
  tpu_pe #(.HEAD(1'b0)) u1 (.clk, .rst, .act_lo(lo1), .act_hi(hi1), .w_in(8'sd0), .bcin(bc0), .pcin(pc0),
                            .ce1, .ce2(ce2_1), .bcout(bc1), .pcout(pc1));

  int checks = 0, failures = 0;
  initial begin #50000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  localparam int NV = 60;
  logic signed [7:0] L0 [NV], H0 [NV], L1 [NV], H1 [NV];
  logic signed [7:0] w0, w1, nw0, nw1;

  initial begin
    lo0 = 0; hi0 = 0; lo1 = 0; hi1 = 0; w_in = 0; ce1 = 0; ce2_0 = 0; ce2_1 = 0;
    w0 = 8'($urandom); w1 = 8'($urandom); nw0 = 8'($urandom); nw1 = 8'($urandom);
    for (int v = 0; v < NV; v++) begin
      L0[v] = 8'($urandom); H0[v] = 8'($urandom); L1[v] = 8'($urandom); H1[v] = 8'($urandom);
    end
    L0[5] = -128; H0[5] = -128; L1[5] = -128; H1[5] = -128;
    repeat (2) @(negedge clk); rst = 0;
    // prefetch: weight of PE1 first, then PE0
    w_in = w1; ce1 = 1; @(negedge clk);
    w_in = w0; @(negedge clk);
    ce1 = 0;
    checks++; if (bc0 != 18'(w0) || bc1 != 18'(w1)) begin failures++; $display("prefetch chain"); end
    ce2_0 = 1; ce2_1 = 1; @(negedge clk); ce2_0 = 0; ce2_1 = 0;
    for (int n = 0; n < NV + 6; n++) begin
      if (n < NV) begin lo0 = L0[n]; hi0 = H0[n]; end
      if (n >= 1 && n - 1 < NV) begin lo1 = L1[n-1]; hi1 = H1[n-1]; end
      // prefetch new weights mid-stream, never swapped: results must not change
      if (n == 20) begin w_in = nw1; ce1 = 1; end
      else if (n == 21) begin w_in = nw0; ce1 = 1; end
      else ce1 = 0;
      #1;
      if (n >= 5 && n - 5 < NV) begin
        automatic int v = n - 5;
        automatic int slo = int'(w0) * int'(L0[v]) + int'(w1) * int'(L1[v]);
        automatic int shi = int'(w0) * int'(H0[v]) + int'(w1) * int'(H1[v]);
        automatic longint e = longint'(shi) * 262144 + longint'(slo) + 131072;
        checks++;
        if (pc1 != 48'(e)) begin failures++; $display("vec %0d: got %h expected %h", v, pc1, 48'(e)); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
