// dsp48e2_lite_tb: checks the DSP slice model in three configurations:
//  u0: pre-adder, B1/B2 with separate enables, INMODE[4] select, M and P
//      registers, W=RND, Y=C, Z=PCIN (ONE48), including the 4-cycle latency;
//  u1: X=A:B + Y=C in SIMD TWO24 (no carry across the 24-bit lanes);
//  u2: the same in SIMD FOUR12.
// Expected values are computed here from the operands.
module dsp48e2_lite_tb;
  import dsp_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  localparam logic [47:0] RND0 = 48'h000000123456;
  logic [29:0] a;
  logic [17:0] b;
  logic [47:0] c, pcin;
  logic [26:0] d;
  logic ceb1, ceb2, inmode4;
  logic [47:0] p0, p1, p2, x0, x1, x2;
  logic [29:0] ac0, ac1, ac2;
  logic [17:0] bc0, bc1, bc2;

  dsp48e2_lite #(.AREG(1), .BREG(2), .USE_DPORT(1), .MREG(1), .CREG(1), .SIMD(SIMD_ONE48), .RND(RND0)) u0 (
    .clk, .rst, .a, .acin('0), .b, .bcin('0), .c, .d, .pcin,
    .cea1(1'b1), .cea2(1'b1), .ceb1, .ceb2, .cec(1'b1), .ced(1'b1), .cead(1'b1), .cem(1'b1), .cep(1'b1),
    .inmode4, .opmode('{w: W_RND, x: X_M, y: Y_C, z: Z_PCIN}), .p(p0), .pcout(x0), .acout(ac0), .bcout(bc0));
  dsp48e2_lite #(.AREG(1), .BREG(1), .MREG(0), .CREG(0), .SIMD(SIMD_TWO24)) u1 (
    .clk, .rst, .a, .acin('0), .b, .bcin('0), .c, .d, .pcin,
    .cea1(1'b0), .cea2(1'b1), .ceb1(1'b0), .ceb2(1'b1), .cec(1'b0), .ced(1'b0), .cead(1'b0), .cem(1'b0), .cep(1'b1),
    .inmode4(1'b0), .opmode('{w: W_ZERO, x: X_AB, y: Y_C, z: Z_ZERO}), .p(p1), .pcout(x1), .acout(ac1), .bcout(bc1));
  dsp48e2_lite #(.AREG(1), .BREG(1), .MREG(0), .CREG(0), .SIMD(SIMD_FOUR12)) u2 (
    .clk, .rst, .a, .acin('0), .b, .bcin('0), .c, .d, .pcin,
    .cea1(1'b0), .cea2(1'b1), .ceb1(1'b0), .ceb2(1'b1), .cec(1'b0), .ced(1'b0), .cead(1'b0), .cem(1'b0), .cep(1'b1),
    .inmode4(1'b0), .opmode('{w: W_ZERO, x: X_AB, y: Y_C, z: Z_ZERO}), .p(p2), .pcout(x2), .acout(ac2), .bcout(bc2));

  int checks = 0, failures = 0;
  initial begin
    #50000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input logic [47:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  function automatic logic [47:0] u0_exp(logic [29:0] av, logic [26:0] dv, logic [17:0] bv, logic [47:0] cv, pv);
    logic signed [26:0] ad;
    ad = av[26:0] + dv;
    return 48'(ad * $signed(bv)) + cv + pv + RND0;
  endfunction

  initial begin
    logic [17:0] b_old, b_new;
    a = 0; b = 0; c = 0; d = 0; pcin = 0; ceb1 = 0; ceb2 = 0; inmode4 = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int it = 0; it < 40; it++) begin
      // load b_old into B1 and B2
      b_old = 18'($urandom); b_new = 18'($urandom);
      a = 30'($urandom); d = 27'($urandom); c = {$urandom, $urandom}; pcin = {$urandom, $urandom};
      b = b_old; ceb1 = 1; ceb2 = 0; @(negedge clk);
      ceb1 = 0; ceb2 = 1; @(negedge clk);
      ceb2 = 0;
      // prefetch b_new into B1 only
      b = b_new; ceb1 = 1; @(negedge clk);
      ceb1 = 0; b = 18'($urandom);
      repeat (4) @(negedge clk);
      chk(p0, u0_exp(a, d, b_old, c, pcin), "B2 stationary while B1 prefetched");
      chk(48'(bc0), 48'(b_new), "BCOUT from B1");
      inmode4 = 1; repeat (3) @(negedge clk);
      chk(p0, u0_exp(a, d, b_new, c, pcin), "INMODE[4] selects B1");
      inmode4 = 0; ceb2 = 1; @(negedge clk); ceb2 = 0;   // B2 <= B1
      repeat (3) @(negedge clk);
      chk(p0, u0_exp(a, d, b_new, c, pcin), "B2 loaded from B1");
      // SIMD lanes
      chk(48'(p1[23:0]), 48'(24'({a[5:0], b} + c[23:0])), "TWO24 lane 0");
      chk(48'(p1[47:24]), 48'(24'(a[29:6] + c[47:24])), "TWO24 lane 1");
      for (int l = 0; l < 4; l++) chk(48'(p2[l*12 +: 12]), 48'(12'(12'({a, b} >> (12*l)) + 12'(c >> (12*l)))), "FOUR12 lane");
    end
    // latency of u0: A/D -> AD -> M -> P = 4 edges
    a = 0; d = 27'd3; c = 0; pcin = 0;
    b = 18'd5; ceb1 = 1; @(negedge clk); ceb1 = 0; ceb2 = 1; @(negedge clk); ceb2 = 0;
    repeat (5) @(negedge clk);
    d = 27'd7;
    repeat (3) @(negedge clk);
    chk(p0, 48'd15 + RND0, "P before 4 edges");
    @(negedge clk);
    chk(p0, 48'd35 + RND0, "P after 4 edges");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
