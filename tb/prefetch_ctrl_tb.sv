// prefetch_ctrl_tb: checks the prefetch/swap enables of one cascade: ce1 follows
// w_shift, ce2[p] pulses exactly p+1 cycles after swap, busy covers the wave,
// loaded is set after N shifts and cleared by a swap.
module prefetch_ctrl_tb;
  localparam int N = 5;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic w_shift, swap, ce1, busy, loaded;
  logic [N-1:0] ce2;
  prefetch_ctrl #(.N(N)) dut (.*);
  int checks = 0, failures = 0;
  initial begin #50000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("fail: %s", what); end
  endtask
  initial begin
    w_shift = 0; swap = 0;
    repeat (2) @(negedge clk); rst = 0;
    for (int round = 0; round < 4; round++) begin
      for (int k = 0; k < N; k++) begin
        w_shift = 1; #1; chk(ce1 == 1, "ce1 follows w_shift"); chk(loaded == 0, "not loaded early");
        @(negedge clk);
      end
      w_shift = 0; #1; chk(ce1 == 0, "ce1 low"); chk(loaded == 1, "loaded after N shifts");
      @(negedge clk);
      swap = 1; #1; chk(busy == 1, "busy at swap"); chk(ce2 == 0, "no ce2 at swap cycle");
      @(negedge clk); swap = 0;
      for (int p = 0; p < N; p++) begin
        chk(ce2 == N'(1) << p, $sformatf("ce2 wave position %0d", p));
        chk(busy == (p < N-1), "busy during wave");
        chk(loaded == 0, "loaded cleared by swap");
        @(negedge clk);
      end
      chk(ce2 == 0 && busy == 0, "wave done");
      repeat (round) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
