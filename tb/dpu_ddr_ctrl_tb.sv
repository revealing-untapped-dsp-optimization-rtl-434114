// dpu_ddr_ctrl_tb: the Clk x2 controller of an output-stationary PE, together
// with the ddr_phase detector. Random par/first_blk sequences (par alternating
// per Clk x1 cycle as in operation, first_blk random per block) are applied; at
// every Clk x2 cycle the testbench checks that first_half marks the first half of
// the Clk x1 cycle, that DSP k's ce1/ce2/sel follow the block phase delayed by k
// (ce1 at phase 1, ce2 at phase 3, sel at odd phases), that at most one of
// ce1/ce2 is set per DSP, and that the slot and first strobes of the accumulator
// are the phase delayed N+5 and first_blk delayed N+5 / N+6 cycles.
module dpu_ddr_ctrl_tb;
  localparam int N = 4, DT = N + 5, NCYC = 200;
  logic clk2x = 1'b0, clk1x = 1'b0, rst = 1'b1;
  initial forever begin
    #5 clk2x = 1'b1; clk1x = ~clk1x;
    #5 clk2x = 1'b0;
  end

  logic first_half, par, first_blk;
  logic [N-1:0] ce1, ce2, sel;
  logic [1:0] slot_top;
  logic first_top, first_bot;

  ddr_phase u_ph (.clk1x, .clk2x, .rst, .first_half);
  dpu_ddr_ctrl #(.N(N)) dut (.*);

  int checks = 0, failures = 0, f = 0, n_ce1 = 0, n_ce2 = 0;
  logic [1:0] Q [4*NCYC];
  logic       FB [4*NCYC];
  always @(posedge clk2x) f <= f + 1;

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // checker: at each Clk x2 negedge
  always @(negedge clk2x) if (!rst && f > 6) begin
    Q[f]  = {par, ~clk1x};
    FB[f] = first_blk;
    checks++;
    if (first_half != clk1x) begin failures++; $display("first_half wrong at %0d", f); end
    if (f > DT + 8) begin
      for (int k = 0; k < N; k++) begin
        checks += 3;
        if (ce1[k] != (Q[f-k] == 2'd1)) begin failures++; $display("ce1[%0d] at %0d", k, f); end
        if (ce2[k] != (Q[f-k] == 2'd3)) begin failures++; $display("ce2[%0d] at %0d", k, f); end
        if (sel[k] != Q[f-k][0])        begin failures++; $display("sel[%0d] at %0d", k, f); end
        if (ce1[k] && ce2[k]) failures++;
        n_ce1 += int'(ce1[k]); n_ce2 += int'(ce2[k]);
      end
      checks += 3;
      if (slot_top  != Q[f-DT])    begin failures++; $display("slot_top at %0d", f); end
      if (first_top != FB[f-DT])   begin failures++; $display("first_top at %0d", f); end
      if (first_bot != FB[f-DT-1]) begin failures++; $display("first_bot at %0d", f); end
    end
  end

  initial begin
    par = 0; first_blk = 0;
    repeat (3) @(posedge clk1x);
    @(negedge clk2x) rst = 1'b0;
    for (int c = 0; c < NCYC; c++) begin
      @(posedge clk1x); @(negedge clk2x);
      par = c[0];
      if (!c[0]) first_blk = 1'($urandom);
    end
    checks++;
    if (n_ce1 == 0 || n_ce2 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
