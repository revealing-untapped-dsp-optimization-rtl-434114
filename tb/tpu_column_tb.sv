// tpu_column_tb: one full-size column (14 rows in two cascades of 7, default
// parameters). The testbench applies the r mod 7 input skew itself, prefetches a
// weight set, swaps it in with the first vector, prefetches the next set during
// the round and swaps it in with the first vector of the next round. Every
// output pair is checked against dot products computed here and must appear
// CASC+5 cycles after its vector; all-(-128) rounds stress the packed low field.
module tpu_column_tb;
  localparam int ROWS = 14, CASC = 7, NCH = ROWS / CASC;
  localparam int NV = 20, NR = 3;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic signed [7:0]  act_lo [ROWS], act_hi [ROWS], w_in [NCH];
  logic               vld_in, swap_in, w_shift, out_valid, busy, loaded;
  logic signed [23:0] out_lo, out_hi;

  tpu_column dut (.*);

  int checks = 0, failures = 0, cycle = 0, out_cnt = 0;
  logic signed [7:0] W [NR][ROWS];
  logic signed [7:0] A_lo [NR*NV][ROWS], A_hi [NR*NV][ROWS];
  int t_in [NR*NV];

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic void check_out();
    if (out_valid) begin
      automatic int v = out_cnt, set = out_cnt / NV, e_lo = 0, e_hi = 0;
      for (int r = 0; r < ROWS; r++) begin
        e_lo += int'(W[set][r]) * int'(A_lo[v][r]);
        e_hi += int'(W[set][r]) * int'(A_hi[v][r]);
      end
      checks += 2;
      if (int'(out_lo) != e_lo || int'(out_hi) != e_hi) begin
        failures++; $display("vec %0d: got %0d/%0d expected %0d/%0d", v, out_lo, out_hi, e_lo, e_hi);
      end
      if (cycle - t_in[v] != CASC + 5) begin failures++; $display("vec %0d latency %0d", v, cycle - t_in[v]); end
      out_cnt++;
    end
  endfunction

  initial begin
    for (int s = 0; s < NR; s++) for (int r = 0; r < ROWS; r++) W[s][r] = (s == 1) ? -8'sd128 : 8'($urandom);
    for (int v = 0; v < NR*NV; v++) for (int r = 0; r < ROWS; r++) begin
      A_lo[v][r] = (v / NV == 1) ? -8'sd128 : 8'($urandom);
      A_hi[v][r] = (v / NV == 1) ? -8'sd128 : 8'($urandom);
    end
    vld_in = 0; swap_in = 0; w_shift = 0;
    for (int r = 0; r < ROWS; r++) begin act_lo[r] = 0; act_hi[r] = 0; end
    for (int h = 0; h < NCH; h++) w_in[h] = 0;
    repeat (3) @(negedge clk); rst = 0; @(negedge clk);
    for (int k = 0; k < CASC; k++) begin
      for (int h = 0; h < NCH; h++) w_in[h] = W[0][h*CASC + CASC-1-k];
      w_shift = 1; @(negedge clk);
    end
    w_shift = 0;
    checks++; if (!loaded) begin failures++; $display("loaded low after prefetch"); end
    for (int n = 0; n < NR*NV + CASC; n++) begin
      // skewed inputs: row r sees vector n - r mod CASC
      for (int r = 0; r < ROWS; r++) begin
        automatic int v = n - r % CASC;
        if (v >= 0 && v < NR*NV) begin act_lo[r] = A_lo[v][r]; act_hi[r] = A_hi[v][r]; end
        else begin act_lo[r] = 8'($urandom); act_hi[r] = 8'($urandom); end
      end
      vld_in  = (n < NR*NV);
      swap_in = (n < NR*NV) && (n % NV == 0);
      if (n < NR*NV) t_in[n] = cycle;
      // prefetch of the next set, mid-round
      w_shift = 0;
      if (n < NR*NV && n % NV >= 8 && n % NV < 8 + CASC && n / NV + 1 < NR) begin
        for (int h = 0; h < NCH; h++) w_in[h] = W[n / NV + 1][h*CASC + CASC-1-(n % NV - 8)];
        w_shift = 1;
      end
      @(negedge clk);
      check_out();
    end
    vld_in = 0; swap_in = 0; w_shift = 0;
    repeat (CASC + 8) begin @(negedge clk); check_out(); end
    checks++; if (out_cnt != NR*NV) begin failures++; $display("%0d outputs", out_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
