// tpu_engine_tb: self-checking test of the weight-stationary engine at a reduced
// size (6 rows in two cascades of 3, 4 columns). It prefetches a first weight
// set, starts a round with swap, prefetches a second set through the B1 chains
// while the first round is computing, swaps again and checks every column output
// against dot products computed here, plus the c+CASC+5 cycle latency.
module tpu_engine_tb;
  localparam int ROWS = 6, COLS = 4, CASC = 3, NCH = ROWS / CASC;
  localparam int NV = 24;            // vectors per weight round
  localparam int NR = 3;             // weight rounds

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic signed [7:0]  act_lo [ROWS], act_hi [ROWS];
  logic               act_valid, swap, w_shift, busy, loaded;
  logic signed [7:0]  w_in [COLS][NCH];
  logic signed [23:0] out_lo [COLS], out_hi [COLS];
  logic [COLS-1:0]    out_valid;

  tpu_engine #(.ROWS(ROWS), .COLS(COLS), .CASC(CASC)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int n_swap = 0, n_overlap = 0;
  logic signed [7:0] W [NR][ROWS][COLS];
  logic signed [7:0] A_lo [NR*NV][ROWS], A_hi [NR*NV][ROWS];
  int t_in [NR*NV];
  int out_cnt [COLS];

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic shift_weights(input int set);
    for (int k = 0; k < CASC; k++) begin
      for (int c = 0; c < COLS; c++)
        for (int h = 0; h < NCH; h++) w_in[c][h] = W[set][h*CASC + CASC-1-k][c];
      w_shift = 1'b1;
      if (act_valid) n_overlap++;
      @(negedge clk);
      check_outputs();
    end
    w_shift = 1'b0;
  endtask

  function automatic void check_outputs();
    for (int c = 0; c < COLS; c++) begin
      if (out_valid[c]) begin
        automatic int v = out_cnt[c];
        automatic int set = v / NV;
        automatic int e_lo = 0, e_hi = 0;
        for (int r = 0; r < ROWS; r++) begin
          e_lo += int'(W[set][r][c]) * int'(A_lo[v][r]);
          e_hi += int'(W[set][r][c]) * int'(A_hi[v][r]);
        end
        checks += 3;
        if (int'(out_lo[c]) != e_lo || int'(out_hi[c]) != e_hi) begin
          failures++;
          $display("col %0d vec %0d: got %0d/%0d expected %0d/%0d", c, v, out_lo[c], out_hi[c], e_lo, e_hi);
        end
        if (cycle - t_in[v] != c + CASC + 5) begin
          failures++;
          $display("col %0d vec %0d: latency %0d", c, v, cycle - t_in[v]);
        end
        if (v >= NR*NV) failures++;
        out_cnt[c]++;
      end
    end
  endfunction

  initial begin
    for (int s = 0; s < NR; s++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) W[s][r][c] = 8'($urandom);
    // Corner values: all -128 in set 1 to stress the packed low field.
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) W[1][r][c] = -8'sd128;
    for (int v = 0; v < NR*NV; v++)
      for (int r = 0; r < ROWS; r++) begin
        A_lo[v][r] = (v / NV == 1) ? -8'sd128 : 8'($urandom);
        A_hi[v][r] = 8'($urandom);
      end
    for (int c = 0; c < COLS; c++) out_cnt[c] = 0;
    act_valid = 0; swap = 0; w_shift = 0;
    for (int r = 0; r < ROWS; r++) begin act_lo[r] = 0; act_hi[r] = 0; end
    for (int c = 0; c < COLS; c++) for (int h = 0; h < NCH; h++) w_in[c][h] = 0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    @(negedge clk);
    shift_weights(0);
    checks++;
    if (!loaded) begin failures++; $display("loaded not set after prefetch"); end
    for (int v = 0; v < NR*NV; v++) begin
      for (int r = 0; r < ROWS; r++) begin act_lo[r] = A_lo[v][r]; act_hi[r] = A_hi[v][r]; end
      act_valid = 1'b1;
      swap = (v % NV == 0);
      if (swap) n_swap++;
      t_in[v] = cycle;
      @(negedge clk);
      check_outputs();
      swap = 1'b0;
      // prefetch the next set in the middle of the round, after the swap wave
      if (v % NV == NV/2 && v / NV + 1 < NR) begin
        checks++;
        if (busy) begin failures++; $display("busy still high mid-round"); end
        for (int k = 0; k < CASC; k++) begin
          v++;
          for (int r = 0; r < ROWS; r++) begin act_lo[r] = A_lo[v][r]; act_hi[r] = A_hi[v][r]; end
          t_in[v] = cycle;
          for (int c = 0; c < COLS; c++)
            for (int h = 0; h < NCH; h++) w_in[c][h] = W[v / NV + 1][h*CASC + CASC-1-k][c];
          w_shift = 1'b1;
          n_overlap++;
          @(negedge clk);
          check_outputs();
        end
        w_shift = 1'b0;
      end
    end
    act_valid = 1'b0;
    repeat (COLS + CASC + 10) begin @(negedge clk); check_outputs(); end
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (out_cnt[c] != NR*NV) begin failures++; $display("col %0d: %0d outputs", c, out_cnt[c]); end
    end
    checks++;
    if (n_swap != NR || n_overlap == 0) begin failures++; $display("mechanisms: swaps %0d overlap %0d", n_swap, n_overlap); end
    $display("weight swaps %0d, prefetch cycles overlapped with compute %0d", n_swap, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
