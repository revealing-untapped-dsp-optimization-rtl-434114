// systolic_setup_tb: random data through the skew; row r must come out r mod SEG
// cycles later.
module systolic_setup_tb;
  localparam int ROWS = 6, SEG = 4, W = 8;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic [W-1:0] din [ROWS], dout [ROWS];
  systolic_setup #(.ROWS(ROWS), .SEG(SEG), .W(W)) dut (.*);
  int checks = 0, failures = 0;
  logic [W-1:0] hist [64][ROWS];
  initial begin #50000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int r = 0; r < ROWS; r++) din[r] = 0;
    repeat (2) @(negedge clk); rst = 0;
    for (int t = 0; t < 64; t++) begin
      for (int r = 0; r < ROWS; r++) begin din[r] = W'($urandom); hist[t][r] = din[r]; end
      #1;
      for (int r = 0; r < ROWS; r++) if (t >= r % SEG) begin
        checks++;
        if (dout[r] != hist[t - r % SEG][r]) begin failures++; $display("row %0d t %0d", r, t); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
