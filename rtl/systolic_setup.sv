// systolic_setup: the "systolic data setup" skew in front of the engine.
// Row r of each incoming vector is delayed by (r mod SEG) cycles, so that it meets
// the partial sum of its cascade in the PE at position r mod SEG. With one
// cascade per column (SEG = ROWS) this is the usual triangle of delays; with the
// column split into cascades of SEG PEs every cascade starts its own triangle,
// which lets all cascades of a column finish in the same cycle (this design's
// choice). Plain shift registers, reset to zero.
module systolic_setup #(
  parameter int unsigned ROWS = 14,
  parameter int unsigned SEG  = 7,
  parameter int unsigned W    = 16
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] din  [ROWS],
  output logic [W-1:0] dout [ROWS]
);

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    localparam int unsigned D = r % SEG;
    if (D == 0) begin : g_pass
      assign dout[r] = din[r];
    end else begin : g_dly
      logic [W-1:0] sr [D];
      always_ff @(posedge clk) begin
        if (rst) begin
          for (int i = 0; i < D; i++) sr[i] <= '0;
        end else begin
          sr[0] <= din[r];
          for (int i = 1; i < D; i++) sr[i] <= sr[i-1];
        end
      end
      assign dout[r] = sr[D-1];
    end
  end

endmodule
