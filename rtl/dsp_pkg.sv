// dsp_pkg: types and constants shared by the DSP48E2-based systolic engines.
// The multiplexer selects mirror the W/X/Y/Z multiplexers of the DSP48E2 slice
// (only the settings the engines use are modelled), and the SIMD modes mirror
// the ONE48 / TWO24 / FOUR12 carry-split modes of its 48-bit ALU.
package dsp_pkg;

  typedef enum logic [1:0] {W_ZERO, W_P, W_RND, W_C}   wsel_e;
  typedef enum logic [1:0] {X_ZERO, X_M, X_P, X_AB}    xsel_e;  // X_M: full product (X+Y of the slice)
  typedef enum logic [1:0] {Y_ZERO, Y_C, Y_ONES}       ysel_e;
  typedef enum logic [1:0] {Z_ZERO, Z_PCIN, Z_P, Z_C}  zsel_e;

  typedef struct packed {
    wsel_e w;
    xsel_e x;
    ysel_e y;
    zsel_e z;
  } opmode_t;

  typedef enum logic [1:0] {SIMD_ONE48, SIMD_TWO24, SIMD_FOUR12} simd_e;

  // Port widths of the DSP48E2 slice.
  localparam int unsigned AW = 30;
  localparam int unsigned BW = 18;
  localparam int unsigned CW = 48;
  localparam int unsigned DW = 27;
  localparam int unsigned PW = 48;

  // Control token that travels with the data of the output-stationary engine,
  // one per Clk x1 cycle. A block is two Clk x1 cycles (par 0 then 1); first and
  // last mark the first and last block of an accumulation.
  typedef struct packed {
    logic valid;
    logic par;
    logic first;
    logic last;
  } dpu_ctl_t;

  // SIMD-aware 48-bit add: carries do not cross lane borders.
  function automatic logic [PW-1:0] simd_add4(input simd_e mode,
                                             input logic [PW-1:0] w, x, y, z);
    logic [PW-1:0] r;
    case (mode)
      SIMD_TWO24: begin
        r[23:0]  = w[23:0]  + x[23:0]  + y[23:0]  + z[23:0];
        r[47:24] = w[47:24] + x[47:24] + y[47:24] + z[47:24];
      end
      SIMD_FOUR12: begin
        for (int l = 0; l < 4; l++)
          r[l*12 +: 12] = w[l*12 +: 12] + x[l*12 +: 12] + y[l*12 +: 12] + z[l*12 +: 12];
      end
      default: r = w + x + y + z;
    endcase
    return r;
  endfunction

endpackage
