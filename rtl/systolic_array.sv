// systolic_array: the multi-precision weight-stationary systolic array.
//
// ROWS x COLS grid. Rows 0..ROWS-2 are ordinary PEs (multiply-add); the last
// row is made of reconstruction PEs (RPEs). Digits a stream in from the west
// edge and move one column east per cycle; partial sums move one row south per
// cycle; weights are preloaded into the PEs and stay put. In the RPE row each
// registered column sum is split: the low DIGIT_W bits stay as this column's
// digit (s_out) and the high S_W-DIGIT_W bits go east as the carry into the
// next RPE, where carry_sel decides whether it is added. Because the column
// sums of one input row leave the array in consecutive columns on consecutive
// cycles, each carry arrives exactly when the next column's sum does: carry
// propagation runs in step with the vertical reduction and costs no extra
// cycle. Everything here follows the array drawing and Sec. III-B, except the
// digit split: the drawing prints [15:0]/[31:16] while the text says each RPE
// "retains the least significant byte"; this design keeps DIGIT_W = 8 bits,
// which matches radix-2^8 digits (see the README).
//
// Interface: a_in must be skewed by the caller (row i delayed i cycles) and
// s_in (the north edge, used to add earlier partial results) skewed by column.
// Weights load by holding w_shift for ROWS cycles, the row that ends up in the
// RPE row first. s_out[j] is the full registered RPE sum of column j; its digit
// is s_out[j][DIGIT_W-1:0].
// Timing: a value entering row i at cycle t reaches RPE column j's register
// at the end of cycle t + (ROWS-1-i) + j.
module systolic_array #(
  parameter int unsigned ROWS    = mxu_pkg::ROWS,
  parameter int unsigned COLS    = mxu_pkg::COLS,
  parameter int unsigned A_W     = mxu_pkg::A_W,
  parameter int unsigned S_W     = mxu_pkg::S_W,
  parameter int unsigned DIGIT_W = mxu_pkg::DIGIT_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   w_shift,
  input  logic [A_W-1:0]         w_in      [COLS],  // weights entering at the top
  input  logic [A_W-1:0]         a_in      [ROWS],  // skewed digits, west edge
  output logic [A_W-1:0]         a_east    [ROWS],  // digits leaving the east edge
  input  logic [S_W-1:0]         s_in      [COLS],  // skewed partial sums, north edge
  input  logic [S_W-DIGIT_W-1:0] c_west,            // carry into the first RPE
  input  logic [COLS-1:0]        carry_sel,
  output logic [S_W-1:0]         s_out     [COLS],  // registered RPE sums
  output logic [S_W-DIGIT_W-1:0] c_east             // carry leaving the last RPE
);
  localparam int unsigned C_W = S_W - DIGIT_W;

  logic [A_W-1:0] a_h [ROWS][COLS+1];   // horizontal operand wires
  logic [S_W-1:0] s_v [ROWS+1][COLS];   // vertical sum wires
  logic [A_W-1:0] w_v [ROWS+1][COLS];   // vertical weight-load wires
  logic [C_W-1:0] c_h [COLS+1];         // horizontal carry wires in the RPE row

  for (genvar i = 0; i < ROWS; i++) begin : g_west
    assign a_h[i][0] = a_in[i];
    assign a_east[i] = a_h[i][COLS];
  end
  for (genvar j = 0; j < COLS; j++) begin : g_north
    assign s_v[0][j] = s_in[j];
    assign w_v[0][j] = w_in[j];
    assign s_out[j]  = s_v[ROWS][j];
    assign c_h[j+1]  = s_v[ROWS][j][S_W-1:DIGIT_W];
  end
  assign c_h[0] = c_west;
  assign c_east = c_h[COLS];

  for (genvar i = 0; i < ROWS - 1; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      pe #(.A_W(A_W), .S_W(S_W)) u_pe (
        .clk, .rst_n, .w_shift,
        .w_in (w_v[i][j]),   .w_out(w_v[i+1][j]),
        .a_in (a_h[i][j]),   .a_out(a_h[i][j+1]),
        .s_in (s_v[i][j]),   .s_out(s_v[i+1][j])
      );
    end
  end

  for (genvar j = 0; j < COLS; j++) begin : g_rpe
    rpe #(.A_W(A_W), .S_W(S_W), .C_W(C_W)) u_rpe (
      .clk, .rst_n, .w_shift,
      .w_in (w_v[ROWS-1][j]),      .w_out(w_v[ROWS][j]),
      .a_in (a_h[ROWS-1][j]),      .a_out(a_h[ROWS-1][j+1]),
      .s_in (s_v[ROWS-1][j]),
      .c_in (c_h[j]),
      .carry_sel(carry_sel[j]),
      .s_out(s_v[ROWS][j])
    );
  end
endmodule
