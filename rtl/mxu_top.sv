// mxu_top: matrix unit built around the multi-precision systolic array.
//
// What it does: multiplies a streamed left matrix of 8-bit digits by a
// preloaded right matrix of 8-bit digits and, when reconstruction is enabled,
// returns each row of the product already recombined into full-precision
// numbers written in radix 2^8: every group of group_cols adjacent output
// columns holds one result, least significant digit first. With
// reconstruction disabled it is a plain 8-bit matrix unit with 32-bit sums,
// so ordinary low-precision workloads run unchanged.
//
// How: the array's last row (RPEs) passes each column's upper bits to the
// next column as a carry in step with the systolic wavefront (see
// systolic_array). Around the array this block adds the data setup a
// weight-stationary unit needs: a triangular input skew (row i delayed i
// cycles), a matching skew for the north-edge partial sums (column j delayed
// j cycles), an output de-skew (column j delayed COLS-1-j cycles) so a whole
// output row appears in one cycle, and a valid pipeline. The skew and de-skew
// registers, the valid signal and the north-edge partial-sum input (drawn as
// 32-bit inputs into the top row of the array, used here to add the result of
// an earlier K tile) are this design's own realisation; the paper does not
// describe them.
//
// Output encoding per column j (reconstruction on): a column whose carry is
// taken by column j+1 returns only its 8-bit digit; the last column of a group
// (out_group_end[j]=1) returns its whole 32-bit sum, i.e. the top digit plus
// every bit above it. The full-precision value of a group starting at column g
// with G columns is then sum_{m<G} out_data[g+m] * 2^(8m). With
// reconstruction off every column returns its 32-bit sum.
//
// Interface and timing:
//   cfg_we/recon_en/group_cols : load the configuration (array idle).
//   w_shift/w_in               : hold w_shift for ROWS cycles; the first word
//                                pushed per column ends up in row ROWS-1.
//   in_valid/a_in/psum_in      : one left-matrix row (ROWS digits) and an
//                                optional COLS-wide partial-sum row per cycle,
//                                back to back, no stalls.
//   out_valid/out_data         : the matching output row, ROWS+COLS-1 cycles
//                                after it entered.
module mxu_top #(
  parameter int unsigned ROWS    = mxu_pkg::ROWS,
  parameter int unsigned COLS    = mxu_pkg::COLS,
  parameter int unsigned A_W     = mxu_pkg::A_W,
  parameter int unsigned S_W     = mxu_pkg::S_W,
  parameter int unsigned DIGIT_W = mxu_pkg::DIGIT_W,
  parameter int unsigned GC_W    = $clog2(COLS + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // configuration
  input  logic            cfg_we,
  input  logic            recon_en,
  input  logic [GC_W-1:0] group_cols,
  // weight preload (from the weight buffer)
  input  logic            w_shift,
  input  logic [A_W-1:0]  w_in      [COLS],
  // streaming input (from the input buffer)
  input  logic            in_valid,
  input  logic [A_W-1:0]  a_in      [ROWS],
  input  logic [S_W-1:0]  psum_in   [COLS],
  // results (to the output buffer / vector unit)
  output logic            out_valid,
  output logic [S_W-1:0]  out_data  [COLS],
  output logic [COLS-1:0] out_group_end
);
  localparam int unsigned LAT = ROWS + COLS - 1;

  logic [A_W-1:0]  a_sk   [ROWS];
  logic [S_W-1:0]  ps_sk  [COLS];
  logic [S_W-1:0]  s_arr  [COLS];
  logic [S_W-1:0]  s_sel  [COLS];
  logic [A_W-1:0]  a_east [ROWS];
  logic [S_W-DIGIT_W-1:0] c_east;
  logic [COLS-1:0] carry_sel, group_end;

  recon_cfg #(.COLS(COLS), .GC_W(GC_W)) u_cfg (
    .clk, .rst_n, .cfg_we, .recon_en, .group_cols,
    .carry_sel, .group_end
  );

  for (genvar i = 0; i < ROWS; i++) begin : g_askew
    delay_line #(.WIDTH(A_W), .DEPTH(i)) u_dl (
      .clk, .rst_n, .d(a_in[i]), .q(a_sk[i]));
  end
  for (genvar j = 0; j < COLS; j++) begin : g_pskew
    delay_line #(.WIDTH(S_W), .DEPTH(j)) u_dl (
      .clk, .rst_n, .d(psum_in[j]), .q(ps_sk[j]));
  end

  systolic_array #(.ROWS(ROWS), .COLS(COLS), .A_W(A_W), .S_W(S_W),
                   .DIGIT_W(DIGIT_W)) u_array (
    .clk, .rst_n, .w_shift, .w_in,
    .a_in (a_sk), .a_east,
    .s_in (ps_sk),
    .c_west('0),
    .carry_sel,
    .s_out(s_arr),
    .c_east
  );

  // Digit extraction and de-skew. a_east and c_east leave the array unused:
  // the east edge of the operand path and the carry out of the last column
  // only matter when arrays are chained, which this unit does not do.
  for (genvar j = 0; j < COLS; j++) begin : g_out
    assign s_sel[j] = group_end[j] ? s_arr[j] : S_W'(s_arr[j][DIGIT_W-1:0]);
    delay_line #(.WIDTH(S_W), .DEPTH(COLS - 1 - j)) u_dl (
      .clk, .rst_n, .d(s_sel[j]), .q(out_data[j]));
  end
  assign out_group_end = group_end;

  delay_line #(.WIDTH(1), .DEPTH(LAT)) u_vld (
    .clk, .rst_n, .d(in_valid), .q(out_valid));

  // Rules of use: neither the configuration nor the weights may change while
  // a row is still in the array. A row entering in cycle t reads weights and
  // carry selects up to cycle t+LAT-1 and the group-end flags up to t+LAT, so
  // a write in cycle c is legal once no row entered in cycles c-LAT+1..c.
  logic [LAT-2:0] busy_sh;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy_sh <= '0;
    else        busy_sh <= {busy_sh[LAT-3:0], in_valid};
  end
  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               cfg_we |-> (busy_sh == '0 && !in_valid));
  a_wload_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 w_shift |-> (busy_sh == '0 && !in_valid));
endmodule
