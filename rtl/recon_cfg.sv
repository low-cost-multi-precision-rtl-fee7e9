// recon_cfg: runtime configuration of the carry multiplexers in the RPE row.
//
// The number of digits of a full-precision result is a run-time setting: the
// array is built once, and a configuration decides where horizontal carry
// propagation stops. This block turns two settings into one select bit per
// column:
//   recon_en   : 0 = plain low-precision matrix multiply (no carries at all),
//                1 = full-precision reconstruction.
//   group_cols : output columns that form one full-precision result (k digit
//                columns with BAT-folded twiddles, 2k-1 without folding).
// Column j takes its left neighbour's carry (carry_sel[j]=1) unless it is the
// first column of a group, i.e. unless j mod group_cols == 0. group_end[j]
// marks the last column of a group, whose whole 32-bit sum is the top part of
// the result because its carry is not consumed.
//
// How: a chain of small position counters, pos[j] = pos[j-1]+1 wrapping at
// group_cols, avoids a divider. The results are registered when cfg_we is high
// and stay constant while the array runs, so the chain is a quasi-static path
// (the settings must not change while a matrix is streaming). group_cols = 0
// is treated like 1. The counter-chain realisation, the register and the
// cfg_we strobe are this design's own choice; the paper only states that the
// configuration is "applied at runtime".
module recon_cfg #(
  parameter int unsigned COLS = mxu_pkg::COLS,
  parameter int unsigned GC_W = $clog2(COLS + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cfg_we,      // load recon_en / group_cols
  input  logic            recon_en,
  input  logic [GC_W-1:0] group_cols,
  output logic [COLS-1:0] carry_sel,   // per column: add the carry from the left
  output logic [COLS-1:0] group_end    // per column: last column of a result
);
  logic [GC_W-1:0] pos [COLS];
  logic [COLS-1:0] sel_d, end_d;

  always_comb begin
    pos[0] = '0;
    for (int unsigned j = 1; j < COLS; j++) begin
      if (pos[j-1] + GC_W'(1) >= group_cols) pos[j] = '0;
      else                                   pos[j] = pos[j-1] + GC_W'(1);
    end
    for (int unsigned j = 0; j < COLS; j++)
      sel_d[j] = recon_en && (pos[j] != '0);
    for (int unsigned j = 0; j < COLS; j++)
      end_d[j] = (j == COLS - 1) ? 1'b1 : !sel_d[j+1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      carry_sel <= '0;
      group_end <= '1;
    end else if (cfg_we) begin
      carry_sel <= sel_d;
      group_end <= end_d;
    end
  end

  // Column 0 starts every group: nothing lies to its left.
  a_col0_no_carry: assert property (@(posedge clk) disable iff (!rst_n) !carry_sel[0]);
endmodule
