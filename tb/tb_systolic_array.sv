// tb_systolic_array: self-checking test of the bare array (small size).
// Preloads random weights through the column shift path, streams NR rows of
// random digits with the skew the array expects (row i delayed i cycles),
// injects random north-edge partial sums (column j delayed j cycles) and a
// random carry-select pattern, and checks each RPE register against a model:
//   S[r][j] = P[r][j] + sum_i A[r][i]*B[i][j]
//   R[r][j] = S[r][j] + (sel[j] ? R[r][j-1] >> 8 : 0)
// at exactly cycle T0 + r + (ROWS-1) + j, which also checks that the carry
// chain runs in step with the wavefront.
module tb_systolic_array;
  localparam int ROWS = 5, COLS = 7, NR = 24;
  logic clk = 0, rst_n = 0, w_shift = 0;
  logic [7:0]  w_in [COLS];
  logic [7:0]  a_in [ROWS];
  logic [7:0]  a_east [ROWS];
  logic [31:0] s_in [COLS];
  logic [23:0] c_west, c_east;
  logic [COLS-1:0] carry_sel;
  logic [31:0] s_out [COLS];
  int checks = 0, failures = 0;

  logic [7:0]  A [NR][ROWS];
  logic [7:0]  B [ROWS][COLS];
  logic [31:0] P [NR][COLS];
  logic [31:0] R [NR][COLS];

  systolic_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, c, r;
    for (int pass = 0; pass < 3; pass++) begin
      // Build random operands and the reference result.
      for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++) B[i][j] = 8'($urandom);
      for (int q = 0; q < NR; q++) for (int i = 0; i < ROWS; i++) A[q][i] = 8'($urandom);
      for (int q = 0; q < NR; q++) for (int j = 0; j < COLS; j++)
        P[q][j] = (pass == 0) ? 0 : $urandom_range(0, 1 << 20);
      carry_sel = (pass == 2) ? '0 : COLS'($urandom) & ~COLS'(1);
      if (pass == 1) carry_sel = {{(COLS-1){1'b1}}, 1'b0};
      for (int q = 0; q < NR; q++) begin
        logic [31:0] prev;
        prev = 0;
        for (int j = 0; j < COLS; j++) begin
          logic [31:0] s;
          s = P[q][j];
          for (int i = 0; i < ROWS; i++) s += 32'(A[q][i]) * 32'(B[i][j]);
          R[q][j] = s + (carry_sel[j] ? (prev >> 8) : 0);
          prev = R[q][j];
        end
      end
      c_west = 24'($urandom);
      foreach (w_in[j]) w_in[j] = 0;
      foreach (a_in[i]) a_in[i] = 0;
      foreach (s_in[j]) s_in[j] = 0;
      if (pass == 0) begin repeat (2) @(posedge clk); rst_n = 1; end
      // Preload: ROWS shifts, deepest row first.
      for (int p = 0; p < ROWS; p++) begin
        @(negedge clk);
        w_shift = 1;
        for (int j = 0; j < COLS; j++) w_in[j] = B[ROWS-1-p][j];
      end
      @(negedge clk); w_shift = 0;
      // Stream.
      t0 = 2;
      for (c = 0; c < t0 + NR + ROWS + COLS + 2; c++) begin
        for (int i = 0; i < ROWS; i++) begin
          r = c - t0 - i;
          a_in[i] = (r >= 0 && r < NR) ? A[r][i] : 8'h0;
        end
        for (int j = 0; j < COLS; j++) begin
          r = c - t0 - j;
          s_in[j] = (r >= 0 && r < NR) ? P[r][j] : 32'h0;
        end
        @(posedge clk); #1;
        for (int j = 0; j < COLS; j++) begin
          r = c - t0 - (ROWS - 1) - j;
          if (r >= 0 && r < NR) begin
            checks++;
            if (s_out[j] !== R[r][j]) begin
              failures++;
              if (failures < 8) $display("pass %0d row %0d col %0d: got %h exp %h", pass, r, j, s_out[j], R[r][j]);
            end
          end
        end
        @(negedge clk);
      end
      // The east carry is the upper part of the last RPE register.
      checks++;
      if (c_east !== s_out[COLS-1][31:8]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
