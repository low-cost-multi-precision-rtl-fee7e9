// tb_mxu_top: end-to-end test of the matrix unit at a reduced size (12x12).
//
// Runs, in one simulation and with mode switches between them:
//   1. plain 8-bit matrix multiply, reconstruction off (32-bit sums out);
//   2. full-precision multiply of 16-bit numbers: left matrix split into 2
//      digits per number, right matrix expanded to the Toeplitz digit layout
//      (3 output columns per result), results checked exactly;
//   3. the same product split into two K tiles, the second tile adding the
//      reconstructed output of the first through the north-edge partial sums;
//   4. a modular product with BAT-folded weights (3 digits of a 24-bit
//      modulus, row i of a weight block holds the digits of b*2^(8i) mod q),
//      checked modulo q;
//   5. the decimal example of the paper's decomposition figure, redone in
//      radix 256 (same matrices, digits 0..9 placed as base-256 digits).
// Each output row must appear exactly ROWS+COLS-1 cycles after its input row.
// Every mechanism (weight preload, mode switch, carry taken, carry stopped at
// a group boundary, partial-sum injection, BAT folding, back-to-back rows) is
// counted and must occur at least once.
module tb_mxu_top;
  localparam int ROWS = 12, COLS = 12, LAT = ROWS + COLS - 1;
  localparam int GC_W = $clog2(COLS + 1);
  localparam int NR = 16;   // left-matrix rows per run

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, recon_en = 0; logic [GC_W-1:0] group_cols = 0;
  logic w_shift = 0; logic [7:0] w_in [COLS];
  logic in_valid = 0; logic [7:0] a_in [ROWS]; logic [31:0] psum_in [COLS];
  logic out_valid; logic [31:0] out_data [COLS]; logic [COLS-1:0] out_group_end;

  mxu_top #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_preload = 0, n_mode_switch = 0, n_carry_taken = 0, n_carry_stop = 0;
  int n_psum = 0, n_bat = 0, n_b2b = 0, n_plain = 0;

  // Operands of one run and its captured output.
  logic [7:0]  A  [NR][ROWS];
  logic [7:0]  B  [ROWS][COLS];
  logic [31:0] PS [NR][COLS];
  logic [31:0] O  [NR][COLS];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic configure(input bit en, input int g);
    @(negedge clk);
    if (en != recon_en) n_mode_switch++;
    cfg_we = 1; recon_en = en; group_cols = GC_W'(g);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic preload();
    for (int p = 0; p < ROWS; p++) begin
      @(negedge clk);
      w_shift = 1;
      for (int j = 0; j < COLS; j++) w_in[j] = B[ROWS-1-p][j];
    end
    @(negedge clk);
    w_shift = 0;
    n_preload++;
  endtask

  // Streams NR rows back to back and captures NR output rows; checks latency.
  task automatic stream();
    int t_in [NR];
    int got = 0, sent = 0;
    fork
      begin
        for (int r = 0; r < NR; r++) begin
          @(negedge clk);
          in_valid = 1;
          for (int i = 0; i < ROWS; i++) a_in[i] = A[r][i];
          for (int j = 0; j < COLS; j++) psum_in[j] = PS[r][j];
          t_in[r] = cyc;
          sent++;
          if (r > 0) n_b2b++;
        end
        @(negedge clk);
        in_valid = 0;
        foreach (a_in[i]) a_in[i] = 0;
        foreach (psum_in[j]) psum_in[j] = 0;
      end
      begin
        while (got < NR) begin
          @(posedge clk); #1;
          if (out_valid) begin
            for (int j = 0; j < COLS; j++) O[got][j] = out_data[j];
            checks++;
            if (cyc - t_in[got] != LAT) begin
              failures++;
              $display("latency row %0d: %0d cycles, expected %0d", got, cyc - t_in[got], LAT);
            end
            got++;
          end
        end
      end
    join
  endtask

  function automatic longint unsigned group_value(int r, int g, int gc);
    longint unsigned v = 0;
    for (int m = gc - 1; m >= 0; m--) v = (v << 8) + longint'(O[r][g + m]);
    return v;
  endfunction

  // Count carries that crossed, or were stopped at, group boundaries.
  task automatic count_carries(int gc);
    for (int r = 0; r < NR; r++)
      for (int j = 0; j < COLS; j++) begin
        if (out_group_end[j] && O[r][j] > 32'hFF && j < COLS - 1) n_carry_stop++;
        if (!out_group_end[j] && j % gc != gc - 1) n_carry_taken++;
      end
  endtask

  // Toeplitz layout for k-digit left numbers and k-digit right numbers:
  // left number n of a row -> digits at rows n*k .. n*k+k-1;
  // right number (n,p) -> B[n*k+i][p*(2k-1)+i+d] = digit d of b.
  task automatic toeplitz_run(input int k, input int kt_lo, input int kt_hi,
                              input logic [15:0] AV [NR][6], input logic [15:0] BV [6][4],
                              input bit use_psum);
    int gc = 2 * k - 1;
    foreach (B[i, j]) B[i][j] = 0;
    for (int n = kt_lo; n < kt_hi; n++)
      for (int p = 0; p < 4; p++)
        for (int i = 0; i < k; i++)
          for (int d = 0; d < k; d++)
            B[(n - kt_lo) * k + i][p * gc + i + d] = BV[n][p][8*d +: 8];
    for (int r = 0; r < NR; r++) begin
      foreach (A[r][i]) A[r][i] = 0;
      for (int n = kt_lo; n < kt_hi; n++)
        for (int i = 0; i < k; i++) A[r][(n - kt_lo) * k + i] = AV[r][n][8*i +: 8];
      for (int j = 0; j < COLS; j++) PS[r][j] = use_psum ? O[r][j] : 0;
    end
    if (use_psum) n_psum++;
    preload();
    stream();
  endtask

  initial begin
    logic [15:0] AV [NR][6];
    logic [15:0] BV [6][4];
    foreach (w_in[j]) w_in[j] = 0;
    foreach (a_in[i]) a_in[i] = 0;
    foreach (psum_in[j]) psum_in[j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. Plain 8-bit matrix multiply.
    configure(0, 1);
    foreach (B[i, j]) B[i][j] = 8'($urandom);
    foreach (A[r, i]) A[r][i] = 8'($urandom);
    foreach (PS[r, j]) PS[r][j] = 0;
    preload(); stream();
    for (int r = 0; r < NR; r++)
      for (int j = 0; j < COLS; j++) begin
        logic [31:0] s; s = 0;
        for (int i = 0; i < ROWS; i++) s += 32'(A[r][i]) * 32'(B[i][j]);
        checks++;
        if (O[r][j] !== s) begin
          failures++;
          if (failures < 4) $display("plain r%0d c%0d got %0d exp %0d", r, j, O[r][j], s);
        end
        n_plain++;
      end

    // 2. Full precision, 16-bit x 16-bit, 6 left numbers, 4 results per row.
    configure(1, 3);
    foreach (AV[r, n]) AV[r][n] = 16'($urandom);
    foreach (BV[n, p]) BV[n][p] = 16'($urandom);
    AV[0][0] = 16'hFFFF; BV[0][0] = 16'hFFFF;
    toeplitz_run(2, 0, 6, AV, BV, 0);
    count_carries(3);
    for (int r = 0; r < NR; r++)
      for (int p = 0; p < 4; p++) begin
        longint unsigned e; e = 0;
        for (int n = 0; n < 6; n++) e += longint'(AV[r][n]) * longint'(BV[n][p]);
        checks++;
        if (group_value(r, p * 3, 3) != e) begin
          failures++;
          if (failures < 6) $display("toeplitz r%0d p%0d got %0d exp %0d", r, p, group_value(r, p*3, 3), e);
        end
      end

    // 3. Same product in two K tiles (3 + 3 left numbers), partial sums injected.
    foreach (O[r, j]) O[r][j] = 0;
    toeplitz_run(2, 0, 3, AV, BV, 0);
    toeplitz_run(2, 3, 6, AV, BV, 1);
    for (int r = 0; r < NR; r++)
      for (int p = 0; p < 4; p++) begin
        longint unsigned e; e = 0;
        for (int n = 0; n < 6; n++) e += longint'(AV[r][n]) * longint'(BV[n][p]);
        checks++;
        if (group_value(r, p * 3, 3) != e) failures++;
      end

    // 4. BAT-folded modular product, k = 3 digits, q = 2^24 - 3.
    begin
      longint unsigned q = 64'd16777213;
      logic [23:0] XV [NR][4];
      logic [23:0] TV [4][4];
      configure(1, 3);
      foreach (XV[r, n]) XV[r][n] = 24'($urandom) % 24'(q);
      foreach (TV[n, p]) TV[n][p] = 24'($urandom) % 24'(q);
      foreach (B[i, j]) B[i][j] = 0;
      for (int n = 0; n < 4; n++)
        for (int p = 0; p < 4; p++)
          for (int i = 0; i < 3; i++) begin
            longint unsigned f; f = (longint'(TV[n][p]) << (8 * i)) % q;
            for (int d = 0; d < 3; d++) B[n * 3 + i][p * 3 + d] = f[8*d +: 8];
          end
      for (int r = 0; r < NR; r++) begin
        for (int n = 0; n < 4; n++)
          for (int i = 0; i < 3; i++) A[r][n * 3 + i] = XV[r][n][8*i +: 8];
        foreach (PS[r][j]) PS[r][j] = 0;
      end
      preload(); stream();
      count_carries(3);
      for (int r = 0; r < NR; r++)
        for (int p = 0; p < 4; p++) begin
          longint unsigned e; e = 0;
          for (int n = 0; n < 4; n++) e = (e + longint'(XV[r][n]) * longint'(TV[n][p])) % q;
          checks++;
          if (group_value(r, p * 3, 3) % q != e) failures++;
          n_bat++;
        end
    end

    // 5. The decomposition figure's example: [12 47;35 68] x [54 23;71 89],
    //    written with the same digits but in radix 256.
    begin
      logic [15:0] fa [2][2] = '{'{16'h0102, 16'h0407}, '{16'h0305, 16'h0608}};
      logic [15:0] fb [2][2] = '{'{16'h0504, 16'h0203}, '{16'h0701, 16'h0809}};
      foreach (AV[r, n]) AV[r][n] = 0;
      foreach (BV[n, p]) BV[n][p] = 0;
      for (int r = 0; r < 2; r++) for (int n = 0; n < 2; n++) AV[r][n] = fa[r][n];
      for (int n = 0; n < 2; n++) for (int p = 0; p < 2; p++) BV[n][p] = fb[n][p];
      toeplitz_run(2, 0, 6, AV, BV, 0);
      // Intermediate column sums: 15 67 33 | 69 99 34 for row 0 (3985, 4459)
      // and 28 99 57 | 87 137 54 for row 1 (6718, 6857); all are below 256,
      // so the digits come out unchanged.
      checks++;
      if (O[0][0] != 15 || O[0][1] != 67 || O[0][2] != 33 ||
          O[0][3] != 69 || O[0][4] != 99 || O[0][5] != 34) begin
        failures++;
        $display("figure example row 0: %0d %0d %0d %0d %0d %0d", O[0][0], O[0][1], O[0][2], O[0][3], O[0][4], O[0][5]);
      end
      checks++;
      if (O[1][0] != 28 || O[1][1] != 99 || O[1][2] != 57 ||
          O[1][3] != 87 || O[1][4] != 137 || O[1][5] != 54) failures++;
      checks++;
      if (group_value(0, 0, 3) != 64'h21_430F || group_value(1, 3, 3) != 64'h36_8957) failures++;
    end

    // Back to plain mode: the unit must behave as an ordinary matrix unit again.
    configure(0, 1);
    foreach (A[r, i]) A[r][i] = 8'($urandom);
    foreach (PS[r, j]) PS[r][j] = 0;
    stream();
    for (int r = 0; r < NR; r++)
      for (int j = 0; j < COLS; j++) begin
        logic [31:0] s; s = 0;
        for (int i = 0; i < ROWS; i++) s += 32'(A[r][i]) * 32'(B[i][j]);
        checks++;
        if (O[r][j] !== s) failures++;
      end

    $display("mechanisms: preload=%0d mode_switch=%0d carry_taken=%0d carry_stop=%0d psum=%0d bat=%0d back_to_back=%0d plain=%0d",
             n_preload, n_mode_switch, n_carry_taken, n_carry_stop, n_psum, n_bat, n_b2b, n_plain);
    if (n_preload == 0) failures++;
    if (n_mode_switch == 0) failures++;
    if (n_carry_taken == 0) failures++;
    if (n_carry_stop == 0) failures++;
    if (n_psum == 0) failures++;
    if (n_bat == 0) failures++;
    if (n_b2b == 0) failures++;
    if (n_plain == 0) failures++;
    checks += 8;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
