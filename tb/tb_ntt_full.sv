// tb_ntt_full: complete 4-step NTTs on the matrix unit at its default size
// (128x128, no parameter overrides).
//
// Four transforms are run, two per precision the evaluation uses:
//   32-bit: q = 998244353 (30 bits), k = 4 digits, N = 1024 and N = 4096,
//   64-bit: q = 2^64 - 2^32 + 1,      k = 8 digits, N = 256  and N = 4096.
// For N = 1024 / 256, k*sqrt(N) = 128, so one transform matrix fills the
// array. N = 4096 (the smallest FHE size) needs a 256x256 (32-bit) or 512x512
// (64-bit) digit matrix: it is run in 128x128 weight tiles, column tiles one
// after the other and K tiles accumulated by feeding the previous tile's
// output row back in through the north-edge partial-sum inputs.
// Each sqrt(N)-point transform stage is a matrix product on the unit with
// BAT-folded weights: the weight block for transform entry W[n][p] holds, in
// row i, the k base-256 digits of W[n][p]*2^(8i) mod q, and the unit returns
// one reconstructed number per group of k columns. The parts the unit does
// not do (reduction mod q, the twiddle multiply and the transpose between the
// stages, i.e. the vector unit's work) are done here in the testbench. The
// result is compared with a directly computed N-point NTT,
// X[m] = sum_n x[n] * w^(n*m) mod q. The matrix-unit cycles of every stage are
// tile is checked against rows + ROWS + COLS - 1.
module tb_ntt_full;
  localparam int ROWS = mxu_pkg::ROWS, COLS = mxu_pkg::COLS;
  localparam int LAT  = ROWS + COLS - 1;
  localparam int GC_W = $clog2(COLS + 1);
  localparam int MAXR = 64;          // largest sqrt(N) used
  localparam int MAXD = 8 * MAXR;    // largest digit-matrix dimension
  localparam int MAXN = MAXR * MAXR;
  typedef logic [127:0] u128;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, recon_en = 0; logic [GC_W-1:0] group_cols = 0;
  logic w_shift = 0; logic [7:0] w_in [COLS];
  logic in_valid = 0; logic [7:0] a_in [ROWS]; logic [31:0] psum_in [COLS];
  logic out_valid; logic [31:0] out_data [COLS]; logic [COLS-1:0] out_group_end;

  mxu_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_preload = 0, n_stage = 0, n_carry_stop = 0, n_ktile = 0;
  longint mxu_cycles = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Operands of one matrix stage.
  logic [63:0] SX [MAXR][MAXR];   // left matrix rows (full precision)
  logic [63:0] SW [MAXR][MAXR];   // transform matrix
  logic [63:0] SY [MAXR][MAXR];   // stage result, reduced mod q
  logic [31:0] O  [MAXR][MAXD];   // stage output, all column tiles
  logic [63:0] x  [MAXN];
  logic [63:0] X  [MAXN];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic u128 mulmod(u128 a, u128 b, u128 q);
    return (a * b) % q;
  endfunction

  function automatic u128 powmod(u128 g, u128 e, u128 q);
    u128 r = 1;
    g = g % q;
    while (e != 0) begin
      if (e[0]) r = mulmod(r, g, q);
      g = mulmod(g, g, q);
      e = e >> 1;
    end
    return r;
  endfunction

  // One transform stage: SY[row][p] = sum_n SX[row][n] * SW[n][p] mod q,
  // for rows 0..nr-1 and n, p in 0..r-1, on the matrix unit with k digits.
  // The k*r x k*r digit matrix is cut into 128x128 weight tiles.
  task automatic run_stage(input int nr, input int r, input int k, input u128 q);
    int nt;
    nt = (k * r + COLS - 1) / COLS;
    // Configure: one full-precision result per k columns.
    @(negedge clk);
    cfg_we = 1; recon_en = 1; group_cols = GC_W'(k);
    @(negedge clk);
    cfg_we = 0;
    for (int ct = 0; ct < nt; ct++)
      for (int kt = 0; kt < nt; kt++)
        run_tile(nr, r, k, q, kt, ct);
    // Vector-unit work: read each group of k digit columns and reduce mod q.
    for (int rr = 0; rr < nr; rr++)
      for (int p = 0; p < r; p++) begin
        u128 v;
        v = 0;
        for (int d = k - 1; d >= 0; d--) v = (v << 8) + u128'(O[rr][p * k + d]);
        if (O[rr][p * k + k - 1] > 32'hFF && (p * k + k) % COLS != 0) n_carry_stop++;
        SY[rr][p] = 64'(v % q);
      end
    n_stage++;
  endtask

  // One weight tile: digit rows kt*ROWS.., digit columns ct*COLS.. .
  task automatic run_tile(input int nr, input int r, input int k, input u128 q,
                          input int kt, input int ct);
    int t_first, t_last, got;
    // Preload the BAT-folded tile, deepest row first.
    for (int pr = 0; pr < ROWS; pr++) begin
      int row, n, i;
      row = kt * ROWS + ROWS - 1 - pr; n = row / k; i = row % k;
      @(negedge clk);
      w_shift = 1;
      for (int j = 0; j < COLS; j++) begin
        int p, d;
        u128 f;
        p = (ct * COLS + j) / k; d = (ct * COLS + j) % k;
        f = (n < r && p < r) ? (u128'(SW[n][p]) << (8 * i)) % q : 0;
        w_in[j] = f[8*d +: 8];
      end
    end
    @(negedge clk);
    w_shift = 0;
    n_preload++;
    if (kt > 0) n_ktile++;
    // Stream the digit rows (partial sums of the previous K tile on the north
    // edge) and collect the results.
    got = 0; t_first = 0; t_last = 0;
    fork
      begin
        for (int rr = 0; rr < nr; rr++) begin
          @(negedge clk);
          in_valid = 1;
          if (rr == 0) t_first = cyc;
          for (int ii = 0; ii < ROWS; ii++) begin
            int n, i;
            n = (kt * ROWS + ii) / k; i = (kt * ROWS + ii) % k;
            a_in[ii] = (n < r) ? SX[rr][n][8*i +: 8] : 8'h0;
          end
          for (int j = 0; j < COLS; j++)
            psum_in[j] = (kt > 0) ? O[rr][ct * COLS + j] : 32'h0;
        end
        @(negedge clk);
        in_valid = 0;
        foreach (a_in[ii]) a_in[ii] = 0;
        foreach (psum_in[j]) psum_in[j] = 0;
      end
      begin
        while (got < nr) begin
          @(posedge clk); #1;
          if (out_valid) begin
            for (int j = 0; j < COLS; j++) O[got][ct * COLS + j] = out_data[j];
            got++;
            t_last = cyc;
          end
        end
      end
    join
    checks++;
    mxu_cycles += longint'(t_last - t_first + 1);
    if (t_last - t_first + 1 != nr + LAT) begin
      failures++;
      $display("tile took %0d cycles, expected %0d", t_last - t_first + 1, nr + LAT);
    end
  endtask

  task automatic run_ntt(input int r, input int k, input u128 q, input u128 g, input string tag);
    int nn, errs;
    longint c0;
    u128 w, wr;
    nn = r * r;
    w  = powmod(g, (q - 1) / u128'(nn), q);   // primitive N-th root of unity
    wr = powmod(w, u128'(r), q);              // r-th root for the small transforms
    for (int n = 0; n < nn; n++) x[n] = 64'({$urandom, $urandom} % q);
    x[0] = 64'(q - 1);
    for (int a = 0; a < r; a++)
      for (int b = 0; b < r; b++) SW[a][b] = 64'(powmod(wr, u128'(a * b), q));
    // Stage 1: column transforms; row n2 of the left matrix holds x[r*n1 + n2].
    c0 = mxu_cycles;
    for (int n2 = 0; n2 < r; n2++)
      for (int n1 = 0; n1 < r; n1++) SX[n2][n1] = x[r * n1 + n2];
    run_stage(r, r, k, q);
    // Twiddle multiply and transpose (vector-unit work).
    for (int k1 = 0; k1 < r; k1++)
      for (int n2 = 0; n2 < r; n2++)
        SX[k1][n2] = 64'(mulmod(u128'(SY[n2][k1]), powmod(w, u128'(n2 * k1), q), q));
    // Stage 2: row transforms.
    run_stage(r, r, k, q);
    for (int k1 = 0; k1 < r; k1++)
      for (int k2 = 0; k2 < r; k2++) X[k1 + r * k2] = SY[k1][k2];
    // Direct N-point NTT for comparison.
    errs = 0;
    for (int m = 0; m < nn; m++) begin
      u128 acc, wm, wp;
      acc = 0; wm = powmod(w, u128'(m), q); wp = 1;
      for (int n = 0; n < nn; n++) begin
        acc = (acc + mulmod(u128'(x[n]), wp, q)) % q;
        wp = mulmod(wp, wm, q);
      end
      checks++;
      if (u128'(X[m]) !== acc) begin
        failures++; errs++;
        if (errs < 4) $display("%s: X[%0d] = %h, expected %h", tag, m, X[m], acc);
      end
    end
    $display("%s: N=%0d, %0d mismatches, %0d streaming cycles on the unit", tag, nn, errs, mxu_cycles - c0);
  endtask

  initial begin
    foreach (w_in[j]) w_in[j] = 0;
    foreach (a_in[i]) a_in[i] = 0;
    foreach (psum_in[j]) psum_in[j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_ntt(32, 4, 128'd998244353, 128'd3, "32-bit NTT");
    run_ntt(16, 8, 128'hFFFF_FFFF_0000_0001, 128'd7, "64-bit NTT");
    run_ntt(64, 4, 128'd998244353, 128'd3, "32-bit NTT");
    run_ntt(64, 8, 128'hFFFF_FFFF_0000_0001, 128'd7, "64-bit NTT");
    // Weight tiles: 1 + 1 + 1 + 1 (small sizes), 2 x 4 (32-bit 4096), 2 x 16 (64-bit 4096).
    checks++;
    if (n_preload != 44 || n_stage != 8 || n_carry_stop == 0 || n_ktile != 2 * 2 + 2 * 12) failures++;
    $display("stages=%0d tiles=%0d k_tile_accumulations=%0d carries_stopped=%0d",
             n_stage, n_preload, n_ktile, n_carry_stop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
