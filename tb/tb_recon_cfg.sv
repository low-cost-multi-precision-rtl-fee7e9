// tb_recon_cfg: checks the per-column carry selects and group-end flags for
// every group size 0..COLS with reconstruction on and off, against
// carry_sel[j] = en && (j mod G != 0), group_end[j] = !carry_sel[j+1].
module tb_recon_cfg;
  localparam int COLS = 24;
  localparam int GC_W = $clog2(COLS + 1);
  logic clk = 0, rst_n = 0, cfg_we = 0, recon_en = 0;
  logic [GC_W-1:0] group_cols = 0;
  logic [COLS-1:0] carry_sel, group_end, exp_sel, exp_end;
  int checks = 0, failures = 0;

  recon_cfg #(.COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int en = 0; en < 2; en++)
      for (int g = 0; g <= COLS; g++) begin
        @(negedge clk);
        cfg_we = 1; recon_en = 1'(en); group_cols = GC_W'(g);
        @(negedge clk);
        cfg_we = 0; group_cols = GC_W'($urandom); recon_en = 1'($urandom);  // ignored without cfg_we
        @(negedge clk);
        for (int j = 0; j < COLS; j++)
          exp_sel[j] = (en == 1) && (g > 1) && (j % g != 0);
        for (int j = 0; j < COLS; j++)
          exp_end[j] = (j == COLS - 1) ? 1'b1 : !exp_sel[j+1];
        checks++;
        if (carry_sel !== exp_sel || group_end !== exp_end) begin
          failures++;
          $display("en=%0d g=%0d sel=%b exp=%b", en, g, carry_sel, exp_sel);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
