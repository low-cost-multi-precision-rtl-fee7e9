// tb_rpe: self-checking test of one reconstruction PE.
// Checks s_out = s_in + a*b + (carry_sel ? c_in : 0) one cycle later, with
// random weights, digits, sums and carries, both settings of the carry
// multiplexer, and the operand forwarding.
module tb_rpe;
  logic clk = 0, rst_n = 0;
  logic w_shift; logic [7:0] w_in, w_out, a_in, a_out; logic [31:0] s_in, s_out;
  logic [23:0] c_in; logic carry_sel;
  int checks = 0, failures = 0, n_sel = 0, n_zero = 0;
  logic [7:0] b_model; logic [31:0] exp_s;

  rpe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_shift = 0; w_in = 0; a_in = 0; s_in = 0; c_in = 0; carry_sel = 0; b_model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      w_shift = ($urandom_range(0, 9) == 0);
      w_in = 8'($urandom); a_in = 8'($urandom); s_in = $urandom_range(0, 32'h7fff_ffff);
      c_in = 24'($urandom); carry_sel = 1'($urandom);
      if (carry_sel) n_sel++; else n_zero++;
      exp_s = s_in + 32'(a_in) * 32'(b_model) + (carry_sel ? 32'(c_in) : 32'd0);
      @(posedge clk); #1;
      checks++;
      if (s_out !== exp_s || a_out !== a_in) begin
        failures++;
        if (failures < 5) $display("mismatch n=%0d s=%h exp=%h sel=%0d", n, s_out, exp_s, carry_sel);
      end
      if (w_shift) b_model = w_in;
      checks++;
      if (w_out !== b_model) failures++;
    end
    checks++; if (n_sel == 0 || n_zero == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
