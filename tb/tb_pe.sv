// tb_pe: self-checking test of one processing element.
// Loads random weights through the shift port, drives random digits and
// partial sums, and checks every cycle that s_out = previous s_in + a*b,
// a_out = previous a_in and w_out = stored weight (one-cycle latency).
module tb_pe;
  logic clk = 0, rst_n = 0;
  logic w_shift; logic [7:0] w_in, w_out, a_in, a_out; logic [31:0] s_in, s_out;
  int checks = 0, failures = 0;
  logic [7:0] b_model; logic [31:0] exp_s; logic [7:0] exp_a;

  pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_shift = 0; w_in = 0; a_in = 0; s_in = 0; b_model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      w_shift = ($urandom_range(0, 9) == 0);
      w_in = 8'($urandom); a_in = 8'($urandom); s_in = $urandom;
      if (n % 7 == 0) begin a_in = 8'hFF; end
      exp_s = s_in + 32'(a_in) * 32'(b_model);
      exp_a = a_in;
      @(posedge clk); #1;
      checks++;
      if (s_out !== exp_s || a_out !== exp_a) begin
        failures++;
        if (failures < 5) $display("mismatch n=%0d s=%h exp=%h a=%h exp=%h", n, s_out, exp_s, a_out, exp_a);
      end
      if (w_shift) b_model = w_in;
      checks++;
      if (w_out !== b_model) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
