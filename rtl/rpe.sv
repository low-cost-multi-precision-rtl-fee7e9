// rpe: reconstruction processing element, used in the last row of the array.
//
// Function: s_out <= s_in + a_in * b + (carry_sel ? c_in : 0), a_out <= a_in.
// It is a PE with one extra input: c_in, the carry coming from the RPE on its
// left, which a 2:1 multiplexer either passes or replaces by zero before an
// extra adder combines it with the column sum s_in. The sum of the product and
// that result is registered as s_out. This structure (multiplexer with a zero
// input, extra adder between s_in and the product adder, register on s_out)
// follows the RPE drawing of the array.
//
// The enclosing array splits s_out: the low DIGIT_W bits are the digit this
// column keeps, the high S_W-DIGIT_W bits are the carry to the RPE on the
// right. That split is done outside this module, as in the drawing.
//
// Timing: registered outputs, latency 1; the carry reaches the right
// neighbour in the same cycle as that neighbour's own column sum, because the
// systolic wavefront reaches column j+1 one cycle after column j.
module rpe #(
  parameter int unsigned A_W = mxu_pkg::A_W,
  parameter int unsigned S_W = mxu_pkg::S_W,
  parameter int unsigned C_W = mxu_pkg::S_W - mxu_pkg::DIGIT_W   // carry width
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           w_shift,
  input  logic [A_W-1:0] w_in,
  output logic [A_W-1:0] w_out,
  input  logic [A_W-1:0] a_in,
  output logic [A_W-1:0] a_out,
  input  logic [S_W-1:0] s_in,
  input  logic [C_W-1:0] c_in,      // carry from the RPE on the left
  input  logic           carry_sel, // 1: add c_in, 0: add zero (group start)
  output logic [S_W-1:0] s_out
);
  logic [A_W-1:0]   b_q;
  logic [2*A_W-1:0] prod;
  logic [C_W-1:0]   c_mux;
  logic [S_W-1:0]   s_plus_c;

  assign prod     = a_in * b_q;
  assign c_mux    = carry_sel ? c_in : '0;
  assign s_plus_c = s_in + S_W'(c_mux);
  assign w_out    = b_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_q   <= '0;
      a_out <= '0;
      s_out <= '0;
    end else begin
      if (w_shift) b_q <= w_in;
      a_out <= a_in;
      s_out <= s_plus_c + S_W'(prod);
    end
  end
endmodule
