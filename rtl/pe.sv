// pe: one processing element of the weight-stationary systolic array.
//
// Function: s_out <= s_in + a_in * b and a_out <= a_in, every cycle. b is the
// stationary weight held in a local register. The 8-bit operand a enters from
// the west and is forwarded east one cycle later; the 32-bit partial sum enters
// from the north and leaves south one cycle later. Widths and the structure
// (weight register, multiplier, adder, output registers on a and s) follow the
// PE drawing of the array.
//
// Weight loading is this design's own choice (the paper only says the weights
// are "preloaded"): while w_shift is high the weight register takes w_in and
// its old value appears on w_out, so the weights of a column shift down one row
// per cycle. Products are unsigned; the 16-bit product is zero-extended to S_W.
//
// Timing: a_out, s_out and w_out are registered (latency 1). Reset clears the
// operand, sum and weight registers.
module pe #(
  parameter int unsigned A_W = mxu_pkg::A_W,
  parameter int unsigned S_W = mxu_pkg::S_W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           w_shift,   // shift weights down the column
  input  logic [A_W-1:0] w_in,      // weight from the PE above (or the array edge)
  output logic [A_W-1:0] w_out,     // stored weight, to the PE below
  input  logic [A_W-1:0] a_in,      // streaming digit from the west
  output logic [A_W-1:0] a_out,     // same digit, one cycle later, to the east
  input  logic [S_W-1:0] s_in,      // partial sum from the north
  output logic [S_W-1:0] s_out      // s_in + a_in*b, one cycle later, to the south
);
  logic [A_W-1:0]   b_q;
  logic [2*A_W-1:0] prod;

  assign prod  = a_in * b_q;
  assign w_out = b_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_q   <= '0;
      a_out <= '0;
      s_out <= '0;
    end else begin
      if (w_shift) b_q <= w_in;
      a_out <= a_in;
      s_out <= s_in + S_W'(prod);
    end
  end
endmodule
