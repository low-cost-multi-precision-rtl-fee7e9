// delay_line: DEPTH-stage register pipeline of a WIDTH-bit value.
//
// Used for the input skew, the partial-sum skew, the output de-skew and the
// valid pipeline around the systolic array. DEPTH = 0 is a plain wire.
// Registers are cleared by reset.
module delay_line #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] r [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int unsigned k = 0; k < DEPTH; k++) r[k] <= '0;
      end else begin
        r[0] <= d;
        for (int unsigned k = 1; k < DEPTH; k++) r[k] <= r[k-1];
      end
    end
    assign q = r[DEPTH-1];
  end
endmodule
