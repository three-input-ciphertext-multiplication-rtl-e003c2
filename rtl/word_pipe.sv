// word_pipe: DEPTH-stage register delay of a W-bit word, used to align an
// operand with the output of a pipelined modular multiplier.  Not reset.
module word_pipe
  import he_pkg::*;
#(
  parameter int DEPTH = 3
) (
  input  logic  clk,
  input  word_t din,
  output word_t dout
);
  word_t r [DEPTH];
  always_ff @(posedge clk) begin
    r[0] <= din;
    for (int k = 1; k < DEPTH; k++) r[k] <= r[k-1];
  end
  assign dout = r[DEPTH-1];
endmodule
