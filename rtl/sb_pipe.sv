// sb_pipe: delays the side band of a beat stream (valid bit and frame cycle
// index) by DEPTH cycles, to travel alongside a datapath of the same latency.
// The valid bits are reset; the index is not.  Helper of the arithmetic blocks.
module sb_pipe
  import he_pkg::*;
#(
  parameter int DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             v_in,
  input  logic [IDX_W-1:0] idx_in,
  output logic             v_out,
  output logic [IDX_W-1:0] idx_out
);
  logic             v   [DEPTH];
  logic [IDX_W-1:0] idx [DEPTH];

  always_ff @(posedge clk) begin
    idx[0] <= idx_in;
    for (int k = 1; k < DEPTH; k++) idx[k] <= idx[k-1];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < DEPTH; k++) v[k] <= 1'b0;
    end else begin
      v[0] <= v_in;
      for (int k = 1; k < DEPTH; k++) v[k] <= v[k-1];
    end
  end

  assign v_out   = v[DEPTH-1];
  assign idx_out = idx[DEPTH-1];
endmodule
