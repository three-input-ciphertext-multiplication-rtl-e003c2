// delay_line: fixed delay of DEPTH clock cycles for a WIDTH-bit word stream.
//
// A free-running shift: the word presented in cycle t appears at dout in
// cycle t + DEPTH, every cycle, without a stall input.  Depth 0 is a wire,
// depth 1 a register, longer delays a circular buffer of DEPTH-1 words plus an
// output register, which is how the long delay elements of the pipelined
// transforms and of the path-alignment delays are kept cheap.  The buffer
// is not reset; until it has been filled once after reset the output reads
// as zero, so a valid flag carried in the word stays low (this fill flag is
// this design's choice; the source only counts delay elements).
module delay_line #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);
  if (DEPTH == 0) begin : g_wire
    assign dout = din;
  end else if (DEPTH == 1) begin : g_reg
    always_ff @(posedge clk) begin
      if (rst) dout <= '0;
      else     dout <= din;
    end
  end else begin : g_ram
    localparam int AW = (DEPTH - 1 <= 1) ? 1 : $clog2(DEPTH - 1);
    logic [WIDTH-1:0] mem [DEPTH-1];
    logic [AW-1:0]    ptr;
    logic             filled;
    logic [WIDTH-1:0] rd;

    always_ff @(posedge clk) begin
      mem[ptr] <= din;
      rd       <= mem[ptr];
    end

    always_ff @(posedge clk) begin
      if (rst) begin
        ptr    <= '0;
        filled <= 1'b0;
      end else if (ptr == AW'(DEPTH - 2)) begin
        ptr    <= '0;
        filled <= 1'b1;
      end else begin
        ptr    <= ptr + 1'b1;
      end
    end

    logic filled_q;
    always_ff @(posedge clk) begin
      if (rst) filled_q <= 1'b0;
      else     filled_q <= filled;
    end
    assign dout = filled_q ? rd : '0;
  end
endmodule
