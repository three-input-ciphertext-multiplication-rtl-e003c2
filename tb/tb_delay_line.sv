// tb_delay_line: self-checking test of the fixed delay, for depths 1, 2 and 7.
// A random word enters every cycle; after the fill period each output must be
// the input of exactly DEPTH cycles before, and while the buffer fills after
// reset the output must read as zero.
module tb_delay_line;
  localparam int WIDTH = 12;
  localparam int NB    = 300;

  logic clk = 0, rst = 1;
  logic [WIDTH-1:0] din;
  logic [WIDTH-1:0] dout [3];
  logic [WIDTH-1:0] hist [$];
  int checks = 0, failures = 0;
  localparam int DEPTHS [3] = '{1, 2, 7};

  delay_line #(.WIDTH(WIDTH), .DEPTH(1)) u_d1 (.clk(clk), .rst(rst), .din(din), .dout(dout[0]));
  delay_line #(.WIDTH(WIDTH), .DEPTH(2)) u_d2 (.clk(clk), .rst(rst), .din(din), .dout(dout[1]));
  delay_line #(.WIDTH(WIDTH), .DEPTH(7)) u_d7 (.clk(clk), .rst(rst), .din(din), .dout(dout[2]));

  always #5 clk = ~clk;

  initial begin
    repeat (NB + 50) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < NB; n++) begin
      automatic logic [WIDTH-1:0] w = WIDTH'($urandom());
      din <= w;
      hist.push_front(w);           // hist[k] = input applied k cycles ago
      @(posedge clk);
      #1;
      for (int k = 0; k < 3; k++) begin
        checks++;
        if (n >= DEPTHS[k] - 1) begin
          if (dout[k] != hist[DEPTHS[k] - 1]) begin
            failures++;
            if (failures < 8) $display("depth %0d cycle %0d got %h exp %h", DEPTHS[k], n, dout[k], hist[DEPTHS[k]-1]);
          end
        end else if (dout[k] != '0) begin
          failures++;
          $display("depth %0d cycle %0d: not zero while filling", DEPTHS[k], n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
