// tb_pipe_delay - checks the delay line: q equals d from DEPTH cycles
// earlier for random data, and the resettable variant clears on reset.
module tb_pipe_delay;
  localparam int DEPTH = 13;
  localparam int WIDTH = 20;
  logic clk = 0, rst_n = 0;
  logic [WIDTH-1:0] d, q, q1;
  logic [WIDTH-1:0] hist [$];
  int checks = 0, failures = 0;

  pipe_delay #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.clk(clk), .rst_n(rst_n), .d(d), .q(q));
  pipe_delay #(.WIDTH(1), .DEPTH(4), .RESET(1'b1)) dut_r (.clk(clk), .rst_n(rst_n), .d(1'b1), .q(q1[0]));
  assign q1[WIDTH-1:1] = '0;

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0;
    repeat (3) @(negedge clk);
    checks++; if (q1[0] !== 1'b0) begin failures++; $display("reset not clearing"); end
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      if (n >= DEPTH) begin
        checks++;
        if (q !== hist[n - DEPTH]) begin failures++; $display("n=%0d q=%h exp=%h", n, q, hist[n-DEPTH]); end
      end
      if (n == 3) begin checks++; if (q1[0] !== 1'b1) failures++; end
      if (n == 1) begin checks++; if (q1[0] !== 1'b0) failures++; end
      d = WIDTH'($urandom);
      hist.push_back(d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
