// tb_y_generator: feeds weight tiles column by column (j = Y..1, every other
// cycle) and checks the emitted sequence y_Y, ..., y_1 with
// y_j = b_j - b_{j-1}, y_1 = b_1, and that outputs stay two cycles apart.
module tb_y_generator;
  localparam int X = 4, W = 8, Y = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic b_valid = 0, b_first = 0, b_last = 0, y_valid;
  logic signed [X-1:0][W-1:0] b = '0;
  logic signed [X-1:0][W:0] y;
  y_generator #(.X(X), .W(W)) dut (.*);
  int checks = 0, failures = 0, bv [Y][X], nout = 0, last_t = -10, t = 0;
  always @(posedge clk) t <= t + 1;
  always @(negedge clk) if (y_valid) begin
    int j;
    j = Y - 1 - (nout % Y);            // 0-based column index expected
    checks++;
    for (int k = 0; k < X; k++) begin
      int e;
      e = (j == 0) ? bv[0][k] : bv[j][k] - bv[j-1][k];
      if (y[k] != (W+1)'(e)) begin failures++; $display("y[%0d] col %0d: %0d exp %0d", k, j, y[k], e); end
    end
    if (nout % Y != 0 && t - last_t != 2) begin failures++; $display("spacing %0d", t - last_t); end
    last_t = t; nout++;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int tile = 0; tile < 3; tile++) begin
      for (int j = 0; j < Y; j++) for (int k = 0; k < X; k++) bv[j][k] = $signed($urandom_range(0, 255)) - 128;
      for (int q = 0; q < Y; q++) begin
        b_valid = 1; b_first = (q == 0); b_last = (q == Y-1);
        for (int k = 0; k < X; k++) b[k] = W'(bv[Y-1-q][k]);
        @(negedge clk); b_valid = 0; b_first = 0; b_last = 0; @(negedge clk);
      end
      repeat (4) @(negedge clk);
    end
    checks++; if (nout != 3*Y) begin failures++; $display("%0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (1000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
