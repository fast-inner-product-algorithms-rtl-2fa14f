// tb_alpha_generator: drives random skewed inputs and checks that after each
// clock alpha = sum over pairs p of a_{2p}*a_{2p+1}, where pair p's values are
// those it saw P-1-p cycles earlier (the systolic skew), at X=8.
module tb_alpha_generator;
  localparam int X = 8, W = 8, P = X/2, ACC_W = 2*W + 3 + 1;
  logic clk = 0;
  always #5 clk = ~clk;
  logic signed [X-1:0][W-1:0] a_sk = '0;
  logic signed [ACC_W-1:0] alpha;
  alpha_generator #(.X(X), .W(W), .ACC_W(ACC_W)) dut (.*);
  int checks = 0, failures = 0;
  int prod_h [$][P];
  initial begin
    for (int n = 0; n < 200; n++) begin
      int pr [P];
      @(negedge clk);
      for (int k = 0; k < X; k++) a_sk[k] = W'($urandom());
      for (int p = 0; p < P; p++) pr[p] = int'($signed(a_sk[2*p])) * int'($signed(a_sk[2*p+1]));
      prod_h.push_front(pr);
      @(posedge clk); #1;
      if (n >= P) begin
        int e; e = 0;
        for (int p = 0; p < P; p++) e += prod_h[P-1-p][p];
        checks++;
        if (alpha != ACC_W'(e)) begin failures++; $display("alpha %0d exp %0d", alpha, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (1000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
