// tb_zp_adjuster: drives random skewed inputs and a random zero point and
// checks ar = r * sum of all a elements, pair p taken P-1-p cycles back.
module tb_zp_adjuster;
  localparam int X = 8, W = 8, P = X/2, ACC_W = 2*W + 3 + 1;
  logic clk = 0;
  always #5 clk = ~clk;
  logic signed [X-1:0][W-1:0] a_sk = '0;
  logic signed [W-1:0] r = '0;
  logic signed [ACC_W-1:0] ar;
  zp_adjuster #(.X(X), .W(W), .ACC_W(ACC_W)) dut (.*);
  int checks = 0, failures = 0;
  int sum_h [$][P];
  initial begin
    r = -8'sd7;
    for (int n = 0; n < 200; n++) begin
      int ps [P];
      @(negedge clk);
      if (n == 100) r = 8'sd113;
      for (int k = 0; k < X; k++) a_sk[k] = W'($urandom());
      for (int p = 0; p < P; p++) ps[p] = int'($signed(a_sk[2*p])) + int'($signed(a_sk[2*p+1]));
      sum_h.push_front(ps);
      @(posedge clk); #1;
      if (n >= P) begin
        int e; e = 0;
        for (int p = 0; p < P; p++) e += sum_h[P-1-p][p];
        checks++;
        if (ar != ACC_W'(e * int'(r))) begin failures++; $display("ar %0d exp %0d", ar, e * r); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (1000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
