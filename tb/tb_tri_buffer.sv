// tb_tri_buffer: checks the lane delays of the triangular buffer: ceil(k/2)
// cycles for lane k in the paired (FFIP input) form and N-k cycles in the
// reversed (output deskew) form, for data and side bits, on random vectors.
module tb_tri_buffer;
  localparam int N = 8, EW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [N-1:0][EW-1:0] din = '0, dp, dr;
  logic [N-1:0] sin = '0, sp, sr;
  tri_buffer #(.N(N), .EW(EW), .PAIRED(1'b1), .REVERSE(1'b0)) dut  (.clk(clk), .din(din), .sin(sin), .dout(dp), .sout(sp));
  tri_buffer #(.N(N), .EW(EW), .PAIRED(1'b0), .REVERSE(1'b1)) dutr (.clk(clk), .din(din), .sin(sin), .dout(dr), .sout(sr));
  int checks = 0, failures = 0;
  logic [N-1:0][EW-1:0] hist_d [$];
  logic [N-1:0]         hist_s [$];
  initial begin
    for (int n = 0; n < 100; n++) begin
      for (int l = 0; l < N; l++) din[l] = EW'($urandom()); sin = N'($urandom());
      hist_d.push_front(din); hist_s.push_front(sin);   // hist[0] = current
      #1;
      if (n >= N) for (int l = 0; l < N; l++) begin
        int dpd, drd;
        dpd = (l + 2) / 2; drd = N - 1 - l;
        checks += 2;
        if (dp[l] != hist_d[dpd][l] || sp[l] != hist_s[dpd][l]) begin failures++; $display("paired lane %0d wrong", l); end
        if (dr[l] != hist_d[drd][l] || sr[l] != hist_s[drd][l]) begin failures++; $display("reverse lane %0d wrong", l); end
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (1000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
