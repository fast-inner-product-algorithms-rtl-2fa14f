// tb_post_gemm: checks the post-GEMM pipeline (bias, fixed-point re-scaling
// with round-half-up, ReLU, saturation to w bits) against a direct model on
// random inputs, over several bias vectors, scales and ReLU settings; the
// result and its tag must appear exactly three cycles after the input.
module tb_post_gemm;
  import ffip_pkg::*;
  localparam int Y = 4, W = 8, IN_W = 32, NT = 1 << NT_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bias_we = 0, relu_en = 0, in_valid = 0, out_valid;
  logic [NT_W-1:0] bias_waddr = '0;
  logic signed [Y-1:0][IN_W-1:0] bias_wdata = '0, in = '0;
  logic signed [15:0] scale_m = '0;
  logic [5:0] scale_sh = '0;
  gemm_tag_t in_tag = '0, out_tag;
  logic signed [Y-1:0][W-1:0] out;
  post_gemm #(.Y(Y), .W(W), .IN_W(IN_W)) dut (.*);
  int checks = 0, failures = 0, cycle = 0, nsat = 0, nrelu = 0;
  always @(posedge clk) cycle <= cycle + 1;
  int bias [NT][Y];
  int exp_q [Y][$];
  int due_q [$], tag_q [$];

  function automatic int model(longint x, longint m, int sh, bit relu);
    longint s;
    s = x * m;
    if (sh != 0) s = (s + (longint'(1) << (sh - 1))) >>> sh;
    if (relu && s < 0) begin nrelu++; return 0; end
    if (s > 127)  begin nsat++; return 127; end
    if (s < -128) begin nsat++; return -128; end
    return int'(s);
  endfunction

  always @(negedge clk) if (rst_n && out_valid) begin
    int e [Y]; int d, tg;
    checks++;
    if (due_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      for (int j = 0; j < Y; j++) e[j] = exp_q[j].pop_front();
      d = due_q.pop_front(); tg = tag_q.pop_front();
      for (int j = 0; j < Y; j++) if (int'(signed'(out[j])) != e[j]) begin failures++; $display("col %0d: %0d exp %0d", j, out[j], e[j]); end
      if (cycle != d || int'(out_tag.oaddr) != tg) begin failures++; $display("timing/tag wrong"); end
    end
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      bias_we = 1; bias_waddr = NT_W'(t);
      for (int j = 0; j < Y; j++) begin bias[t][j] = $signed($urandom_range(0, 20000)) - 10000; bias_wdata[j] = IN_W'(bias[t][j]); end
      @(negedge clk);
    end
    bias_we = 0;
    for (int cfg = 0; cfg < 6; cfg++) begin
      scale_m = 16'($urandom_range(1, 3000)); scale_sh = 6'($urandom_range(0, 20)); relu_en = cfg[0];
      if (cfg == 2) scale_sh = 0;
      for (int n = 0; n < 60; n++) begin
        int e [Y]; int nt;
        nt = $urandom_range(0, NT-1);
        in_valid = ($urandom_range(0, 3) != 0);
        in_tag = '0; in_tag.nt = NT_W'(nt); in_tag.oaddr = TILER_AW'($urandom());
        for (int j = 0; j < Y; j++) begin
          int x; x = $signed($urandom_range(0, 400000)) - 200000;
          in[j] = IN_W'(x);
          e[j] = model(longint'(x) + bias[nt][j], longint'(scale_m), int'(scale_sh), relu_en);
        end
        if (in_valid) begin for (int j = 0; j < Y; j++) exp_q[j].push_back(e[j]); due_q.push_back(cycle + 3); tag_q.push_back(int'(in_tag.oaddr)); end
        @(negedge clk);
      end
      in_valid = 0; repeat (4) @(negedge clk);
    end
    checks++; if (due_q.size() != 0 || nsat == 0 || nrelu == 0) begin failures++; $display("left %0d sat %0d relu %0d", due_q.size(), nsat, nrelu); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
