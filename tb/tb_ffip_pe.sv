// tb_ffip_pe: cycle-by-cycle check of one FFIP PE against its equations.
// Loads both y banks through the shift port, then drives random g, bank and
// partial-sum inputs and checks, every cycle, g_out = g_in + y[bank] (one
// cycle later) and c_out = c_in + g_out_odd * g_out_even (the registered g).
module tb_ffip_pe;
  localparam int W = 8, D = 1, ACC_W = 23;
  logic clk = 0;
  always #5 clk = ~clk;
  logic signed [W+D-1:0] g_in_odd = '0, g_in_even = '0, g_out_odd, g_out_even;
  logic bank_in = 0, bank_out, ysh_en = 0, load_bank = 0;
  logic signed [ACC_W-1:0] c_in = '0, c_out;
  logic signed [W:0] ysh_in_odd = '0, ysh_in_even = '0, ysh_out_odd, ysh_out_even;
  ffip_pe #(.W(W), .D(D), .ACC_W(ACC_W)) dut (.*);

  int checks = 0, failures = 0;
  int yo [2], ye [2];
  int pg_o, pg_e, pc, pb;
  logic signed [W+D-1:0] prev_go, prev_ge;

  initial begin
    for (int bk = 0; bk < 2; bk++) begin
      @(negedge clk);
      yo[bk] = $signed($urandom_range(0, 511)) - 256; ye[bk] = $signed($urandom_range(0, 511)) - 256;
      ysh_en = 1; load_bank = bk[0]; ysh_in_odd = (W+1)'(yo[bk]); ysh_in_even = (W+1)'(ye[bk]);
      @(negedge clk); ysh_en = 0;
      checks++;
      if (ysh_out_odd != (W+1)'(yo[bk]) || ysh_out_even != (W+1)'(ye[bk])) begin failures++; $display("shift-out wrong"); end
    end
    ysh_in_odd = '1;  // must not be taken while ysh_en is low
    @(negedge clk);
    for (int n = 0; n < 300; n++) begin
      // choose inputs whose sum fits w+d bits, like a + b does in the array
      pb = $urandom_range(0, 1);
      pg_o = $signed($urandom_range(0, 255)) - 128 + 0;
      pg_e = $signed($urandom_range(0, 255)) - 128;
      pc = $signed($urandom_range(0, 1 << 20)) - (1 << 19);
      g_in_odd = (W+D)'(pg_o); g_in_even = (W+D)'(pg_e); bank_in = pb[0]; c_in = ACC_W'(pc);
      prev_go = g_out_odd; prev_ge = g_out_even;
      @(negedge clk);
      checks += 3;
      if (g_out_odd  != (W+D)'(pg_o + yo[pb])) begin failures++; $display("g_odd %0d != %0d", g_out_odd, pg_o + yo[pb]); end
      if (g_out_even != (W+D)'(pg_e + ye[pb])) begin failures++; $display("g_even wrong"); end
      if (c_out != ACC_W'(pc + int'(prev_go) * int'(prev_ge))) begin failures++; $display("c_out %0d != %0d", c_out, pc + prev_go*prev_ge); end
      if (bank_out != pb[0]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
