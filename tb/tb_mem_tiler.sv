// tb_mem_tiler: checks the memory tiler against the loop nest it replaces.
// A 3x3 convolution read pattern (input of IW columns, CT channel tiles,
// H_t row tiles of HT rows, N_t output tiles) is generated here with seven
// nested loops and compared, step by step, with the tiler's addresses; the
// tiler is stepped with random gaps. Also checks 'last' on the final address,
// that valid falls after it, and a second run with other sizes (size-1
// digits, a zero stride) after a restart.
module tb_mem_tiler;
  import ffip_pkg::*;
  localparam int D = TILER_DIGITS, AW = TILER_AW, CW = TILER_CW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, step = 0, valid, last;
  logic [AW-1:0] base = '0, addr;
  logic [D-1:0][CW-1:0] size = '0;
  logic [D-1:0][AW-1:0] stride = '0;
  mem_tiler dut (.*);
  int checks = 0, failures = 0;

  task automatic run(input int b, input int sz [D], input int st [D]);
    int exp_q [$];
    @(negedge clk);
    base = AW'(b);
    for (int d = 0; d < D; d++) begin size[d] = CW'(sz[d]); stride[d] = AW'(st[d]); end
    // Algorithm-1 style nest, outermost digit first
    for (int nt = 0; nt < sz[DIG_NT]; nt++)
     for (int ht = 0; ht < sz[DIG_HT]; ht++)
      for (int kh = 0; kh < sz[DIG_KH]; kh++)
       for (int kw = 0; kw < sz[DIG_KW]; kw++)
        for (int ct = 0; ct < sz[DIG_CINT]; ct++)
         for (int h = 0; h < sz[DIG_H]; h++)
          for (int w = 0; w < sz[DIG_W]; w++)
            exp_q.push_back((b + nt*st[DIG_NT] + ht*st[DIG_HT] + kh*st[DIG_KH] + kw*st[DIG_KW]
                             + ct*st[DIG_CINT] + h*st[DIG_H] + w*st[DIG_W]) % (1 << AW));
    start = 1; @(negedge clk); start = 0;
    while (exp_q.size() != 0) begin
      int e;
      step = ($urandom_range(0, 3) != 0);
      if (step) begin
        e = exp_q.pop_front();
        checks++;
        if (!valid || int'(addr) != e || last != (exp_q.size() == 0)) begin
          failures++; $display("addr %0d exp %0d valid %0d last %0d", addr, e, valid, last);
        end
      end
      @(negedge clk);
    end
    step = 0;
    checks++; if (valid) begin failures++; $display("valid after last"); end
  endtask

  initial begin
    int sz [D], st [D];
    localparam int IW = 10, CT = 3, HT = 4;
    repeat (3) @(negedge clk); rst_n = 1;
    // input word (row, col, ct) at ((row*IW)+col)*CT + ct; output size 8 x HT*2
    sz[DIG_W] = 8;  st[DIG_W] = CT;
    sz[DIG_H] = HT; st[DIG_H] = IW*CT;
    sz[DIG_CINT] = CT; st[DIG_CINT] = 1;
    sz[DIG_KW] = 3; st[DIG_KW] = CT;
    sz[DIG_KH] = 3; st[DIG_KH] = IW*CT;
    sz[DIG_HT] = 2; st[DIG_HT] = HT*IW*CT;
    sz[DIG_NT] = 2; st[DIG_NT] = 0;
    run(37, sz, st);
    // plain GEMM walk: M rows, K passes, N tiles; unit digits in between
    sz = '{5, 1, 3, 1, 1, 1, 2}; st = '{1, 0, 5, 0, 0, 0, 0};
    run(1000, sz, st);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
