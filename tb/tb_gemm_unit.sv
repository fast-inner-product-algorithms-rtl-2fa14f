// tb_gemm_unit: self-checking test of the GEMM unit at X=Y=4.
//
// Runs two GEMMs of M rows x K passes. Each pass loads a fresh random weight
// tile (alternating banks) and streams M random activation rows with tags
// (row, first, last, output address). The expected result of row m is the
// sum over passes of a.B + beta - r*sum(a), computed here; it is compared
// with res, the tag is compared with res_tag, and res_valid must come
// X/2+Y+3 cycles after the row of the last pass entered. No result may
// appear on a non-final pass.
module tb_gemm_unit;
  import ffip_pkg::*;
  localparam int X = 4, Y = 4, W = 8, ACC_DEPTH = 16, OUT_W = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic a_valid = 0, a_bank = 0, wl_start = 0, wl_bank = 0, b_valid = 0, b_first = 0, b_last = 0;
  logic signed [X-1:0][W-1:0] a = '0, b = '0;
  gemm_tag_t a_tag = '0, res_tag;
  logic signed [W-1:0] r = '0;
  logic wl_busy, wl_done, res_valid;
  logic signed [Y-1:0][OUT_W-1:0] res;
  gemm_unit #(.X(X), .Y(Y), .W(W), .ACC_DEPTH(ACC_DEPTH), .OUT_W(OUT_W)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, nres = 0;
  always @(posedge clk) cycle <= cycle + 1;
  int bw [X][Y];
  longint expv [ACC_DEPTH][Y];
  longint exp_q [Y][$];
  int due_q [$], oaddr_q [$];

  task automatic load_tile(input int bank);
    @(negedge clk); wl_start = 1; wl_bank = bank[0];
    @(negedge clk); wl_start = 0;
    for (int k = 0; k < X; k++) for (int j = 0; j < Y; j++) bw[k][j] = $signed($urandom_range(0, 255)) - 128;
    for (int q = 0; q < Y; q++) begin
      b_valid = 1; b_first = (q == 0); b_last = (q == Y-1);
      for (int k = 0; k < X; k++) b[k] = W'(bw[k][Y-1-q]);
      @(negedge clk); b_valid = 0; b_first = 0; b_last = 0;
      @(negedge clk);
    end
    wait (!wl_busy); @(negedge clk);
  endtask

  task automatic run_gemm(input int M, input int K, input int rr);
    r = W'(rr);
    for (int kp = 0; kp < K; kp++) begin
      load_tile(kp % 2);
      for (int m = 0; m < M; m++) begin
        int av [X]; longint sa;
        for (int k = 0; k < X; k++) begin av[k] = $signed($urandom_range(0, 255)) - 128; a[k] = W'(av[k]); end
        sa = 0; for (int k = 0; k < X; k++) sa += av[k];
        for (int j = 0; j < Y; j++) begin
          longint s; s = 0;
          for (int k = 0; k < X; k++) s += av[k] * bw[k][j];
          for (int k = 0; k < X; k += 2) s += bw[k][j] * bw[k+1][j];
          s -= longint'(rr) * sa;
          expv[m][j] = (kp == 0) ? s : expv[m][j] + s;
        end
        a_valid = 1; a_bank = kp[0];
        a_tag = '0; a_tag.row = ROW_W'(m); a_tag.first = (kp == 0); a_tag.last = (kp == K-1);
        a_tag.oaddr = TILER_AW'(100 + m);
        if (kp == K-1) begin for (int j = 0; j < Y; j++) exp_q[j].push_back(expv[m][j]); due_q.push_back(cycle + X/2 + Y + 3); oaddr_q.push_back(100 + m); end
        @(negedge clk); a_valid = 0;
        if (m % 3 == 2) @(negedge clk);       // gaps in the stream
      end
      repeat (X/2 + Y + 4) @(negedge clk);    // let the bank drain before it is reloaded
    end
  endtask

  always @(negedge clk) if (rst_n && res_valid) begin
    checks++; nres++;
    if (due_q.size() == 0) begin failures++; $display("unexpected result"); end
    else begin
      longint e [Y]; int d, o;
      for (int j = 0; j < Y; j++) e[j] = exp_q[j].pop_front();
      d = due_q.pop_front(); o = oaddr_q.pop_front();
      for (int j = 0; j < Y; j++) if (res[j] != OUT_W'(e[j])) begin failures++; $display("col %0d: %0d exp %0d at %0d", j, signed'(res[j]), e[j], cycle); end
      if (cycle != d) begin failures++; $display("result at %0d due %0d", cycle, d); end
      if (int'(res_tag.oaddr) != o) begin failures++; $display("tag %0d exp %0d", res_tag.oaddr, o); end
    end
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run_gemm(7, 3, 5);
    run_gemm(ACC_DEPTH, 2, -2);
    run_gemm(3, 1, 0);
    repeat (20) @(negedge clk);
    checks++; if (due_q.size() != 0 || nres != 7 + ACC_DEPTH + 3) begin failures++; $display("%0d results", nres); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
