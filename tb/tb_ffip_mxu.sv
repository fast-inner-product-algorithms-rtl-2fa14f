// tb_ffip_mxu: self-checking test of the FFIP matrix unit at X=8, Y=6.
//
// Loads random signed weight tiles into both banks (the second while the
// first is in use), streams random activation rows through and compares
// every output with sum_k a_k*b_kj + beta_j - r*sum_k a_k computed here
// directly from the weights. It also checks the output latency of each row
// (X/2 + j + 3 cycles) and that a bank switch takes effect exactly at the
// first row that names the new bank.
module tb_ffip_mxu;
  localparam int X = 8, Y = 6, W = 8;
  localparam int ACC_W = ffip_pkg::acc_width(W, X);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic a_valid = 0, a_bank = 0, wl_start = 0, wl_bank = 0;
  logic b_valid = 0, b_first = 0, b_last = 0;
  logic signed [X-1:0][W-1:0] a = '0, b = '0;
  logic signed [W-1:0] r = '0;
  logic wl_busy, wl_done;
  logic [Y-1:0] c_valid;
  logic signed [Y-1:0][ACC_W-1:0] c;

  ffip_mxu #(.X(X), .Y(Y), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  int bw [2][X][Y];          // weights per bank
  longint exp_q [Y][$];      // expected results per row
  int     due_q [Y][$];      // cycle at which they are due
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic load_tile(input int bank);
    @(negedge clk); wl_start = 1; wl_bank = bank[0];
    @(negedge clk); wl_start = 0;
    for (int k = 0; k < X; k++) for (int j = 0; j < Y; j++) bw[bank][k][j] = $signed($urandom_range(0, 255)) - 128;
    for (int q = 0; q < Y; q++) begin       // column j = Y-1-q (0-based)
      b_valid = 1; b_first = (q == 0); b_last = (q == Y-1);
      for (int k = 0; k < X; k++) b[k] = W'(bw[bank][k][Y-1-q]);
      @(negedge clk); b_valid = 0; b_first = 0; b_last = 0;
      @(negedge clk);
    end
  endtask

  task automatic send_row(input int bank);
    longint s, sa, beta;
    int av [X];
    for (int k = 0; k < X; k++) begin av[k] = $signed($urandom_range(0, 255)) - 128; a[k] = W'(av[k]); end
    a_valid = 1; a_bank = bank[0];
    sa = 0; for (int k = 0; k < X; k++) sa += av[k];
    for (int j = 0; j < Y; j++) begin
      s = 0; beta = 0;
      for (int k = 0; k < X; k++) s += av[k] * bw[bank][k][j];
      for (int k = 0; k < X; k += 2) beta += bw[bank][k][j] * bw[bank][k+1][j];
      exp_q[j].push_back(s + beta - longint'(r) * sa);
      due_q[j].push_back(cycle + X/2 + j + 3);
    end
    @(negedge clk); a_valid = 0;
  endtask

  // output checker
  always @(negedge clk) if (rst_n) begin
    for (int j = 0; j < Y; j++) if (c_valid[j]) begin
      longint e; int d;
      checks++;
      if (exp_q[j].size() == 0) begin failures++; $display("row %0d: unexpected output", j); end
      else begin
        e = exp_q[j].pop_front(); d = due_q[j].pop_front();
        if (c[j] !== ACC_W'(e) || cycle != d) begin
          failures++;
          $display("row %0d: got %0d exp %0d at cycle %0d (due %0d)", j, c[j], ACC_W'(e), cycle, d);
        end
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    load_tile(0);
    wait (!wl_busy); @(negedge clk);
    r = 8'sd0;
    for (int n = 0; n < 10; n++) send_row(0);
    // load bank 1 while bank 0 keeps streaming
    fork
      load_tile(1);
      begin for (int n = 0; n < 2*Y+6; n++) send_row(0); end
    join
    wait (!wl_busy);
    repeat (X/2 + 3) @(negedge clk);   // r is a layer constant: let rows drain
    r = -8'sd3;
    for (int n = 0; n < 8; n++) begin send_row(1); send_row(0); end
    repeat (X + Y + 10) @(negedge clk);
    for (int j = 0; j < Y; j++) if (exp_q[j].size() != 0) begin failures++; $display("row %0d: %0d outputs missing", j, exp_q[j].size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
