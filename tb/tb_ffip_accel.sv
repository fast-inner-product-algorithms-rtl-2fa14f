// tb_ffip_accel: end-to-end test of the accelerator at X = Y = 8.
//
// Two layers run back to back as GEMMs on random signed 8-bit data:
//   run 1: M=20 rows, K=3 passes, N=2 weight tiles, zero point r=3, ReLU on
//   run 2: M=12 rows, K=2 passes, 2 M tiles (h_t), r=0, ReLU off
// The activations are written through the host port, the weights sit in a
// behavioural DRAM with random latency and back-pressure. Expected outputs
// are computed here from the plain definition sum_k a*(b-r) + bias, then
// rescaled, activated and saturated, and compared word by word with the
// layer IO memory. The test also counts each mechanism of the design and
// fails if one never happened: stalls for weights, weight loads overlapping
// computation, bank switches, accumulation over K passes, non-zero zero
// point, ReLU clamping and saturation. Streaming must run at one row per
// cycle (each pass is one unbroken burst of M rows).
module tb_ffip_accel;
  import ffip_pkg::*;
  localparam int X = 8, Y = 8, W = 8, OUT_W = 32, WAW = 24, IO_DEPTH = 1024;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_we = 0; logic [TILER_AW-1:0] host_waddr = '0; logic [X-1:0][W-1:0] host_wdata = '0;
  logic host_bias_we = 0; logic [NT_W-1:0] host_bias_waddr = '0; logic [Y-1:0][OUT_W-1:0] host_bias_wdata = '0;
  logic start = 0; tiler_cfg_t io_cfg = '0;
  logic [WAW-1:0] wt_base = '0;
  logic [TILER_DIGITS-1:0][TILER_CW-1:0] wt_size = '0;
  logic [TILER_DIGITS-1:0][WAW-1:0] wt_stride = '0;
  logic [ROW_W:0] m_len = '0; logic [TILER_CW-1:0] k_passes = '0, h_tiles = '0; logic [NT_W:0] n_tiles = '0;
  logic [TILER_AW-1:0] out_base = '0; logic signed [W-1:0] zero_point = '0;
  logic signed [15:0] scale_m = '0; logic [5:0] scale_sh = '0; logic relu_en = 0;
  logic busy, done;
  logic dram_req_valid; logic [WAW-1:0] dram_req_addr; logic dram_req_ready = 0;
  logic dram_rsp_valid; logic [X-1:0][W-1:0] dram_rsp_data;
  logic [31:0] stall_cycles, overlap_cycles;

  ffip_accel #(.X(X), .Y(Y), .W(W), .IO_DEPTH(IO_DEPTH), .WAW(WAW)) dut (.*);

  // ---------------- behavioural weight DRAM
  logic [X-1:0][W-1:0] dram [4096];
  weight_dram_model #(.DW(X*W), .AW(WAW)) u_dram (
    .clk(clk), .rst_n(rst_n), .req_valid(dram_req_valid), .req_addr(dram_req_addr),
    .req_ready(dram_req_ready), .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data),
    .mem_rd_data(dram[dram_req_addr[11:0]]));

  int checks = 0, failures = 0;
  int n_relu = 0, n_sat = 0, n_accum = 0, n_bankswitch = 0, n_zp = 0, cycles = 0;
  int n_avalid = 0, n_bursts = 0;
  logic prev_bank = 0, prev_av = 0;

  always @(posedge clk) begin
    cycles <= cycles + 1;
    if (dut.a_valid) begin
      n_avalid++;
      if (!prev_av) n_bursts++;
      if (dut.a_bank != prev_bank) n_bankswitch++;
      prev_bank = dut.a_bank;
      if (!dut.a_tag.first) n_accum++;
      if (zero_point != 0) n_zp++;
    end
    prev_av = dut.a_valid;
  end

  // ---------------- one layer
  int av [4][4][2][32][X];    // [h_t][kp][?unused][m][k]
  int bw [2][4][X][Y];        // [n_t][kp][k][j]

  task automatic run_layer(input int M, input int K, input int NT, input int HT,
                           input int r, input bit relu, input int sm, input int sh, input int obase);
    longint acc, beta, v, bias [2][Y];
    int exp_w, got;
    int bursts0, av0;
    // activations: address ht*K*M + kp*M + m
    for (int ht = 0; ht < HT; ht++) for (int kp = 0; kp < K; kp++) for (int m = 0; m < M; m++) begin
      for (int k = 0; k < X; k++) begin av[ht][kp][0][m][k] = $signed($urandom_range(0,255)) - 128; host_wdata[k] = W'(av[ht][kp][0][m][k]); end
      host_we = 1; host_waddr = TILER_AW'(ht*K*M + kp*M + m);
      @(negedge clk);
    end
    host_we = 0;
    // weights: DRAM address (nt*K + kp)*Y + q holds column Y-1-q
    for (int nt = 0; nt < NT; nt++) for (int kp = 0; kp < K; kp++) begin
      for (int k = 0; k < X; k++) for (int j = 0; j < Y; j++) bw[nt][kp][k][j] = $signed($urandom_range(0,255)) - 128;
      for (int q = 0; q < Y; q++) for (int k = 0; k < X; k++) dram[(nt*K + kp)*Y + q][k] = W'(bw[nt][kp][k][Y-1-q]);
    end
    // bias table: true bias minus the accumulated beta
    for (int nt = 0; nt < NT; nt++) begin
      for (int j = 0; j < Y; j++) begin
        beta = 0;
        for (int kp = 0; kp < K; kp++) for (int k = 0; k < X; k += 2) beta += bw[nt][kp][k][j] * bw[nt][kp][k+1][j];
        bias[nt][j] = $signed($urandom_range(0, 4000)) - 2000;
        host_bias_wdata[j] = OUT_W'(bias[nt][j] - beta);
      end
      host_bias_we = 1; host_bias_waddr = NT_W'(nt);
      @(negedge clk);
    end
    host_bias_we = 0;
    // configuration
    io_cfg = '0; wt_size = '0; wt_stride = '0;
    for (int d = 0; d < TILER_DIGITS; d++) begin io_cfg.size[d] = 1; wt_size[d] = 1; end
    io_cfg.base = '0;
    io_cfg.size[DIG_W] = TILER_CW'(M);   io_cfg.stride[DIG_W] = 1;
    io_cfg.size[DIG_CINT] = TILER_CW'(K); io_cfg.stride[DIG_CINT] = TILER_AW'(M);
    io_cfg.size[DIG_HT] = TILER_CW'(HT); io_cfg.stride[DIG_HT] = TILER_AW'(K*M);
    io_cfg.size[DIG_NT] = TILER_CW'(NT); io_cfg.stride[DIG_NT] = '0;
    wt_base = '0;
    wt_size[DIG_W] = TILER_CW'(Y);      wt_stride[DIG_W] = 1;
    wt_size[DIG_CINT] = TILER_CW'(K);   wt_stride[DIG_CINT] = WAW'(Y);
    wt_size[DIG_HT] = TILER_CW'(HT);    wt_stride[DIG_HT] = '0;
    wt_size[DIG_NT] = TILER_CW'(NT);    wt_stride[DIG_NT] = WAW'(K*Y);
    m_len = (ROW_W+1)'(M); k_passes = TILER_CW'(K); h_tiles = TILER_CW'(HT); n_tiles = (NT_W+1)'(NT);
    out_base = TILER_AW'(obase); zero_point = W'(r); scale_m = 16'(sm); scale_sh = 6'(sh); relu_en = relu;
    bursts0 = n_bursts; av0 = n_avalid;
    start = 1; @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    // rate: every pass one burst of M rows
    checks++;
    if (n_avalid - av0 != M*K*NT*HT || n_bursts - bursts0 > K*NT*HT) begin
      failures++; $display("streaming rate: %0d rows in %0d bursts", n_avalid - av0, n_bursts - bursts0);
    end
    // results
    for (int nt = 0; nt < NT; nt++) for (int ht = 0; ht < HT; ht++) for (int m = 0; m < M; m++) begin
      for (int j = 0; j < Y; j++) begin
        acc = bias[nt][j];
        for (int kp = 0; kp < K; kp++) for (int k = 0; k < X; k++) acc += longint'(av[ht][kp][0][m][k]) * (bw[nt][kp][k][j] - r);
        v = acc * sm;
        if (sh > 0) v = (v + (longint'(1) << (sh-1))) >>> sh;
        if (relu && v < 0) begin exp_w = 0; n_relu++; end
        else if (v > 127) begin exp_w = 127; n_sat++; end
        else if (v < -128) begin exp_w = -128; n_sat++; end
        else exp_w = int'(v);
        got = $signed(dut.u_mem.mem[obase + (nt*HT + ht)*M + m][j*W +: W]);
        checks++;
        if (got != exp_w) begin
          failures++;
          if (failures < 10) $display("nt%0d ht%0d m%0d j%0d: got %0d exp %0d (pre-sat %0d)", nt, ht, m, j, got, exp_w, v);
        end
      end
    end
  endtask

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never exercised: %s", what); end
    else $display("%s: %0d", what, n);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    run_layer(20, 3, 2, 1, 3, 1'b1, 3, 10, 512);
    run_layer(12, 2, 1, 2, 0, 1'b0, 5, 9, 600);
    need("stall cycles waiting for weights", stall_cycles);
    need("cycles with weight load overlapping compute", overlap_cycles);
    need("bank switches", n_bankswitch);
    need("rows accumulated onto earlier passes", n_accum);
    need("rows with non-zero zero point", n_zp);
    need("ReLU clamps", n_relu);
    need("saturations", n_sat);
    $display("cycles: %0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
