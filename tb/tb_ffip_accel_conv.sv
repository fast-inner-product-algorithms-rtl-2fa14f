// tb_ffip_accel_conv: convolution layers on the accelerator, mapped to GEMM
// in place by the layer IO tiler (no im2col copy), at X = Y = 8.
//
// The input feature map is stored one word per pixel and channel tile, at
// address (row*IW + col)*CT + ct. The tiler digits walk w, h (output pixels,
// scaled by the convolution stride), cin_t, kw, kh (one pass each) and n_t
// (output channel tiles, stride 0), i.e. the loop nest of the in-place
// mapping. Weights for pass (n_t, kp) sit in the DRAM model at
// (n_t*K + kp)*Y + q, column Y-1-q, with kp = (kh*3 + kw)*CT + ct.
// Two layers: a 3x3 stride-1 convolution of a 7x7x16 map (r=2, ReLU) and a
// 3x3 stride-2 convolution of the same map (r=0). Every output pixel and
// channel is compared with a direct convolution computed here.
module tb_ffip_accel_conv;
  import ffip_pkg::*;
  localparam int X = 8, Y = 8, W = 8, OUT_W = 32, WAW = 24, IO_DEPTH = 1024;
  localparam int IW = 7, CT = 2, KS = 3, NTL = 2;

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

  logic [X-1:0][W-1:0] dram [4096];
  weight_dram_model #(.DW(X*W), .AW(WAW)) u_dram (
    .clk(clk), .rst_n(rst_n), .req_valid(dram_req_valid), .req_addr(dram_req_addr),
    .req_ready(dram_req_ready), .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data),
    .mem_rd_data(dram[dram_req_addr[11:0]]));

  int checks = 0, failures = 0, n_relu = 0;
  int fm [IW][IW][CT*X];                 // input map [row][col][channel]
  int wt [NTL][KS][KS][CT*X][Y];         // weights [n_t][kh][kw][cin][cout in tile]

  task automatic run_conv(input int S, input int r, input bit relu, input int obase);
    int OW, K, M;
    longint acc, v, bias [NTL][Y], beta;
    int exp_w, got;
    OW = (IW - KS) / S + 1; K = KS*KS*CT; M = OW*OW;
    for (int row = 0; row < IW; row++) for (int col = 0; col < IW; col++) for (int ct = 0; ct < CT; ct++) begin
      for (int k = 0; k < X; k++) begin fm[row][col][ct*X+k] = $signed($urandom_range(0, 255)) - 128; host_wdata[k] = W'(fm[row][col][ct*X+k]); end
      host_we = 1; host_waddr = TILER_AW'((row*IW + col)*CT + ct);
      @(negedge clk);
    end
    host_we = 0;
    for (int nt = 0; nt < NTL; nt++) for (int kh = 0; kh < KS; kh++) for (int kw = 0; kw < KS; kw++) for (int ct = 0; ct < CT; ct++) begin
      int kp;
      kp = (kh*KS + kw)*CT + ct;
      for (int k = 0; k < X; k++) for (int j = 0; j < Y; j++) wt[nt][kh][kw][ct*X+k][j] = $signed($urandom_range(0, 255)) - 128;
      for (int q = 0; q < Y; q++) for (int k = 0; k < X; k++) dram[(nt*K + kp)*Y + q][k] = W'(wt[nt][kh][kw][ct*X+k][Y-1-q]);
    end
    for (int nt = 0; nt < NTL; nt++) begin
      for (int j = 0; j < Y; j++) begin
        beta = 0;
        for (int kh = 0; kh < KS; kh++) for (int kw = 0; kw < KS; kw++) for (int c = 0; c < CT*X; c += 2)
          beta += wt[nt][kh][kw][c][j] * wt[nt][kh][kw][c+1][j];
        bias[nt][j] = $signed($urandom_range(0, 4000)) - 2000;
        host_bias_wdata[j] = OUT_W'(bias[nt][j] - beta);
      end
      host_bias_we = 1; host_bias_waddr = NT_W'(nt);
      @(negedge clk);
    end
    host_bias_we = 0;
    io_cfg = '0; wt_size = '0; wt_stride = '0;
    for (int d = 0; d < TILER_DIGITS; d++) begin io_cfg.size[d] = 1; wt_size[d] = 1; end
    io_cfg.size[DIG_W]    = TILER_CW'(OW); io_cfg.stride[DIG_W]    = TILER_AW'(S*CT);
    io_cfg.size[DIG_H]    = TILER_CW'(OW); io_cfg.stride[DIG_H]    = TILER_AW'(S*IW*CT);
    io_cfg.size[DIG_CINT] = TILER_CW'(CT); io_cfg.stride[DIG_CINT] = 1;
    io_cfg.size[DIG_KW]   = TILER_CW'(KS); io_cfg.stride[DIG_KW]   = TILER_AW'(CT);
    io_cfg.size[DIG_KH]   = TILER_CW'(KS); io_cfg.stride[DIG_KH]   = TILER_AW'(IW*CT);
    io_cfg.size[DIG_NT]   = TILER_CW'(NTL); io_cfg.stride[DIG_NT]  = '0;
    wt_size[DIG_W] = TILER_CW'(Y);      wt_stride[DIG_W] = 1;
    wt_size[DIG_CINT] = TILER_CW'(K);   wt_stride[DIG_CINT] = WAW'(Y);
    wt_size[DIG_NT] = TILER_CW'(NTL);   wt_stride[DIG_NT] = WAW'(K*Y);
    m_len = (ROW_W+1)'(M); k_passes = TILER_CW'(K); h_tiles = 1; n_tiles = (NT_W+1)'(NTL);
    out_base = TILER_AW'(obase); zero_point = W'(r); scale_m = 16'd1; scale_sh = 6'd11; relu_en = relu;
    start = 1; @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    for (int nt = 0; nt < NTL; nt++) for (int oh = 0; oh < OW; oh++) for (int ow = 0; ow < OW; ow++) for (int j = 0; j < Y; j++) begin
      acc = bias[nt][j];
      for (int kh = 0; kh < KS; kh++) for (int kw = 0; kw < KS; kw++) for (int c = 0; c < CT*X; c++)
        acc += longint'(fm[oh*S+kh][ow*S+kw][c]) * (wt[nt][kh][kw][c][j] - r);
      v = (acc + 1024) >>> 11;
      if (relu && v < 0) begin exp_w = 0; n_relu++; end
      else if (v > 127) exp_w = 127;
      else if (v < -128) exp_w = -128;
      else exp_w = int'(v);
      got = $signed(dut.u_mem.mem[obase + nt*M + oh*OW + ow][j*W +: W]);
      checks++;
      if (got != exp_w) begin
        failures++;
        if (failures < 10) $display("S%0d nt%0d (%0d,%0d) ch%0d: got %0d exp %0d", S, nt, oh, ow, j, got, exp_w);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    run_conv(1, 2, 1'b1, 600);
    run_conv(2, 0, 1'b0, 700);
    checks++; if (n_relu == 0) begin failures++; $display("ReLU never clamped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
