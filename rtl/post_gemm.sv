// post_gemm: bias, re-scaling and activation of finished GEMM results.
//
// Three register stages on each Y-wide result vector:
//   1. bias:     x + bias[nt][j]. The stored bias already holds bias_j-beta_j,
//                which removes the FFIP weight term beta_j at no cost.
//   2. rescale:  (x * scale_m + 2^(scale_sh-1)) >>> scale_sh, one multiplier
//                per lane (the inter-layer requantization).
//   3. activate: optional ReLU, then saturation to w-bit signed.
// Bias vectors are written through bias_we/bias_waddr/bias_wdata, one per N
// tile. Output three cycles after the input, tag passed along.
// The fixed-point rescale format, ReLU and the bias table are this design's
// choices; the paper names the stages and the beta folding only.
module post_gemm
  import ffip_pkg::*;
#(
  parameter int Y     = Y_DEF,
  parameter int W     = W_DEF,
  parameter int IN_W  = 32,
  parameter int NT    = 1 << NT_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          bias_we,
  input  logic [NT_W-1:0]               bias_waddr,
  input  logic signed [Y-1:0][IN_W-1:0] bias_wdata,
  input  logic signed [15:0]            scale_m,
  input  logic [5:0]                    scale_sh,
  input  logic                          relu_en,
  input  logic                          in_valid,
  input  logic signed [Y-1:0][IN_W-1:0] in,
  input  gemm_tag_t                     in_tag,
  output logic                          out_valid,
  output logic signed [Y-1:0][W-1:0]    out,
  output gemm_tag_t                     out_tag
);

  localparam int PW = IN_W + 16;
  logic [Y*IN_W-1:0] bias_mem [NT];

  always_ff @(posedge clk) if (bias_we) bias_mem[bias_waddr] <= bias_wdata;

  logic signed [Y-1:0][IN_W-1:0] bias_rd, s1;
  logic signed [Y-1:0][PW-1:0]   s2;
  logic [2:0] v;
  gemm_tag_t t1, t2;
  assign bias_rd = bias_mem[in_tag.nt];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[1:0], in_valid};
  end
  assign out_valid = v[2];

  localparam logic signed [PW-1:0] QMAX = PW'((1 << (W-1)) - 1);
  localparam logic signed [PW-1:0] QMIN = -PW'(1 << (W-1));
  logic signed [PW-1:0] rnd;
  assign rnd = (scale_sh == 0) ? '0 : (PW'(1) <<< (scale_sh - 1));

  always_ff @(posedge clk) begin
    t1 <= in_tag;
    t2 <= t1;
    out_tag <= t2;
    for (int j = 0; j < Y; j++) begin
      s1[j] <= in[j] + bias_rd[j];
      s2[j] <= (PW'(signed'(s1[j])) * PW'(scale_m) + rnd) >>> scale_sh;
      if (relu_en && signed'(s2[j]) < 0)          out[j] <= '0;
      else if (signed'(s2[j]) > QMAX)             out[j] <= W'(QMAX);
      else if (signed'(s2[j]) < QMIN)             out[j] <= W'(QMIN);
      else                                        out[j] <= W'(s2[j]);
    end
  end

endmodule
