// alpha_generator: the extra MAC row of the FIP/FFIP matrix unit.
//
// Computes alpha_i = sum_k a_{i,2k-1} * a_{i,2k}, the term that the fast
// inner product subtracts from every output of row vector a_i. It has one
// multiplier and one adder per column pair, with the running sum passed
// right through a register, so it consumes the skewed inputs exactly like a
// PE row: pair p (1-based) must present a_i at cycle t+p, and alpha_i is on
// the output at cycle t+X/2+1. Widths follow the PE accumulators
// (2w+clog2(X)+1, wrapping). No reset: the output is only read with valid data.
module alpha_generator #(
  parameter int X     = ffip_pkg::X_DEF,
  parameter int W     = ffip_pkg::W_DEF,
  parameter int ACC_W = ffip_pkg::acc_width(ffip_pkg::W_DEF, ffip_pkg::X_DEF)
) (
  input  logic                          clk,
  input  logic signed [X-1:0][W-1:0]    a_sk,
  output logic signed [ACC_W-1:0]       alpha
);

  localparam int P = X / 2;
  logic signed [ACC_W-1:0] part [P];

  for (genvar p = 0; p < P; p++) begin : g_cell
    logic signed [2*W-1:0] prod;
    assign prod = signed'(a_sk[2*p]) * signed'(a_sk[2*p+1]);
    always_ff @(posedge clk) begin
      if (p == 0) part[p] <= ACC_W'(prod);
      else        part[p] <= part[p > 0 ? p-1 : 0] + ACC_W'(prod);
    end
  end

  assign alpha = part[P-1];

endmodule
